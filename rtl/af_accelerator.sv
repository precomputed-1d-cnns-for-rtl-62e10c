// af_accelerator: SPI-controlled atrial-fibrillation detector built from
// a fully precomputed 1D-CNN.
//
// Data flow: the host writes one ECG window (N_SAMPLES 12-bit samples) into
// the input buffer over SPI and sends START. The sequencer then streams the
// buffer through the network at one sample per clock; the network's
// per-step AF probabilities land in the output buffer, and `done` rises
// (pin and status bit). The host reads the results over SPI.
//
//   spi_slave <-> host_if --write--> sdp_ram (input, N_SAMPLES x 12)
//                    |                   | read, 1 sample/clock
//                  start/status      accel_ctrl --> pcnn_network
//                    |                                   |
//                    +--read-- sdp_ram (output, OUT_LEN x 8) <--+
//
// The network, the input buffer, SPI control and the one-clock-per-sample
// schedule follow the paper; the SPI protocol, output buffer format and
// sequencing details are this design's (see the modules).
// Clocking: one clock, active-low asynchronous reset; SCLK <= clk/8.
module af_accelerator
#(
  parameter int unsigned N_SAMPLES = pcnn_pkg::N_SAMPLES,
  parameter int unsigned REPEAT    = 1,
  parameter int unsigned SEED      = pcnn_pkg::DEF_SEED
) (
  input  logic clk,
  input  logic rst_n,
  input  logic spi_sclk,
  input  logic spi_cs_n,
  input  logic spi_mosi,
  output logic spi_miso,
  output logic done
);

  localparam int unsigned K_FIRST = 10, K_OTHER = 6;
  localparam int unsigned P_FIRST = 8,  S_FIRST = 6, P_OTHER = 3, S_OTHER = 2;
  localparam int unsigned OUT_LEN = pcnn_pkg::net_out_len(N_SAMPLES, K_FIRST, K_OTHER,
                                      P_FIRST, S_FIRST, P_OTHER, S_OTHER, pcnn_pkg::N_BLOCKS);
  localparam int unsigned IN_AW   = (N_SAMPLES > 1) ? $clog2(N_SAMPLES) : 1;
  localparam int unsigned OUT_AW  = (OUT_LEN > 1) ? $clog2(OUT_LEN) : 1;

  if (OUT_LEN == 0) begin : g_check
    $error("af_accelerator: N_SAMPLES too small for the network's receptive field");
  end

  // SPI
  logic       frame_start, frame_end, rx_valid;
  logic [7:0] rx_byte, tx_byte;
  // buffers
  logic                         in_we, in_re;
  logic [IN_AW-1:0]             in_waddr, in_raddr;
  logic [pcnn_pkg::SAMPLE_W-1:0] in_wdata, in_rdata;
  logic                         out_we, out_re;
  logic [OUT_AW-1:0]            out_waddr, out_raddr;
  logic [pcnn_pkg::PROB_W-1:0]  out_wdata, out_rdata;
  // control
  logic start, busy;
  logic net_clear, net_in_valid, net_out_valid;

  spi_slave u_spi (
    .clk, .rst_n,
    .sclk (spi_sclk), .cs_n (spi_cs_n), .mosi (spi_mosi), .miso (spi_miso),
    .frame_start, .frame_end, .rx_valid, .rx_byte, .tx_byte
  );

  host_if #(
    .SAMPLE_BITS(pcnn_pkg::SAMPLE_W), .IN_AW(IN_AW), .OUT_AW(OUT_AW), .OUT_W(pcnn_pkg::PROB_W)
  ) u_host (
    .clk, .rst_n,
    .frame_start, .rx_valid, .rx_byte, .tx_byte,
    .in_we, .in_waddr, .in_wdata,
    .out_re, .out_raddr, .out_rdata,
    .start, .busy, .done
  );

  sdp_ram #(.W(pcnn_pkg::SAMPLE_W), .DEPTH(N_SAMPLES), .AW(IN_AW)) u_in_buf (
    .clk,
    .we (in_we), .waddr (in_waddr), .wdata (in_wdata),
    .re (in_re), .raddr (in_raddr), .rdata (in_rdata)
  );

  accel_ctrl #(
    .N_SAMPLES(N_SAMPLES), .OUT_LEN(OUT_LEN), .REPEAT(REPEAT), .IN_AW(IN_AW), .OUT_AW(OUT_AW)
  ) u_ctrl (
    .clk, .rst_n,
    .start, .busy, .done,
    .in_re, .in_raddr,
    .net_clear, .net_in_valid, .net_out_valid,
    .out_we, .out_waddr
  );

  pcnn_network #(
    .SAMPLE_BITS(pcnn_pkg::SAMPLE_W), .C0(pcnn_pkg::N_CH), .N_BLK(pcnn_pkg::N_BLOCKS),
    .K_FIRST(K_FIRST), .K_OTHER(K_OTHER),
    .P_FIRST(P_FIRST), .S_FIRST(S_FIRST), .P_OTHER(P_OTHER), .S_OTHER(S_OTHER),
    .OUT_W(pcnn_pkg::PROB_W), .SEED(SEED)
  ) u_net (
    .clk, .rst_n,
    .clear     (net_clear),
    .in_valid  (net_in_valid),
    .in_sample (in_rdata),
    .out_valid (net_out_valid),
    .out_prob  (out_wdata)
  );

  sdp_ram #(.W(pcnn_pkg::PROB_W), .DEPTH(OUT_LEN), .AW(OUT_AW)) u_out_buf (
    .clk,
    .we (out_we), .waddr (out_waddr), .wdata (out_wdata),
    .re (out_re), .raddr (out_raddr), .rdata (out_rdata)
  );

endmodule
