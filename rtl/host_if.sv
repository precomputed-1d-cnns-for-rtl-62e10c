// host_if: SPI command decoder between the host MCU and the accelerator.
//
// Each SPI frame (CS_N low) starts with a command byte (pcnn_pkg::cmd_e):
//   CMD_WRITE_INPUT  addr_hi addr_lo {4'b0,s[11:8]} s[7:0] ...  store
//                    samples in the input buffer from addr on
//   CMD_START        start an inference (ignored by the sequencer while busy)
//   CMD_STATUS       the byte after the command returns {6'b0, busy, done}
//   CMD_READ_OUTPUT  addr_hi addr_lo, then every further byte returns the
//                    output buffer entry at addr, addr+1, ...
// The first byte shifted out in every frame is the status byte as well.
// Unknown commands are ignored up to the end of the frame.
//
// Output-buffer reads are issued on the rx_valid of the address byte (and
// of every data byte after it); the RAM answers one clock later, well
// before the SPI slave loads the next transmit byte. The paper states only
// that the accelerator is controlled over SPI and signals start and done;
// the command set and byte formats here are this design's.
module host_if
  import pcnn_pkg::*;
#(
  parameter int unsigned SAMPLE_BITS = pcnn_pkg::SAMPLE_W,
  parameter int unsigned IN_AW       = 13,
  parameter int unsigned OUT_AW      = 7,
  parameter int unsigned OUT_W       = pcnn_pkg::PROB_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // byte stream from spi_slave
  input  logic                   frame_start,
  input  logic                   rx_valid,
  input  logic [7:0]             rx_byte,
  output logic [7:0]             tx_byte,
  // input buffer write port
  output logic                   in_we,
  output logic [IN_AW-1:0]       in_waddr,
  output logic [SAMPLE_BITS-1:0] in_wdata,
  // output buffer read port
  output logic                   out_re,
  output logic [OUT_AW-1:0]      out_raddr,
  input  logic [OUT_W-1:0]       out_rdata,
  // sequencer
  output logic                   start,
  input  logic                   busy,
  input  logic                   done
);

  typedef enum logic [3:0] {
    S_CMD, S_WADDR_HI, S_WADDR_LO, S_WDATA_HI, S_WDATA_LO,
    S_RADDR_HI, S_RADDR_LO, S_RDATA, S_STATUS, S_IGNORE
  } state_e;

  state_e      state;
  logic [15:0] addr;
  logic [7:0]  hi_byte;
  logic [7:0]  status;

  assign status = {6'b0, busy, done};

  always_comb begin
    unique case (state)
      S_RDATA: tx_byte = 8'(out_rdata);
      default: tx_byte = status;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_CMD;
      addr      <= '0;
      hi_byte   <= '0;
      in_we     <= 1'b0;
      in_waddr  <= '0;
      in_wdata  <= '0;
      out_re    <= 1'b0;
      out_raddr <= '0;
      start     <= 1'b0;
    end else begin
      in_we  <= 1'b0;
      out_re <= 1'b0;
      start  <= 1'b0;
      if (frame_start) begin
        state <= S_CMD;
      end else if (rx_valid) begin
        unique case (state)
          S_CMD: begin
            unique case (rx_byte)
              CMD_WRITE_INPUT: state <= S_WADDR_HI;
              CMD_READ_OUTPUT: state <= S_RADDR_HI;
              CMD_STATUS:      state <= S_STATUS;
              CMD_START: begin
                start <= 1'b1;
                state <= S_IGNORE;
              end
              default:         state <= S_IGNORE;
            endcase
          end
          S_WADDR_HI: begin addr[15:8] <= rx_byte; state <= S_WADDR_LO; end
          S_WADDR_LO: begin addr[7:0]  <= rx_byte; state <= S_WDATA_HI; end
          S_WDATA_HI: begin hi_byte    <= rx_byte; state <= S_WDATA_LO; end
          S_WDATA_LO: begin
            in_we    <= 1'b1;
            in_waddr <= IN_AW'(addr);
            in_wdata <= SAMPLE_BITS'({hi_byte, rx_byte});
            addr     <= addr + 1'b1;
            state    <= S_WDATA_HI;
          end
          S_RADDR_HI: begin addr[15:8] <= rx_byte; state <= S_RADDR_LO; end
          S_RADDR_LO: begin
            out_re    <= 1'b1;
            out_raddr <= OUT_AW'({addr[15:8], rx_byte});
            addr      <= {addr[15:8], rx_byte} + 1'b1;
            state     <= S_RDATA;
          end
          S_RDATA: begin
            out_re    <= 1'b1;
            out_raddr <= OUT_AW'(addr);
            addr      <= addr + 1'b1;
          end
          S_STATUS: state <= S_IGNORE;
          default:  state <= S_IGNORE;
        endcase
      end
    end
  end

endmodule
