// accel_ctrl: inference sequencer of the accelerator.
//
// On `start` (ignored while busy) it clears the network's windows for one
// clock, then reads the input buffer at addresses 0..N_SAMPLES-1, one per
// clock, and feeds each sample to the network the clock after its read
// (the buffer has a registered read port). Every network result is written
// to the output buffer at the next free address. When all N_SAMPLES samples
// have been sent and OUT_LEN results have been stored, the inference is
// complete; after REPEAT inferences busy falls and done rises and stays
// high until the next start.
//
// The paper's accelerator takes one clock per time step of the window and
// signals done over its control interface; for its latency measurement
// it was modified to run a thousand inferences per start, which REPEAT
// reproduces (default 1, the normal operation). The state machine,
// the clear pulse and the output numbering are this design's.
// Timing of one inference: 1 clock (clear) + N_SAMPLES clocks (stream)
// + the network latency, see pcnn_network.
// The two assertions at the end use `disable iff (!rst_n)`; a linter may
// note that rst_n then feeds both the asynchronous reset and the assertion
// logic. That is intended: the checks are off while reset is applied.
module accel_ctrl #(
  parameter int unsigned N_SAMPLES = 5000,
  parameter int unsigned OUT_LEN   = 98,
  parameter int unsigned REPEAT    = 1,
  parameter int unsigned IN_AW     = (N_SAMPLES > 1) ? $clog2(N_SAMPLES) : 1,
  parameter int unsigned OUT_AW    = (OUT_LEN > 1) ? $clog2(OUT_LEN) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // input buffer read port
  output logic              in_re,
  output logic [IN_AW-1:0]  in_raddr,
  // network
  output logic              net_clear,
  output logic              net_in_valid,
  input  logic              net_out_valid,
  // output buffer write port
  output logic              out_we,
  output logic [OUT_AW-1:0] out_waddr
);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_STREAM, S_DRAIN} state_e;

  localparam int unsigned CNT_W = $clog2(OUT_LEN + 1);
  localparam int unsigned REP_W = (REPEAT > 1) ? $clog2(REPEAT) : 1;

  state_e           state;
  logic [IN_AW-1:0] rd_addr;
  logic [CNT_W-1:0] out_cnt;
  logic [REP_W-1:0] rep;

  assign in_re     = (state == S_STREAM);
  assign in_raddr  = rd_addr;
  assign net_clear = (state == S_CLEAR);
  assign out_we    = net_out_valid && state != S_IDLE;
  assign out_waddr = OUT_AW'(out_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      rd_addr      <= '0;
      out_cnt      <= '0;
      rep          <= '0;
      busy         <= 1'b0;
      done         <= 1'b0;
      net_in_valid <= 1'b0;
    end else begin
      net_in_valid <= in_re;
      if (net_out_valid && state != S_IDLE) out_cnt <= out_cnt + 1'b1;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            busy  <= 1'b1;
            done  <= 1'b0;
            rep   <= '0;
            state <= S_CLEAR;
          end
        end
        S_CLEAR: begin
          rd_addr <= '0;
          out_cnt <= '0;
          state   <= S_STREAM;
        end
        S_STREAM: begin
          rd_addr <= rd_addr + 1'b1;
          if (rd_addr == IN_AW'(N_SAMPLES - 1)) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (out_cnt == CNT_W'(OUT_LEN) && !net_in_valid) begin
            if (REPEAT > 1 && rep != REP_W'(REPEAT - 1)) begin
              rep   <= rep + 1'b1;
              state <= S_CLEAR;
            end else begin
              busy  <= 1'b0;
              done  <= 1'b1;
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the network never produces more results than expected
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  net_out_valid |-> out_cnt < CNT_W'(OUT_LEN));
  // a start is never lost silently: it either begins a run or arrives while busy
  a_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                 start && state == S_IDLE |=> busy);

endmodule
