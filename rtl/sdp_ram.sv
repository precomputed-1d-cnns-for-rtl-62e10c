// sdp_ram: simple dual-port RAM (one write port, one read port, one clock).
//
// Used twice in the accelerator: as the input buffer that holds a whole
// ECG window (DEPTH samples of W bits) written by the host and read by the
// sequencer one sample per clock, and as the output buffer that collects
// the network's results for the host. The paper names the input buffer as
// a block RAM; writing it as an array that infers a BRAM (synchronous,
// registered read) is this design's choice.
//
// Timing: a write lands at the clock edge where we is high. rdata holds
// mem[raddr] from the clock after re is high and keeps it until the next
// read. Reading and writing the same address in one clock returns the old
// data. Contents are not reset.
module sdp_ram #(
  parameter int unsigned W     = 12,
  parameter int unsigned DEPTH = 5000,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && waddr < AW'(DEPTH)) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= (raddr < AW'(DEPTH)) ? mem[raddr] : '0;
  end

endmodule
