// truth_table: one precomputed network component.
//
// A precomputed block replaces everything between two binary activations
// (convolution, batch norm, binarization, or linear+sigmoid) by the table of
// all its outputs for all 2**IN_W input patterns. This module holds such a
// table as a constant and looks it up: out = TABLE[addr*OUT_W +: OUT_W].
// On an FPGA a synthesis tool maps it onto 6-input LUTs, composing larger
// tables from LUT trees; that mapping is the tool's business, not this RTL's.
//
// Interface: addr (IN_W bits) in, data (OUT_W bits) out, purely
// combinational (zero cycles). Registers are placed by the layer modules.
// The table layout (entry a occupies bits [a*OUT_W +: OUT_W]) is this
// design's choice. The default TABLE (alternating ones and zeros) only
// exists so that the module elaborates alone; every user passes its own
// table.
module truth_table #(
  parameter int unsigned IN_W  = 4,
  parameter int unsigned OUT_W = 2,
  parameter logic [(2**IN_W)*OUT_W-1:0] TABLE = {((2**IN_W)*OUT_W/2){2'b10}}
) (
  input  logic [IN_W-1:0]  addr,
  output logic [OUT_W-1:0] data
);

  always_comb data = TABLE[addr*OUT_W +: OUT_W];

endmodule
