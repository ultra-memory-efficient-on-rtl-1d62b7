// tt_core_mem: grouped on-chip store for the TT cores of one contraction
// side (left or right half of a tensor-train linear layer).
//
// Storage follows the memory-management scheme of the design: the rank
// index of a core is packed into the word (array reshaping: a word is
// R x 32 bits, so one read returns all rank elements in parallel), and
// instead of one small memory per core, the cores of every layer of this
// side are concatenated along the depth of a single array (tensor
// grouping). That raises the depth of the array towards the depth of a
// block RAM, which is what recovers the BRAM efficiency.
//
// Layout of one layer (LSZ words), for a side with first-core index size
// P1 and two further cores with mode sizes I2 and I3:
//   core 0 (first core, outer rank 1): word p            p < P1
//   core 1                           : word P1 + i*R + x  i < I2, x < R
//   core 2                           : word P1 + I2*R + i*R + x
// Word (i, x) of cores 1 and 2 holds the rank vector that is contracted
// with element x of the incoming vector, i.e. for a left core G[x, i, :],
// for a right core G[:, i, x]. Layer l starts at l*LSZ.
// Interface: one synchronous read port (data one cycle after rd_en), one
// write port; both addressed by (layer, core, i, x). Timing as a simple
// dual-port block RAM. The per-layer order of the cores and the word
// orientation are this implementation's choice.
module tt_core_mem
  import btt_pkg::*;
#(
  parameter int unsigned R      = 12,
  parameter int unsigned P1     = 12,
  parameter int unsigned I2     = 8,
  parameter int unsigned I3     = 8,
  parameter int unsigned LAYERS = 13,
  localparam int unsigned LSZ   = P1 + (I2 + I3) * R,
  localparam int unsigned DEPTH = LAYERS * LSZ,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LYW   = (LAYERS > 1) ? $clog2(LAYERS) : 1,
  localparam int unsigned IW    = $clog2(P1 + I2 + I3 + 1),
  localparam int unsigned XW    = (R > 1) ? $clog2(R) : 1
) (
  input  logic              clk,
  input  logic              rd_en,
  input  logic [LYW-1:0]    rd_layer,
  input  logic [1:0]        rd_core,
  input  logic [IW-1:0]     rd_i,
  input  logic [XW-1:0]     rd_x,
  output fp32_t [R-1:0]     rd_data,
  input  logic              wr_en,
  input  logic [LYW-1:0]    wr_layer,
  input  logic [1:0]        wr_core,
  input  logic [IW-1:0]     wr_i,
  input  logic [XW-1:0]     wr_x,
  input  fp32_t [R-1:0]     wr_data
);

  // Physical word address of (layer, core, i, x).
  function automatic logic [AW-1:0] phys(input logic [LYW-1:0] l,
                                         input logic [1:0] c,
                                         input logic [IW-1:0] i,
                                         input logic [XW-1:0] x);
    int unsigned a;
    case (c)
      2'd0:    a = int'(i);
      2'd1:    a = P1 + int'(i) * R + int'(x);
      default: a = P1 + I2 * R + int'(i) * R + int'(x);
    endcase
    return AW'(int'(l) * LSZ + a);
  endfunction

  fp32_t [R-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[phys(wr_layer, wr_core, wr_i, wr_x)] <= wr_data;
    if (rd_en) rd_data <= mem[phys(rd_layer, rd_core, rd_i, rd_x)];
  end

endmodule
