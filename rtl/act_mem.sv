// act_mem: on-chip activation / gradient buffer.
//
// A plain memory of DEPTH words of WIDTH bits with one write port and two
// synchronous read ports (read data appear one cycle after the address).
// Port A serves the datapath, port B the host side (loading inputs from
// and returning results to off-chip memory). Scalar activations use
// WIDTH = 32 (one FP32 value); the rank-vector buffers between the two
// halves of a tensor-train layer use WIDTH = R*32. A scalar activation
// matrix A of a layer (features t, tokens k) is stored at t*K + k.
// The two read ports and the addressing are this implementation's choice;
// the design it follows keeps activations and gradients on chip and only
// names this buffer.
module act_mem #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 24576,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic [AW-1:0]    rda_addr,
  output logic [WIDTH-1:0] rda_data,
  input  logic [AW-1:0]    rdb_addr,
  output logic [WIDTH-1:0] rdb_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rda_data <= mem[rda_addr];
    rdb_data <= mem[rdb_addr];
  end

endmodule
