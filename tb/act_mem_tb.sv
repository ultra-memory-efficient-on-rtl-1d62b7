// act_mem_tb: self-checking testbench of the activation buffer at its
// default size (32-bit words, 24576 deep = 768 features x 32 tokens).
//
// 20000 cycles of random traffic: a write with probability 1/2 and a read on
// each of the two read ports every cycle, addresses drawn partly from a
// small hot range so that reads hit written words often, including the word
// being written in the same cycle (which must return the old value). Read
// data are compared, one cycle after the address, with a model array; the
// model is initialised by writing the hot range first.
// The default size follows the evaluated layer (768 features, 32 tokens);
// the traffic pattern is this testbench's own.
module act_mem_tb;

  localparam int unsigned WIDTH = 32, DEPTH = 24576, AW = $clog2(DEPTH);
  localparam int unsigned HOT = 64;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic             wr_en = 1'b0;
  logic [AW-1:0]    wr_addr = '0, rda_addr = '0, rdb_addr = '0;
  logic [WIDTH-1:0] wr_data = '0, rda_data, rdb_data;

  act_mem dut (.*);

  logic [WIDTH-1:0] model [DEPTH];
  bit               valid [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [AW-1:0] pick();
    if ($urandom_range(3) != 0) return AW'($urandom_range(HOT - 1) * 377 % DEPTH);
    return AW'($urandom_range(DEPTH - 1));
  endfunction

  initial begin
    logic [WIDTH-1:0] ea, eb;
    bit va, vb;
    for (int a = 0; a < int'(DEPTH); a++) valid[a] = 1'b0;
    for (int h = 0; h < int'(HOT); h++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = AW'(h * 377 % DEPTH); wr_data = $urandom;
      model[wr_addr] = wr_data; valid[wr_addr] = 1'b1;
    end
    va = 1'b0; vb = 1'b0;
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      if (va) begin checks++; if (rda_data !== ea) begin failures++; if (failures < 10) $display("FAIL port A"); end end
      if (vb) begin checks++; if (rdb_data !== eb) begin failures++; if (failures < 10) $display("FAIL port B"); end end
      rda_addr = pick(); rdb_addr = pick();
      va = valid[rda_addr]; vb = valid[rdb_addr];
      ea = model[rda_addr]; eb = model[rdb_addr];   // old value before this cycle's write
      wr_en = ($urandom_range(1) == 1);
      if ($urandom_range(7) == 0) wr_addr = rda_addr; else wr_addr = pick();
      wr_data = $urandom;
      if (wr_en) begin model[wr_addr] = wr_data; valid[wr_addr] = 1'b1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
