// tt_core_mem_tb: self-checking testbench of the grouped TT-core store,
// at small sizes (R = 3, modes 2/3/2, 3 layers) so that every word is used.
//
// Each logical word (layer, core, i, x) is written once with a random value,
// in a random order, while random reads of already written words run on the
// read port in the same cycles; then every word is read back. The expected
// values come from a model indexed by the logical tuple, so any two tuples
// that share a physical word, or any word written to the wrong place, show
// as a mismatch. Also checked: read data appear exactly one cycle after
// rd_en, and hold while rd_en is low.
// Rank-packed words and cross-layer grouping follow the storage scheme the
// design implements; the sizes and traffic pattern are this testbench's.
module tt_core_mem_tb;
  import btt_pkg::*;

  localparam int unsigned R = 3, P1 = 2, I2 = 3, I3 = 2, LAYERS = 3;
  localparam int unsigned LYW = $clog2(LAYERS);
  localparam int unsigned IW  = $clog2(P1 + I2 + I3 + 1);
  localparam int unsigned XW  = $clog2(R);
  localparam int unsigned NW  = LAYERS * (P1 + (I2 + I3) * R);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rd_en = 1'b0, wr_en = 1'b0;
  logic [LYW-1:0] rd_layer = '0, wr_layer = '0;
  logic [1:0] rd_core = '0, wr_core = '0;
  logic [IW-1:0] rd_i = '0, wr_i = '0;
  logic [XW-1:0] rd_x = '0, wr_x = '0;
  fp32_t [R-1:0] rd_data, wr_data = '0;

  tt_core_mem #(.R(R), .P1(P1), .I2(I2), .I3(I3), .LAYERS(LAYERS)) dut (.*);

  typedef struct { int l; int c; int i; int x; } tup_t;
  tup_t         tups [$];
  fp32_t [R-1:0] model [int];
  bit            written [int];

  int checks = 0, failures = 0;

  function automatic int key(input tup_t t);
    return ((t.l * 4 + t.c) * 16 + t.i) * 16 + t.x;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_rd(input tup_t t);
    rd_layer = LYW'(t.l); rd_core = 2'(t.c); rd_i = IW'(t.i); rd_x = XW'(t.x);
  endtask

  initial begin
    tup_t t, r;
    int   n, j;
    bit   rd_pending;
    fp32_t [R-1:0] exp_rd;
    for (int l = 0; l < int'(LAYERS); l++) begin
      for (int i = 0; i < int'(P1); i++) tups.push_back('{l, 0, i, 0});
      for (int i = 0; i < int'(I2); i++) for (int x = 0; x < int'(R); x++) tups.push_back('{l, 1, i, x});
      for (int i = 0; i < int'(I3); i++) for (int x = 0; x < int'(R); x++) tups.push_back('{l, 2, i, x});
    end
    checks++;
    if (tups.size() != NW) begin failures++; $display("FAIL word count"); end
    tups.shuffle();
    rd_pending = 1'b0;
    // write phase with concurrent reads of earlier words
    foreach (tups[w]) begin
      @(negedge clk);
      if (rd_pending) begin
        checks++;
        if (rd_data !== exp_rd) begin failures++; $display("FAIL concurrent read"); end
      end
      t = tups[w];
      wr_en = 1'b1; wr_layer = LYW'(t.l); wr_core = 2'(t.c); wr_i = IW'(t.i); wr_x = XW'(t.x);
      for (int y = 0; y < int'(R); y++) wr_data[y] = $urandom;
      model[key(t)] = wr_data;
      rd_pending = 1'b0;
      if (w > 0 && $urandom_range(1) == 1) begin
        j = $urandom_range(w - 1);
        r = tups[j];
        rd_en = 1'b1; set_rd(r);
        exp_rd = model[key(r)];
        rd_pending = 1'b1;
      end else rd_en = 1'b0;
    end
    @(negedge clk);
    wr_en = 1'b0; rd_en = 1'b0;
    if (rd_pending) begin
      checks++;
      if (rd_data !== exp_rd) begin failures++; $display("FAIL concurrent read"); end
    end
    // read back every word
    tups.shuffle();
    foreach (tups[w]) begin
      @(negedge clk);
      rd_en = 1'b1; set_rd(tups[w]);
      @(negedge clk);
      rd_en = 1'b0;
      checks++;
      if (rd_data !== model[key(tups[w])]) begin
        failures++;
        if (failures < 10) $display("FAIL word l%0d c%0d i%0d x%0d", tups[w].l, tups[w].c, tups[w].i, tups[w].x);
      end
      // hold while rd_en is low, even if the address moves
      set_rd(tups[0]);
      @(negedge clk);
      checks++;
      if (rd_data !== model[key(tups[w])]) begin failures++; $display("FAIL read data did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
