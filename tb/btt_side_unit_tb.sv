// btt_side_unit_tb: self-checking testbench of one side unit, run as the
// right-hand side (LEFT = 0, flattening i*P + p) at small sizes on the second
// of two stored layers.
//
// The testbench plays the engine: it models the activation memory (T x K
// scalars) and the rank-vector buffer Zin (K words) as synchronous-read
// arrays, captures everything the unit writes, and checks five commands
// against a double-precision model of the generic two-step chain:
//   CHAIN  : checked through PROJ and EXPAND, which use the stored W(t)
//   PROJ   : Z(k)   = sum_t A[t,k] W(t)
//   EXPAND : O[t,k] = W(t) . Zin(k)
//   GRAD + UPDATE: every core word after the update equals C - lr * dC,
//            with dC from dW(t) = sum_k A[t,k] Zin(k) by the chain rule.
// The cycle count of every command is checked against the formulas in the
// unit's header (plus at most 4 cycles of issue and drain).
// The reference is the chain rule of the tensor-train layer; sizes, the
// learning rate 0.125 (large, so update errors show) and tolerances are
// this testbench's choices.
module btt_side_unit_tb;
  import btt_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned R = 4, P1 = 2, I2 = 3, I3 = 2, K = 3, LAYERS = 2;
  localparam bit          LEFT = 1'b0;
  localparam int unsigned MID = P1 * I2, T = P1 * I2 * I3;
  localparam int unsigned LYW = 1;
  localparam int unsigned IW  = $clog2(P1 + I2 + I3 + 1);
  localparam int unsigned XW  = $clog2(R);
  localparam int unsigned AAW = $clog2(T * K);
  localparam int unsigned KW  = $clog2(K);
  localparam int          LYR = 1;
  localparam real         LR  = 0.125;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  side_cmd_e cmd = SC_CHAIN;
  logic [LYW-1:0] layer = LYW'(LYR);
  fp32_t lr;
  logic busy, done;
  logic [AAW-1:0] act_raddr, act_waddr;
  fp32_t act_rdata = '0, act_wdata;
  logic act_wen;
  logic [KW-1:0] zin_raddr, zout_waddr;
  fp32_t [R-1:0] zin_rdata = '0, zout_wdata;
  logic zout_wen;
  logic h_wen = 1'b0, h_ren = 1'b0;
  logic [LYW-1:0] h_layer = '0;
  logic [1:0] h_core = '0;
  logic [IW-1:0] h_i = '0;
  logic [XW-1:0] h_x = '0;
  fp32_t [R-1:0] h_wdata = '0, h_rdata;

  btt_side_unit #(.R(R), .P1(P1), .I2(I2), .I3(I3), .K(K), .LAYERS(LAYERS),
                  .LEFT(LEFT)) dut (.*);

  // environment memories
  fp32_t         A_mem [T*K];
  fp32_t [R-1:0] Z_mem [K];
  fp32_t         O_cap [T*K];
  fp32_t [R-1:0] Zo_cap [K];
  always_ff @(posedge clk) begin
    act_rdata <= A_mem[act_raddr];
    zin_rdata <= Z_mem[zin_raddr];
    if (act_wen)  O_cap[act_waddr]   <= act_wdata;
    if (zout_wen) Zo_cap[zout_waddr] <= zout_wdata;
  end

  // model
  real C0 [P1][R]; real C1 [I2][R][R]; real C2 [I3][R][R];
  real Mi [MID][R]; real Wt [T][R];
  real A [T][K];   real Zi [K][R];
  real dW [T][R];  real dMi [MID][R];
  real dC0 [P1][R]; real dC1 [I2][R][R]; real dC2 [I3][R][R];

  int checks = 0, failures = 0;

  function automatic int qf(input int p, input int i);   // step a flattening
    return LEFT ? p * int'(I2) + i : i * int'(P1) + p;
  endfunction
  function automatic int tf(input int q, input int i);   // step b flattening
    return LEFT ? q * int'(I3) + i : i * int'(MID) + q;
  endfunction

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if (rabs(got - exp) > tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %g expected %g", what, got, exp);
    end
  endtask

  task automatic run(input side_cmd_e c, input int expected);
    int cyc;
    @(negedge clk); start = 1'b1; cmd = c;
    @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc < expected || cyc > expected + 4) begin
      failures++;
      $display("FAIL %s took %0d cycles, expected %0d + issue/drain", c.name(), cyc, expected);
    end
  endtask

  task automatic hwrite(input int core, input int i, input int x, input real v [R]);
    @(negedge clk);
    h_wen = 1'b1; h_layer = LYW'(LYR); h_core = 2'(core); h_i = IW'(i); h_x = XW'(x);
    for (int y = 0; y < int'(R); y++) h_wdata[y] = real2fp(v[y]);
    @(negedge clk); h_wen = 1'b0;
  endtask

  task automatic hread(input int core, input int i, input int x, output real v [R]);
    @(negedge clk);
    h_ren = 1'b1; h_layer = LYW'(LYR); h_core = 2'(core); h_i = IW'(i); h_x = XW'(x);
    @(negedge clk); h_ren = 1'b0;
    for (int y = 0; y < int'(R); y++) v[y] = fp2real(h_rdata[y]);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v [R];
    real tmax;
    lr = real2fp(LR);
    for (int a = 0; a < int'(T*K); a++) begin A_mem[a] = '0; O_cap[a] = '0; end
    for (int k = 0; k < int'(K); k++) begin Z_mem[k] = '0; Zo_cap[k] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // random cores
    for (int p = 0; p < int'(P1); p++) begin
      for (int y = 0; y < int'(R); y++) begin C0[p][y] = fp2real(real2fp(urand(1.0))); v[y] = C0[p][y]; end
      hwrite(0, p, 0, v);
    end
    for (int i = 0; i < int'(I2); i++) for (int x = 0; x < int'(R); x++) begin
      for (int y = 0; y < int'(R); y++) begin C1[i][x][y] = fp2real(real2fp(urand(1.0))); v[y] = C1[i][x][y]; end
      hwrite(1, i, x, v);
    end
    for (int i = 0; i < int'(I3); i++) for (int x = 0; x < int'(R); x++) begin
      for (int y = 0; y < int'(R); y++) begin C2[i][x][y] = fp2real(real2fp(urand(1.0))); v[y] = C2[i][x][y]; end
      hwrite(2, i, x, v);
    end
    // model chain
    for (int p = 0; p < int'(P1); p++) for (int i = 0; i < int'(I2); i++) for (int y = 0; y < int'(R); y++) begin
      Mi[qf(p, i)][y] = 0.0;
      for (int x = 0; x < int'(R); x++) Mi[qf(p, i)][y] += C0[p][x] * C1[i][x][y];
    end
    for (int q = 0; q < int'(MID); q++) for (int i = 0; i < int'(I3); i++) for (int y = 0; y < int'(R); y++) begin
      Wt[tf(q, i)][y] = 0.0;
      for (int x = 0; x < int'(R); x++) Wt[tf(q, i)][y] += Mi[q][x] * C2[i][x][y];
    end
    for (int t = 0; t < int'(T); t++) for (int k = 0; k < int'(K); k++) begin
      A[t][k] = fp2real(real2fp(urand(1.0))); A_mem[t*K+k] = real2fp(A[t][k]);
    end
    for (int k = 0; k < int'(K); k++) for (int y = 0; y < int'(R); y++) begin
      Zi[k][y] = fp2real(real2fp(urand(1.0))); Z_mem[k][y] = real2fp(Zi[k][y]);
    end

    run(SC_CHAIN, (R+1)*(MID+T));

    // PROJ
    run(SC_PROJ, T*K);
    tmax = 1e-30;
    for (int k = 0; k < int'(K); k++) for (int y = 0; y < int'(R); y++) begin
      real e;
      e = 0.0;
      for (int t = 0; t < int'(T); t++) e += A[t][k] * Wt[t][y];
      check("PROJ", fp2real(Zo_cap[k][y]), e, 1e-4 * (1.0 + rabs(e)));
    end
    // EXPAND
    run(SC_EXPAND, T*K);
    for (int t = 0; t < int'(T); t++) for (int k = 0; k < int'(K); k++) begin
      real e;
      e = 0.0;
      for (int y = 0; y < int'(R); y++) e += Wt[t][y] * Zi[k][y];
      check("EXPAND", fp2real(O_cap[t*K+k]), e, 1e-4 * (1.0 + rabs(e)));
    end

    // GRAD + UPDATE
    for (int t = 0; t < int'(T); t++) for (int y = 0; y < int'(R); y++) begin
      dW[t][y] = 0.0;
      for (int k = 0; k < int'(K); k++) dW[t][y] += A[t][k] * Zi[k][y];
    end
    for (int i = 0; i < int'(I3); i++) for (int x = 0; x < int'(R); x++) for (int y = 0; y < int'(R); y++) begin
      dC2[i][x][y] = 0.0;
      for (int q = 0; q < int'(MID); q++) dC2[i][x][y] += Mi[q][x] * dW[tf(q, i)][y];
    end
    for (int q = 0; q < int'(MID); q++) for (int x = 0; x < int'(R); x++) begin
      dMi[q][x] = 0.0;
      for (int i = 0; i < int'(I3); i++) for (int y = 0; y < int'(R); y++) dMi[q][x] += C2[i][x][y] * dW[tf(q, i)][y];
    end
    for (int i = 0; i < int'(I2); i++) for (int x = 0; x < int'(R); x++) for (int y = 0; y < int'(R); y++) begin
      dC1[i][x][y] = 0.0;
      for (int p = 0; p < int'(P1); p++) dC1[i][x][y] += C0[p][x] * dMi[qf(p, i)][y];
    end
    for (int p = 0; p < int'(P1); p++) for (int x = 0; x < int'(R); x++) begin
      dC0[p][x] = 0.0;
      for (int i = 0; i < int'(I2); i++) for (int y = 0; y < int'(R); y++) dC0[p][x] += C1[i][x][y] * dMi[qf(p, i)][y];
    end
    run(SC_GRAD, T*(K+2+2*R) + MID*(2+2*R));
    run(SC_UPDATE, P1 + (I2+I3)*R);
    for (int p = 0; p < int'(P1); p++) begin
      hread(0, p, 0, v);
      for (int y = 0; y < int'(R); y++) check("C0", v[y], C0[p][y] - LR * dC0[p][y], 1e-4 * (1.0 + rabs(LR * dC0[p][y])));
    end
    for (int i = 0; i < int'(I2); i++) for (int x = 0; x < int'(R); x++) begin
      hread(1, i, x, v);
      for (int y = 0; y < int'(R); y++) check("C1", v[y], C1[i][x][y] - LR * dC1[i][x][y], 1e-4 * (1.0 + rabs(LR * dC1[i][x][y])));
    end
    for (int i = 0; i < int'(I3); i++) for (int x = 0; x < int'(R); x++) begin
      hread(2, i, x, v);
      for (int y = 0; y < int'(R); y++) check("C2", v[y], C2[i][x][y] - LR * dC2[i][x][y], 1e-4 * (1.0 + rabs(LR * dC2[i][x][y])));
    end
    // the other layer was never written by a command: busy must be low
    checks++;
    if (busy) begin failures++; $display("FAIL busy after the last command"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
