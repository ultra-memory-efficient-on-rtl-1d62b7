// btt_linear_engine_tb: end-to-end self-checking testbench of btt_linear_engine, at reduced sizes.
//
// Two layers' worth of random TT cores are loaded (layer 0 and layer
// LAYERS-1, to exercise the grouped core store). For each of them the
// testbench runs a forward pass on random activations X, compares Y with
// Y = W X where W is built element by element from the six cores in double
// precision, then runs the backward pass with a random output gradient Y'
// and compares X' = W^T Y' and the gradient of every core (recovered from
// the updated cores as (G_old - G_new) / lr) with the chain rule
// dW = Y' X^T evaluated in double precision. Tolerance: 1e-4 of the largest
// reference magnitude of each tensor. The cycle count of each pass is
// checked against the side-unit cycle formulas, and the testbench counts
// how often each mechanism occurred (parallel left/right MUL0, MUL1, MUL2,
// Z2', fused gradient overlapping X', parameter update, second layer of
// the grouped store); one that never occurs counts as a failure.
// The equations checked are those of the tensor-train layer and plain SGD
// with the learning rate 4e-3 of the evaluated training set-up; sizes of
// the reduced run, tolerances and stimulus are this testbench's choices.
module btt_linear_engine_tb;
  import btt_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned R      = 3;
  localparam int unsigned M1     = 2;
  localparam int unsigned M2     = 2;
  localparam int unsigned M3     = 3;
  localparam int unsigned N1     = 3;
  localparam int unsigned N2     = 2;
  localparam int unsigned N3     = 2;
  localparam int unsigned K      = 4;
  localparam int unsigned LAYERS = 3;
  localparam int unsigned M   = M1 * M2 * M3;
  localparam int unsigned N   = N1 * N2 * N3;
  localparam int unsigned LYW = (LAYERS > 1) ? $clog2(LAYERS) : 1;
  localparam int unsigned MAW = $clog2(M * K);
  localparam int unsigned NAW = $clog2(N * K);
  localparam int unsigned LIW = $clog2(M1 + M2 + M3 + 1);
  localparam int unsigned RIW = $clog2(N1 + N2 + N3 + 1);
  localparam int unsigned HIW = (LIW > RIW) ? LIW : RIW;
  localparam int unsigned XW  = (R > 1) ? $clog2(R) : 1;
  localparam real LR = 4.0e-3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start = 1'b0, op_bp = 1'b0;
  logic [LYW-1:0]    layer = '0;
  fp32_t             lr;
  logic              busy, done;
  logic              x_wen = 1'b0, dy_wen = 1'b0;
  logic [NAW-1:0]    x_waddr = '0, dx_raddr = '0;
  logic [MAW-1:0]    dy_waddr = '0, y_raddr = '0;
  fp32_t             x_wdata = '0, dy_wdata = '0, y_rdata, dx_rdata;
  logic              h_right = 1'b0, h_wen = 1'b0, h_ren = 1'b0;
  logic [LYW-1:0]    h_layer = '0;
  logic [1:0]        h_core = '0;
  logic [HIW-1:0]    h_i = '0;
  logic [XW-1:0]     h_x = '0;
  fp32_t [R-1:0]     h_wdata = '0, h_rdata;
  logic [2:0]        stage;

  btt_linear_engine #(.R(R), .M1(M1), .M2(M2), .M3(M3), .N1(N1), .N2(N2), .N3(N3), .K(K), .LAYERS(LAYERS)) dut (
    .clk, .rst_n, .start, .op_bp, .layer, .lr, .busy, .done,
    .x_wen, .x_waddr, .x_wdata, .dy_wen, .dy_waddr, .dy_wdata,
    .y_raddr, .y_rdata, .dx_raddr, .dx_rdata,
    .h_right, .h_wen, .h_ren, .h_layer, .h_core, .h_i, .h_x, .h_wdata,
    .h_rdata, .stage);

  int checks = 0, failures = 0;

  // ------------------------------------------------------------- model
  real G1 [M1][R];        real G2 [R][M2][R];   real G3 [R][M3][R];
  real G4 [R][N1][R];     real G5 [R][N2][R];   real G6 [R][N3];
  real Wl [M][R];         real Wr [R][N];       real W [M][N];
  real X  [N][K];         real Y  [M][K];       real DY [M][K];
  real DX [N][K];         real DW [M][N];
  real DWl [M][R];        real DWr [R][N];
  real P12 [M1*M2][R];    real DP12 [M1*M2][R];
  real Q56 [N2*N3][R];    real DQ56 [N2*N3][R];
  real dG1 [M1][R];       real dG2 [R][M2][R];  real dG3 [R][M3][R];
  real dG4 [R][N1][R];    real dG5 [R][N2][R];  real dG6 [R][N3];

  // mechanism counters
  int n_par_mul0 = 0, n_mul1 = 0, n_mul2 = 0, n_z2p = 0, n_overlap = 0;
  int n_pu = 0, n_layers = 0;

  always @(posedge clk) begin
    if (dut.u_left.running && dut.u_right.running && stage == 3'd1) n_par_mul0++;
    if (stage == 3'd2 && dut.u_right.running) n_mul1++;
    if (stage == 3'd3 && dut.u_left.running) n_mul2++;
    if (stage == 3'd4 && dut.u_left.running) n_z2p++;
    if (stage == 3'd5 && dut.u_left.running && dut.u_right.running &&
        dut.u_right.cur_cmd == SC_EXPAND) n_overlap++;
    if (stage == 3'd6 && dut.u_left.running) n_pu++;
  end

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if (rabs(got - exp) > tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %g expected %g", what, got, exp);
    end
  endtask

  task automatic core_write(input bit right, input int l, input int core,
                            input int i, input int x, input real v [R]);
    @(negedge clk);
    h_right = right; h_wen = 1'b1; h_layer = LYW'(l); h_core = 2'(core);
    h_i = HIW'(i); h_x = XW'(x);
    for (int y = 0; y < int'(R); y++) h_wdata[y] = real2fp(v[y]);
    @(negedge clk);
    h_wen = 1'b0;
  endtask

  task automatic core_read(input bit right, input int l, input int core,
                           input int i, input int x, output real v [R]);
    @(negedge clk);
    h_right = right; h_ren = 1'b1; h_layer = LYW'(l); h_core = 2'(core);
    h_i = HIW'(i); h_x = XW'(x);
    @(negedge clk);
    h_ren = 1'b0;
    for (int y = 0; y < int'(R); y++) v[y] = fp2real(h_rdata[y]);
  endtask

  function automatic real maxabs1(input real v);
    return rabs(v);
  endfunction

  // random cores, rounded to FP32 so that model and hardware start equal
  task automatic make_cores();
    for (int a = 0; a < int'(M1); a++) for (int b = 0; b < int'(R); b++) G1[a][b] = fp2real(real2fp(urand(0.5)));
    for (int a = 0; a < int'(R); a++) for (int i = 0; i < int'(M2); i++) for (int b = 0; b < int'(R); b++) G2[a][i][b] = fp2real(real2fp(urand(0.5)));
    for (int a = 0; a < int'(R); a++) for (int i = 0; i < int'(M3); i++) for (int b = 0; b < int'(R); b++) G3[a][i][b] = fp2real(real2fp(urand(0.5)));
    for (int a = 0; a < int'(R); a++) for (int i = 0; i < int'(N1); i++) for (int b = 0; b < int'(R); b++) G4[a][i][b] = fp2real(real2fp(urand(0.5)));
    for (int a = 0; a < int'(R); a++) for (int i = 0; i < int'(N2); i++) for (int b = 0; b < int'(R); b++) G5[a][i][b] = fp2real(real2fp(urand(0.5)));
    for (int a = 0; a < int'(R); a++) for (int i = 0; i < int'(N3); i++) G6[a][i] = fp2real(real2fp(urand(0.5)));
  endtask

  task automatic load_cores(input int l);
    real v [R];
    for (int i = 0; i < int'(M1); i++) begin
      for (int y = 0; y < int'(R); y++) v[y] = G1[i][y];
      core_write(0, l, 0, i, 0, v);
    end
    for (int i = 0; i < int'(M2); i++) for (int x = 0; x < int'(R); x++) begin
      for (int y = 0; y < int'(R); y++) v[y] = G2[x][i][y];
      core_write(0, l, 1, i, x, v);
    end
    for (int i = 0; i < int'(M3); i++) for (int x = 0; x < int'(R); x++) begin
      for (int y = 0; y < int'(R); y++) v[y] = G3[x][i][y];
      core_write(0, l, 2, i, x, v);
    end
    for (int i = 0; i < int'(N3); i++) begin
      for (int y = 0; y < int'(R); y++) v[y] = G6[y][i];
      core_write(1, l, 0, i, 0, v);
    end
    for (int i = 0; i < int'(N2); i++) for (int x = 0; x < int'(R); x++) begin
      for (int y = 0; y < int'(R); y++) v[y] = G5[y][i][x];
      core_write(1, l, 1, i, x, v);
    end
    for (int i = 0; i < int'(N1); i++) for (int x = 0; x < int'(R); x++) begin
      for (int y = 0; y < int'(R); y++) v[y] = G4[y][i][x];
      core_write(1, l, 2, i, x, v);
    end
  endtask

  // reference forward model: W element by element from the cores
  task automatic model_forward();
    for (int i1 = 0; i1 < int'(M1); i1++) for (int i2 = 0; i2 < int'(M2); i2++) begin
      for (int b = 0; b < int'(R); b++) begin
        P12[i1*M2+i2][b] = 0.0;
        for (int a = 0; a < int'(R); a++) P12[i1*M2+i2][b] += G1[i1][a] * G2[a][i2][b];
      end
      for (int i3 = 0; i3 < int'(M3); i3++)
        for (int b = 0; b < int'(R); b++) begin
          Wl[(i1*M2+i2)*M3+i3][b] = 0.0;
          for (int a = 0; a < int'(R); a++) Wl[(i1*M2+i2)*M3+i3][b] += P12[i1*M2+i2][a] * G3[a][i3][b];
        end
    end
    for (int j2 = 0; j2 < int'(N2); j2++) for (int j3 = 0; j3 < int'(N3); j3++) begin
      for (int c = 0; c < int'(R); c++) begin
        Q56[j2*N3+j3][c] = 0.0;
        for (int e = 0; e < int'(R); e++) Q56[j2*N3+j3][c] += G5[c][j2][e] * G6[e][j3];
      end
      for (int j1 = 0; j1 < int'(N1); j1++)
        for (int b = 0; b < int'(R); b++) begin
          Wr[b][(j1*N2+j2)*N3+j3] = 0.0;
          for (int c = 0; c < int'(R); c++) Wr[b][(j1*N2+j2)*N3+j3] += G4[b][j1][c] * Q56[j2*N3+j3][c];
        end
    end
    for (int m = 0; m < int'(M); m++) for (int n = 0; n < int'(N); n++) begin
      W[m][n] = 0.0;
      for (int b = 0; b < int'(R); b++) W[m][n] += Wl[m][b] * Wr[b][n];
    end
    for (int m = 0; m < int'(M); m++) for (int k = 0; k < int'(K); k++) begin
      Y[m][k] = 0.0;
      for (int n = 0; n < int'(N); n++) Y[m][k] += W[m][n] * X[n][k];
    end
  endtask

  // reference backward model: chain rule through W = Wl Wr and the cores
  task automatic model_backward();
    for (int n = 0; n < int'(N); n++) for (int k = 0; k < int'(K); k++) begin
      DX[n][k] = 0.0;
      for (int m = 0; m < int'(M); m++) DX[n][k] += W[m][n] * DY[m][k];
    end
    for (int m = 0; m < int'(M); m++) for (int n = 0; n < int'(N); n++) begin
      DW[m][n] = 0.0;
      for (int k = 0; k < int'(K); k++) DW[m][n] += DY[m][k] * X[n][k];
    end
    for (int m = 0; m < int'(M); m++) for (int b = 0; b < int'(R); b++) begin
      DWl[m][b] = 0.0;
      for (int n = 0; n < int'(N); n++) DWl[m][b] += DW[m][n] * Wr[b][n];
    end
    for (int b = 0; b < int'(R); b++) for (int n = 0; n < int'(N); n++) begin
      DWr[b][n] = 0.0;
      for (int m = 0; m < int'(M); m++) DWr[b][n] += Wl[m][b] * DW[m][n];
    end
    // left cores
    for (int a = 0; a < int'(R); a++) for (int i3 = 0; i3 < int'(M3); i3++) for (int b = 0; b < int'(R); b++) begin
      dG3[a][i3][b] = 0.0;
      for (int p = 0; p < int'(M1*M2); p++) dG3[a][i3][b] += P12[p][a] * DWl[p*M3+i3][b];
    end
    for (int p = 0; p < int'(M1*M2); p++) for (int a = 0; a < int'(R); a++) begin
      DP12[p][a] = 0.0;
      for (int i3 = 0; i3 < int'(M3); i3++) for (int b = 0; b < int'(R); b++)
        DP12[p][a] += DWl[p*M3+i3][b] * G3[a][i3][b];
    end
    for (int a = 0; a < int'(R); a++) for (int i2 = 0; i2 < int'(M2); i2++) for (int b = 0; b < int'(R); b++) begin
      dG2[a][i2][b] = 0.0;
      for (int i1 = 0; i1 < int'(M1); i1++) dG2[a][i2][b] += G1[i1][a] * DP12[i1*M2+i2][b];
    end
    for (int i1 = 0; i1 < int'(M1); i1++) for (int a = 0; a < int'(R); a++) begin
      dG1[i1][a] = 0.0;
      for (int i2 = 0; i2 < int'(M2); i2++) for (int b = 0; b < int'(R); b++)
        dG1[i1][a] += DP12[i1*M2+i2][b] * G2[a][i2][b];
    end
    // right cores
    for (int b = 0; b < int'(R); b++) for (int j1 = 0; j1 < int'(N1); j1++) for (int c = 0; c < int'(R); c++) begin
      dG4[b][j1][c] = 0.0;
      for (int q = 0; q < int'(N2*N3); q++) dG4[b][j1][c] += DWr[b][j1*N2*N3+q] * Q56[q][c];
    end
    for (int q = 0; q < int'(N2*N3); q++) for (int c = 0; c < int'(R); c++) begin
      DQ56[q][c] = 0.0;
      for (int j1 = 0; j1 < int'(N1); j1++) for (int b = 0; b < int'(R); b++)
        DQ56[q][c] += DWr[b][j1*N2*N3+q] * G4[b][j1][c];
    end
    for (int c = 0; c < int'(R); c++) for (int j2 = 0; j2 < int'(N2); j2++) for (int e = 0; e < int'(R); e++) begin
      dG5[c][j2][e] = 0.0;
      for (int j3 = 0; j3 < int'(N3); j3++) dG5[c][j2][e] += DQ56[j2*N3+j3][c] * G6[e][j3];
    end
    for (int e = 0; e < int'(R); e++) for (int j3 = 0; j3 < int'(N3); j3++) begin
      dG6[e][j3] = 0.0;
      for (int j2 = 0; j2 < int'(N2); j2++) for (int c = 0; c < int'(R); c++)
        dG6[e][j3] += DQ56[j2*N3+j3][c] * G5[c][j2][e];
    end
  endtask

  task automatic run(input bit bp, input int l, output int cycles);
    @(negedge clk);
    start = 1'b1; op_bp = bp; layer = LYW'(l);
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  // one check of a whole tensor, against a tolerance of 1e-4 of its
  // largest reference value (per element)
  real tmax;

  task automatic one_layer(input int l);
    int   cyc;
    real  v [R];
    real  g;
    int   fp_exp, bp_exp, side_chain, mid_l, mid_r;
    make_cores();
    load_cores(l);
    for (int n = 0; n < int'(N); n++) for (int k = 0; k < int'(K); k++) begin
      X[n][k] = fp2real(real2fp(urand(1.0)));
      @(negedge clk); x_wen = 1'b1; x_waddr = NAW'(n*K + k); x_wdata = real2fp(X[n][k]);
    end
    @(negedge clk); x_wen = 1'b0;
    model_forward();

    // ---- forward pass
    run(0, l, cyc);
    mid_l = M1*M2; mid_r = N3*N2;
    side_chain = ((R+1)*(mid_l + M) > (R+1)*(mid_r + N)) ? (R+1)*(mid_l + M) : (R+1)*(mid_r + N);
    fp_exp = side_chain + N*K + M*K;
    checks++;
    if (cyc < fp_exp || cyc > fp_exp + 20) begin
      failures++; $display("FAIL forward cycles %0d, expected %0d + overhead", cyc, fp_exp);
    end
    $display("layer %0d forward pass: %0d cycles (kernel operations %0d)", l, cyc, fp_exp);
    tmax = 0.0;
    for (int m = 0; m < int'(M); m++) for (int k = 0; k < int'(K); k++) if (rabs(Y[m][k]) > tmax) tmax = rabs(Y[m][k]);
    for (int m = 0; m < int'(M); m++) for (int k = 0; k < int'(K); k++) begin
      @(negedge clk); y_raddr = MAW'(m*K + k);
      @(negedge clk);
      check("Y", fp2real(y_rdata), Y[m][k], 1e-4 * tmax);
    end

    // ---- backward pass + update
    for (int m = 0; m < int'(M); m++) for (int k = 0; k < int'(K); k++) begin
      DY[m][k] = fp2real(real2fp(urand(1.0)));
      @(negedge clk); dy_wen = 1'b1; dy_waddr = MAW'(m*K + k); dy_wdata = real2fp(DY[m][k]);
    end
    @(negedge clk); dy_wen = 1'b0;
    lr = real2fp(LR);
    model_backward();
    run(1, l, cyc);
    bp_exp = M*K                                                     // Z2'
           + (((N*K + N*(K+2+2*R) + mid_r*(2+2*R)) > (M*(K+2+2*R) + mid_l*(2+2*R))) ?
              (N*K + N*(K+2+2*R) + mid_r*(2+2*R)) : (M*(K+2+2*R) + mid_l*(2+2*R)))
           + (((M1 + (M2+M3)*R) > (N3 + (N2+N1)*R)) ? (M1 + (M2+M3)*R) : (N3 + (N2+N1)*R));
    checks++;
    if (cyc < bp_exp || cyc > bp_exp + 30) begin
      failures++; $display("FAIL backward cycles %0d, expected %0d + overhead", cyc, bp_exp);
    end
    $display("layer %0d backward pass + update: %0d cycles (kernel operations %0d)", l, cyc, bp_exp);
    tmax = 0.0;
    for (int n = 0; n < int'(N); n++) for (int k = 0; k < int'(K); k++) if (rabs(DX[n][k]) > tmax) tmax = rabs(DX[n][k]);
    for (int n = 0; n < int'(N); n++) for (int k = 0; k < int'(K); k++) begin
      @(negedge clk); dx_raddr = NAW'(n*K + k);
      @(negedge clk);
      check("dX", fp2real(dx_rdata), DX[n][k], 1e-4 * tmax);
    end
    // core gradients, from (old - new) / lr
    tmax = 0.0;
    for (int i = 0; i < int'(M1); i++) for (int y = 0; y < int'(R); y++) if (rabs(dG1[i][y]) > tmax) tmax = rabs(dG1[i][y]);
    for (int i = 0; i < int'(M1); i++) begin
      core_read(0, l, 0, i, 0, v);
      for (int y = 0; y < int'(R); y++) check("dG1", (G1[i][y] - v[y]) / LR, dG1[i][y], 1e-3 * tmax);
    end
    tmax = 0.0;
    for (int x = 0; x < int'(R); x++) for (int i = 0; i < int'(M2); i++) for (int y = 0; y < int'(R); y++) if (rabs(dG2[x][i][y]) > tmax) tmax = rabs(dG2[x][i][y]);
    for (int i = 0; i < int'(M2); i++) for (int x = 0; x < int'(R); x++) begin
      core_read(0, l, 1, i, x, v);
      for (int y = 0; y < int'(R); y++) check("dG2", (G2[x][i][y] - v[y]) / LR, dG2[x][i][y], 1e-3 * tmax);
    end
    tmax = 0.0;
    for (int x = 0; x < int'(R); x++) for (int i = 0; i < int'(M3); i++) for (int y = 0; y < int'(R); y++) if (rabs(dG3[x][i][y]) > tmax) tmax = rabs(dG3[x][i][y]);
    for (int i = 0; i < int'(M3); i++) for (int x = 0; x < int'(R); x++) begin
      core_read(0, l, 2, i, x, v);
      for (int y = 0; y < int'(R); y++) check("dG3", (G3[x][i][y] - v[y]) / LR, dG3[x][i][y], 1e-3 * tmax);
    end
    tmax = 0.0;
    for (int y = 0; y < int'(R); y++) for (int i = 0; i < int'(N3); i++) if (rabs(dG6[y][i]) > tmax) tmax = rabs(dG6[y][i]);
    for (int i = 0; i < int'(N3); i++) begin
      core_read(1, l, 0, i, 0, v);
      for (int y = 0; y < int'(R); y++) check("dG6", (G6[y][i] - v[y]) / LR, dG6[y][i], 1e-3 * tmax);
    end
    tmax = 0.0;
    for (int y = 0; y < int'(R); y++) for (int i = 0; i < int'(N2); i++) for (int x = 0; x < int'(R); x++) if (rabs(dG5[y][i][x]) > tmax) tmax = rabs(dG5[y][i][x]);
    for (int i = 0; i < int'(N2); i++) for (int x = 0; x < int'(R); x++) begin
      core_read(1, l, 1, i, x, v);
      for (int y = 0; y < int'(R); y++) check("dG5", (G5[y][i][x] - v[y]) / LR, dG5[y][i][x], 1e-3 * tmax);
    end
    tmax = 0.0;
    for (int y = 0; y < int'(R); y++) for (int i = 0; i < int'(N1); i++) for (int x = 0; x < int'(R); x++) if (rabs(dG4[y][i][x]) > tmax) tmax = rabs(dG4[y][i][x]);
    for (int i = 0; i < int'(N1); i++) for (int x = 0; x < int'(R); x++) begin
      core_read(1, l, 2, i, x, v);
      for (int y = 0; y < int'(R); y++) check("dG4", (G4[y][i][x] - v[y]) / LR, dG4[y][i][x], 1e-3 * tmax);
    end
    n_layers++;
  endtask

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lr = real2fp(LR);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    one_layer(LAYERS - 1);
    one_layer(0);
    $display("mechanisms: parallel MUL0 %0d, MUL1 %0d, MUL2 %0d, Z2' %0d, X' with fused gradient %0d, PU %0d, layers %0d",
             n_par_mul0, n_mul1, n_mul2, n_z2p, n_overlap, n_pu, n_layers);
    checks++; if (n_par_mul0 == 0) begin failures++; $display("FAIL parallel MUL0 never seen"); end
    checks++; if (n_mul1 == 0)     begin failures++; $display("FAIL MUL1 never seen"); end
    checks++; if (n_mul2 == 0)     begin failures++; $display("FAIL MUL2 never seen"); end
    checks++; if (n_z2p == 0)      begin failures++; $display("FAIL Z2' never seen"); end
    checks++; if (n_overlap == 0)  begin failures++; $display("FAIL X'/gradient overlap never seen"); end
    checks++; if (n_pu == 0)       begin failures++; $display("FAIL parameter update never seen"); end
    checks++; if (n_layers < 2)    begin failures++; $display("FAIL second layer not run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
