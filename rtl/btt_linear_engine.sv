// btt_linear_engine: training engine for tensor-train (TT) linear layers
// using the bidirectional TT (BTT) contraction.
//
// A linear layer y = W x with W (M x N, M = m1 m2 m3, N = n1 n2 n3) held as
// six TT cores of rank R is trained without ever forming W. The left
// cores (G1..G3, output side) and right cores (G4..G6, input side) are
// contracted towards the middle by two side units running in parallel; the
// K = batch x sequence-length activations enter only in the last two steps.
//
// Forward pass (op_bp = 0), d + 1 = 4 sequential contraction steps:
//   1. MUL0 on both sides at once, d - 1 = 2 steps each: Wl = G1 G2 G3
//      (M x R), Wr = G4 G5 G6 (R x N); both kept per layer for the
//      backward pass.
//   2. MUL1 (right): Z2 = Wr X          (R x K, kept per layer)
//   3. MUL2 (left) : Y  = Wl Z2         (M x K)
// Backward pass and update (op_bp = 1), given Y' = dL/dY:
//   1. left : Z2' = Wl^T Y'             (R x K)
//   2. in parallel
//        left : fused MUL2/MUL3, gradients of G1, G2, G3 from Y' and Z2
//        right: X' = Wr^T Z2', then fused gradients of G4, G5, G6 from X
//               and Z2'
//   3. parameter update (PU) of all six cores, both sides at once:
//      G <- G - lr * dG.
// The host side loads X and Y' into the activation buffers and reads Y and
// X' back; in the full design these buffers are fed from off-chip memory
// (training data, stored activations) and from the non-linear kernels.
// Cores are loaded and read through the h_* port of the selected side:
// left word (i, x) of G2/G3 is G[x, i, :], right word (i, x) of G5/G4 is
// G[:, i, x]; core 0 is G1 (left) or G6 (right), one word per mode index.
// Activations: element (t, k) of X, Y, X', Y' is at t*K + k.
//
// Timing: start is taken when idle; done pulses for one cycle when the
// pass ends. With the default sizes (R = 12, M = N = 768, K = 32) the forward
// pass takes 60 400 cycles and the backward pass with the update 96 416
// cycles; the figures follow from the side-unit cycle counts plus a few
// cycles of stage hand-over.
// What follows the source design: FP32 throughout, the BTT order and the
// parallel left/right contraction, the MUL0..MUL3 kernel roles, the fused
// fine-grained gradient computation, the parameter-update kernel after the
// gradient, tensor grouping of the cores across layers, default sizes from
// the evaluated model (768 x 768 layers with modes (12,8,8) x (8,8,12), rank 12,
// sequence length 32, batch 1). This implementation's choices: one layer
// per command, the host-side buffer ports, and LAYERS = 13 (the 13 TT
// layers of a two-encoder model: 6 per encoder plus the pooler).
module btt_linear_engine
  import btt_pkg::*;
#(
  parameter int unsigned R      = 12,
  parameter int unsigned M1     = 12,
  parameter int unsigned M2     = 8,
  parameter int unsigned M3     = 8,
  parameter int unsigned N1     = 8,
  parameter int unsigned N2     = 8,
  parameter int unsigned N3     = 12,
  parameter int unsigned K      = 32,
  parameter int unsigned LAYERS = 13,
  localparam int unsigned M     = M1 * M2 * M3,
  localparam int unsigned N     = N1 * N2 * N3,
  localparam int unsigned LYW   = (LAYERS > 1) ? $clog2(LAYERS) : 1,
  localparam int unsigned MAW   = $clog2(M * K),
  localparam int unsigned NAW   = $clog2(N * K),
  localparam int unsigned LIW   = $clog2(M1 + M2 + M3 + 1),
  localparam int unsigned RIW   = $clog2(N1 + N2 + N3 + 1),
  localparam int unsigned XW    = (R > 1) ? $clog2(R) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              start,
  input  logic              op_bp,         // 0: forward pass, 1: backward + update
  input  logic [LYW-1:0]    layer,
  input  fp32_t             lr,            // SGD learning rate
  output logic              busy,
  output logic              done,
  // activation buffers, host side
  input  logic              x_wen,
  input  logic [NAW-1:0]    x_waddr,
  input  fp32_t             x_wdata,
  input  logic              dy_wen,
  input  logic [MAW-1:0]    dy_waddr,
  input  fp32_t             dy_wdata,
  input  logic [MAW-1:0]    y_raddr,
  output fp32_t             y_rdata,
  input  logic [NAW-1:0]    dx_raddr,
  output fp32_t             dx_rdata,
  // TT cores, host side (h_right selects the side)
  input  logic              h_right,
  input  logic              h_wen,
  input  logic              h_ren,
  input  logic [LYW-1:0]    h_layer,
  input  logic [1:0]        h_core,
  input  logic [((LIW > RIW) ? LIW : RIW)-1:0] h_i,
  input  logic [XW-1:0]     h_x,
  input  fp32_t [R-1:0]     h_wdata,
  output fp32_t [R-1:0]     h_rdata,
  // observability: current engine state
  output logic [2:0]        stage
);

  localparam int unsigned KW  = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned ZSD = LAYERS * K;
  localparam int unsigned ZAW = (ZSD > 1) ? $clog2(ZSD) : 1;

  typedef enum logic [2:0] {
    E_IDLE, E_FP_MUL0, E_FP_MUL1, E_FP_MUL2, E_BP_Z2P, E_BP_GRAD, E_BP_PU
  } estate_e;

  estate_e        st;
  logic [LYW-1:0] lyr;
  fp32_t          lr_q;
  logic           l_start, r_start, l_busy, r_busy, l_done, r_done;
  side_cmd_e      l_cmd, r_cmd;
  logic           l_fin, r_fin;       // side finished its part of the stage
  logic           r_grad_started;

  // ----------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st             <= E_IDLE;
      lyr            <= '0;
      lr_q           <= FP_ZERO;
      l_fin          <= 1'b0;
      r_fin          <= 1'b0;
      r_grad_started <= 1'b0;
      done           <= 1'b0;
    end else begin
      done <= 1'b0;
      if (l_done) l_fin <= 1'b1;
      if (r_done && (st != E_BP_GRAD || r_grad_started)) r_fin <= 1'b1;
      if (st == E_BP_GRAD && r_done && !r_grad_started) r_grad_started <= 1'b1;
      case (st)
        E_IDLE: if (start) begin
          lyr   <= layer;
          lr_q  <= lr;
          l_fin <= 1'b0;
          r_fin <= 1'b0;
          st    <= op_bp ? E_BP_Z2P : E_FP_MUL0;
        end
        E_FP_MUL0: if ((l_fin || l_done) && (r_fin || r_done)) begin
          st <= E_FP_MUL1; l_fin <= 1'b0; r_fin <= 1'b0;
        end
        E_FP_MUL1: if (r_done) begin
          st <= E_FP_MUL2; l_fin <= 1'b0; r_fin <= 1'b0;
        end
        E_FP_MUL2: if (l_done) begin
          st <= E_IDLE; done <= 1'b1; l_fin <= 1'b0;
        end
        E_BP_Z2P: if (l_done) begin
          st <= E_BP_GRAD; l_fin <= 1'b0; r_fin <= 1'b0; r_grad_started <= 1'b0;
        end
        E_BP_GRAD: if ((l_fin || l_done) && (r_fin || (r_done && r_grad_started))) begin
          st <= E_BP_PU; l_fin <= 1'b0; r_fin <= 1'b0;
        end
        E_BP_PU: if ((l_fin || l_done) && (r_fin || r_done)) begin
          st <= E_IDLE; done <= 1'b1; l_fin <= 1'b0; r_fin <= 1'b0;
        end
        default: st <= E_IDLE;
      endcase
    end
  end

  // start pulses: a side is started on entry to a stage (and, for the
  // right side in E_BP_GRAD, again when X' is finished)
  estate_e st_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st_q <= E_IDLE;
    else        st_q <= st;
  end
  wire entered = (st != st_q);

  always_comb begin
    l_start = 1'b0;
    r_start = 1'b0;
    l_cmd   = SC_CHAIN;
    r_cmd   = SC_CHAIN;
    case (st)
      E_FP_MUL0: begin l_start = entered; r_start = entered; end
      E_FP_MUL1: begin r_start = entered; r_cmd = SC_PROJ; end
      E_FP_MUL2: begin l_start = entered; l_cmd = SC_EXPAND; end
      E_BP_Z2P:  begin l_start = entered; l_cmd = SC_PROJ; end
      E_BP_GRAD: begin
        l_start = entered;                l_cmd = SC_GRAD;
        r_start = entered || (r_done && !r_grad_started);
        r_cmd   = r_grad_started || (r_done && !entered) ? SC_GRAD : SC_EXPAND;
      end
      E_BP_PU:   begin l_start = entered; r_start = entered;
                       l_cmd = SC_UPDATE; r_cmd = SC_UPDATE; end
      default: ;
    endcase
  end

  assign busy  = (st != E_IDLE) || l_busy || r_busy;
  assign stage = st;

  // ------------------------------------------------------------- buffers
  // X (N x K), Y (M x K), Y' (M x K), X' (N x K); Z2 of every layer; Z2'
  logic [NAW-1:0] r_act_raddr, r_act_waddr;
  logic [MAW-1:0] l_act_raddr, l_act_waddr;
  fp32_t          x_rd, dy_rd, l_act_wdata, r_act_wdata;
  logic           l_act_wen, r_act_wen;
  logic [KW-1:0]  l_zin_ra, r_zin_ra, l_zout_wa, r_zout_wa;
  logic           l_zout_wen, r_zout_wen;
  fp32_t [R-1:0]  l_zin_rd, r_zin_rd, l_zout_wd, r_zout_wd;
  fp32_t          x_unused, dy_unused, y_unused, dx_unused;
  fp32_t [R-1:0]  z2_unused, z2p_unused;

  act_mem #(.WIDTH(32), .DEPTH(N * K)) u_x (
    .clk, .wr_en(x_wen), .wr_addr(x_waddr), .wr_data(x_wdata),
    .rda_addr(r_act_raddr), .rda_data(x_rd),
    .rdb_addr('0), .rdb_data(x_unused));

  act_mem #(.WIDTH(32), .DEPTH(M * K)) u_dy (
    .clk, .wr_en(dy_wen), .wr_addr(dy_waddr), .wr_data(dy_wdata),
    .rda_addr(l_act_raddr), .rda_data(dy_rd),
    .rdb_addr('0), .rdb_data(dy_unused));

  act_mem #(.WIDTH(32), .DEPTH(M * K)) u_y (
    .clk, .wr_en(l_act_wen), .wr_addr(l_act_waddr), .wr_data(l_act_wdata),
    .rda_addr(y_raddr), .rda_data(y_rdata),
    .rdb_addr('0), .rdb_data(y_unused));

  act_mem #(.WIDTH(32), .DEPTH(N * K)) u_dx (
    .clk, .wr_en(r_act_wen), .wr_addr(r_act_waddr), .wr_data(r_act_wdata),
    .rda_addr(dx_raddr), .rda_data(dx_rdata),
    .rdb_addr('0), .rdb_data(dx_unused));

  act_mem #(.WIDTH(32 * R), .DEPTH(ZSD)) u_z2 (
    .clk, .wr_en(r_zout_wen), .wr_addr(ZAW'(int'(lyr) * K + int'(r_zout_wa))),
    .wr_data(r_zout_wd),
    .rda_addr(ZAW'(int'(lyr) * K + int'(l_zin_ra))), .rda_data(l_zin_rd),
    .rdb_addr('0), .rdb_data(z2_unused));

  act_mem #(.WIDTH(32 * R), .DEPTH(K)) u_z2p (
    .clk, .wr_en(l_zout_wen), .wr_addr(l_zout_wa), .wr_data(l_zout_wd),
    .rda_addr(r_zin_ra), .rda_data(r_zin_rd),
    .rdb_addr('0), .rdb_data(z2p_unused));

  // ---------------------------------------------------------- side units
  fp32_t [R-1:0] l_h_rdata, r_h_rdata;
  logic          h_sel_q;
  always_ff @(posedge clk) h_sel_q <= h_right;
  assign h_rdata = h_sel_q ? r_h_rdata : l_h_rdata;

  btt_side_unit #(.R(R), .P1(M1), .I2(M2), .I3(M3), .K(K), .LAYERS(LAYERS),
                  .LEFT(1'b1)) u_left (
    .clk, .rst_n,
    .start(l_start), .cmd(l_cmd), .layer(lyr), .lr(lr_q),
    .busy(l_busy), .done(l_done),
    .act_raddr(l_act_raddr), .act_rdata(dy_rd),
    .act_wen(l_act_wen), .act_waddr(l_act_waddr), .act_wdata(l_act_wdata),
    .zin_raddr(l_zin_ra), .zin_rdata(l_zin_rd),
    .zout_wen(l_zout_wen), .zout_waddr(l_zout_wa), .zout_wdata(l_zout_wd),
    .h_wen(h_wen & ~h_right), .h_ren(h_ren & ~h_right), .h_layer(h_layer),
    .h_core(h_core), .h_i(LIW'(h_i)), .h_x(h_x), .h_wdata(h_wdata),
    .h_rdata(l_h_rdata));

  btt_side_unit #(.R(R), .P1(N3), .I2(N2), .I3(N1), .K(K), .LAYERS(LAYERS),
                  .LEFT(1'b0)) u_right (
    .clk, .rst_n,
    .start(r_start), .cmd(r_cmd), .layer(lyr), .lr(lr_q),
    .busy(r_busy), .done(r_done),
    .act_raddr(r_act_raddr), .act_rdata(x_rd),
    .act_wen(r_act_wen), .act_waddr(r_act_waddr), .act_wdata(r_act_wdata),
    .zin_raddr(r_zin_ra), .zin_rdata(r_zin_rd),
    .zout_wen(r_zout_wen), .zout_waddr(r_zout_wa), .zout_wdata(r_zout_wd),
    .h_wen(h_wen & h_right), .h_ren(h_ren & h_right), .h_layer(h_layer),
    .h_core(h_core), .h_i(RIW'(h_i)), .h_x(h_x), .h_wdata(h_wdata),
    .h_rdata(r_h_rdata));

endmodule
