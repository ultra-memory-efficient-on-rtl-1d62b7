// btt_side_unit: one half of the bidirectional tensor-train (BTT) linear layer.
//
// A weight matrix W (M x N) in tensor-train format with d = 3 is the chain
// of six cores G1..G6. The bidirectional scheme contracts the three "left"
// cores (output modes m1 m2 m3) and the three "right" cores (input modes
// n1 n2 n3) separately, towards the middle, without touching the
// activations:
//   left : Wl (M x R) = G1 x G2 x G3       right: Wr (R x N) = G4 x G5 x G6
// Only then do the activations X (N x K, K = batch x sequence length) come
// in: Z2 = Wr X (R x K) and Y = Wl Z2. One instance of this unit serves one
// side (parameter LEFT) and owns that side's cores, gradients and
// intermediate tensors. The engine runs a left and a right instance in
// parallel.
//
// Generic form. Both sides are the same two-step chain
//   step a: Mid(p, i) = sum_x C0(p)[x]  * C1(i, x)     p < P1, i < I2
//   step b: W(p, i)   = sum_x Mid(p)[x] * C2(i, x)     p < P1*I2, i < I3
// on rank vectors (one word = R FP32 values). Only the flattening of
// (p, i) differs: p*I + i on the left, i*P + p on the right.
//   left : C0 = G1 (m1), C1 = G2 (m2), C2 = G3 (m3); W(m) = row m of Wl
//   right: C0 = G6 (n3), C1 = G5 (n2), C2 = G4 (n1); W(n) = column n of Wr
//
// Commands (btt_pkg::side_cmd_e), each for the layer given at start:
//   SC_CHAIN  (MUL0) steps a and b; Mid and W are kept per layer, since the
//             backward pass reuses them.
//   SC_PROJ   Z(k) = sum_t A[t,k] * W(t), t < T (= M or N), written to zout.
//             Right side in the forward pass: MUL1, Z2 = Wr X.
//             Left side in the backward pass: Z2' = Wl^T Y'.
//   SC_EXPAND O[t,k] = W(t) . Zin(k), written to the activation port.
//             Left side forward: MUL2, Y = Wl Z2.
//             Right side backward: X' = Wr^T Z2'.
//   SC_GRAD   gradients of the three cores, fused and fine-grained: for
//             every (p, i) of step b the gradient word dW(t) = sum_k
//             A[t,k] Zin(k) (A = Y', Zin = Z2 on the left, the MUL2 of the
//             backward pass; A = X, Zin = Z2' on the right) is produced into
//             a single R-word register and consumed at once (MUL3):
//               dC2(i, x) += Mid(p)[x] * dW        (R multiply-adds)
//               dMid(p)[x] += C2(i, x) . dW        (R inner products)
//             so no M x R or N x R gradient buffer exists. Step a then
//             gives dC1 and dC0 from dMid the same way.
//   SC_UPDATE SGD on every core word of the layer: C <- C - lr * dC.
// Gradients are held for one layer (the update must run before the next
// layer's SC_GRAD); the first contribution overwrites, so no clearing pass.
//
// Timing: a three-stage pipeline (issue / operand + kernel / write back),
// one kernel operation per cycle. Cycle counts per command, plus 3 cycles
// of issue and drain:
//   SC_CHAIN  (R+1)*(P1*I2 + P1*I2*I3)
//   SC_PROJ, SC_EXPAND   T*K
//   SC_GRAD   T*(K + 2 + 2R) + P1*I2*(2 + 2R)
//   SC_UPDATE P1 + (I2+I3)*R
// Interfaces: start/cmd/layer are sampled when idle; done pulses one cycle
// at the end. act_* and zin_* are synchronous-read ports (data one cycle
// after the address). The host core port works only when idle.
// What follows the source design: the BTT order, the kernel roles MUL0 to
// MUL3, rank-parallel datapath, fused fine-grained gradient with an O(R)
// buffer, storage of the forward intermediates for the backward pass, SGD.
// This implementation's choices: d fixed at 3, one rank value R for all
// inner ranks, the pipeline, the word orientation of the cores, and
// delaying the update of a core until all gradients of the layer exist
// (so the result equals plain SGD).
module btt_side_unit
  import btt_pkg::*;
#(
  parameter int unsigned R      = 12,
  parameter int unsigned P1     = 12,      // size of the first core's mode
  parameter int unsigned I2     = 8,       // size of the middle core's mode
  parameter int unsigned I3     = 8,       // size of the last core's mode
  parameter int unsigned K      = 32,      // tokens (batch x sequence length)
  parameter int unsigned LAYERS = 13,      // layers whose cores are stored
  parameter bit          LEFT   = 1'b1,
  localparam int unsigned MID   = P1 * I2,
  localparam int unsigned T     = P1 * I2 * I3,
  localparam int unsigned LYW   = (LAYERS > 1) ? $clog2(LAYERS) : 1,
  localparam int unsigned IW    = $clog2(P1 + I2 + I3 + 1),
  localparam int unsigned XW    = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned AAW   = $clog2(T * K),
  localparam int unsigned KW    = (K > 1) ? $clog2(K) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              start,
  input  side_cmd_e         cmd,
  input  logic [LYW-1:0]    layer,
  input  fp32_t             lr,
  output logic              busy,
  output logic              done,
  // scalar activation read (A) and write (O)
  output logic [AAW-1:0]    act_raddr,
  input  fp32_t             act_rdata,
  output logic              act_wen,
  output logic [AAW-1:0]    act_waddr,
  output fp32_t             act_wdata,
  // rank-vector buffer read (Zin) and write (Zout)
  output logic [KW-1:0]     zin_raddr,
  input  fp32_t [R-1:0]     zin_rdata,
  output logic              zout_wen,
  output logic [KW-1:0]     zout_waddr,
  output fp32_t [R-1:0]     zout_wdata,
  // host access to the cores (idle only)
  input  logic              h_wen,
  input  logic              h_ren,
  input  logic [LYW-1:0]    h_layer,
  input  logic [1:0]        h_core,
  input  logic [IW-1:0]     h_i,
  input  logic [XW-1:0]     h_x,
  input  fp32_t [R-1:0]     h_wdata,
  output fp32_t [R-1:0]     h_rdata
);

  typedef logic [19:0] cnt_t;

  typedef enum logic [2:0] {
    M_CHAIN_A, M_CHAIN_B, M_PROJ, M_EXPAND, M_GRAD_B, M_GRAD_A, M_UPD
  } mode_e;

  typedef enum logic [2:0] {
    PH_LDIN, PH_LDOUT, PH_BUB, PH_MAC, PH_DOUT, PH_GFMA, PH_GDOT, PH_SINGLE
  } phase_e;

  typedef enum logic [1:0] { SRC_CORE, SRC_WORK, SRC_ZIN, SRC_GRAD } asrc_e;
  typedef enum logic [1:0] { BS_ZIN, BS_DOUT, BS_GRAD } bsrc_e;
  typedef enum logic [1:0] { SS_ACT, SS_IN, SS_NEGLR } ssrc_e;
  typedef enum logic [3:0] {
    WB_NONE, WB_WORK_V, WB_WORK_D, WB_CORE_V, WB_GRAD_V, WB_GRAD_D,
    WB_ZOUT_V, WB_ACT_D0, WB_DOUT_V
  } wb_e;
  typedef enum logic [1:0] { K_NOP, K_LDIN, K_LDOUT, K_OP } kind_e;

  localparam int unsigned WDEPTH = LAYERS * (MID + T) + MID;
  localparam int unsigned WAW    = $clog2(WDEPTH);
  localparam int unsigned UW     = (WAW > AAW) ? WAW : AAW;

  typedef struct packed {
    kind_e           kind;
    tc_op_e          op;
    logic            clr;
    logic [XW-1:0]   x;
    asrc_e           asrc;
    logic            azero;
    bsrc_e           bsrc;
    ssrc_e           ssrc;
    wb_e             wb;
    logic [UW-1:0]   wb_work;    // WORK address, or flat ZOUT / ACT index
    logic [1:0]      wb_core;
    logic [IW-1:0]   wb_i;
    logic [XW-1:0]   wb_x;
  } uop_t;

  // The part of a micro-operation still needed at write-back.
  typedef struct packed {
    wb_e             wb;
    logic [UW-1:0]   wb_work;
    logic [1:0]      wb_core;
    logic [IW-1:0]   wb_i;
    logic [XW-1:0]   wb_x;
  } wb_t;

  // ---------------------------------------------------------------- state
  logic           running;
  logic [1:0]     drain;
  mode_e          mode;
  side_cmd_e      cur_cmd;
  logic [1:0]     step;
  logic [LYW-1:0] lyr;
  fp32_t          neg_lr;
  phase_e         ph;
  cnt_t           o, i, c;

  // loop bounds of the current mode
  cnt_t o_n, i_n;
  always_comb begin
    o_n = '0;
    i_n = '0;
    case (mode)
      M_CHAIN_A, M_GRAD_A: begin o_n = cnt_t'(P1);  i_n = cnt_t'(I2); end
      M_CHAIN_B, M_GRAD_B: begin o_n = cnt_t'(MID); i_n = cnt_t'(I3); end
      M_PROJ:              begin o_n = cnt_t'(K);   i_n = cnt_t'(T);  end
      M_EXPAND:            begin o_n = cnt_t'(T);   i_n = cnt_t'(K);  end
      default: begin                       // M_UPD, one core per step
        case (step)
          2'd0:    begin o_n = cnt_t'(P1); i_n = 20'd1;      end
          2'd1:    begin o_n = cnt_t'(I2); i_n = cnt_t'(R);  end
          default: begin o_n = cnt_t'(I3); i_n = cnt_t'(R);  end
        endcase
      end
    endcase
  end

  function automatic cnt_t phase_len(input phase_e p);
    case (p)
      PH_MAC, PH_GFMA, PH_GDOT: return cnt_t'(R);
      PH_DOUT:                  return cnt_t'(K);
      default:                  return 20'd1;
    endcase
  endfunction

  // first phase of a (o, i) iteration, and the phase after p (PH_SINGLE
  // doubles as "iteration finished" after the last phase)
  function automatic phase_e first_phase(input mode_e m);
    case (m)
      M_CHAIN_A, M_CHAIN_B, M_GRAD_A, M_GRAD_B: return PH_LDIN;
      default:                                  return PH_SINGLE;
    endcase
  endfunction

  function automatic logic last_phase(input mode_e m, input phase_e p);
    case (m)
      M_CHAIN_A, M_CHAIN_B: return p == PH_MAC;
      M_GRAD_A, M_GRAD_B:   return p == PH_GDOT;
      default:              return 1'b1;
    endcase
  endfunction

  function automatic phase_e next_phase(input mode_e m, input phase_e p);
    case (p)
      PH_LDIN:  return (m == M_GRAD_B) ? PH_DOUT : (m == M_GRAD_A) ? PH_LDOUT : PH_MAC;
      PH_DOUT:  return PH_BUB;
      PH_BUB:   return PH_GFMA;
      PH_LDOUT: return PH_GFMA;
      PH_GFMA:  return PH_GDOT;
      default:  return PH_SINGLE;
    endcase
  endfunction

  // flattened index of (p, i)
  function automatic cnt_t flat(input cnt_t p, input cnt_t ii,
                                input cnt_t pn, input cnt_t in_n);
    return LEFT ? cnt_t'(p * in_n + ii) : cnt_t'(ii * pn + p);
  endfunction

  function automatic logic [WAW-1:0] work_mid(input logic [LYW-1:0] l, input cnt_t p);
    return WAW'(int'(l) * (MID + T) + int'(p));
  endfunction
  function automatic logic [WAW-1:0] work_w(input logic [LYW-1:0] l, input cnt_t t);
    return WAW'(int'(l) * (MID + T) + MID + int'(t));
  endfunction
  function automatic logic [WAW-1:0] work_dmid(input cnt_t p);
    return WAW'(LAYERS * (MID + T) + int'(p));
  endfunction

  // ------------------------------------------------------- issue (stage 0)
  uop_t          u0;
  logic          core_ren, grad_ren;
  logic [1:0]    core_rc, grad_rc;
  logic [IW-1:0] core_ri, grad_ri;
  logic [XW-1:0] core_rx, grad_rx;
  logic [WAW-1:0] work_ra;
  cnt_t          tix;

  always_comb begin
    u0        = '0;
    u0.kind   = K_NOP;
    core_ren  = 1'b0;
    core_rc   = '0;
    core_ri   = '0;
    core_rx   = '0;
    grad_ren  = 1'b0;
    grad_rc   = '0;
    grad_ri   = '0;
    grad_rx   = '0;
    work_ra   = '0;
    act_raddr = '0;
    zin_raddr = '0;
    tix       = flat(o, i, o_n, i_n);
    if (running) begin
      u0.x = XW'(c);
      case (mode)
        M_CHAIN_A, M_CHAIN_B: begin
          if (ph == PH_LDIN) begin
            u0.kind = K_LDIN;
            if (mode == M_CHAIN_A) begin
              u0.asrc = SRC_CORE; core_ren = 1'b1; core_rc = 2'd0; core_ri = IW'(o);
            end else begin
              u0.asrc = SRC_WORK; work_ra = work_mid(lyr, o);
            end
          end else begin                                   // PH_MAC
            u0.kind = K_OP; u0.op = TC_ROW; u0.asrc = SRC_CORE; u0.ssrc = SS_IN;
            u0.clr  = (c == 0);
            core_ren = 1'b1;
            core_rc  = (mode == M_CHAIN_A) ? 2'd1 : 2'd2;
            core_ri  = IW'(i);
            core_rx  = XW'(c);
            if (c == cnt_t'(R - 1)) begin
              u0.wb      = WB_WORK_V;
              u0.wb_work = UW'((mode == M_CHAIN_A) ? work_mid(lyr, tix) : work_w(lyr, tix));
            end
          end
        end
        M_PROJ: begin                                      // o = k, i = t
          u0.kind = K_OP; u0.op = TC_ROW; u0.asrc = SRC_WORK; u0.ssrc = SS_ACT;
          u0.clr  = (i == 0);
          work_ra   = work_w(lyr, i);
          act_raddr = AAW'(i * K + o);
          if (i == i_n - 1) begin
            u0.wb = WB_ZOUT_V; u0.wb_work = UW'(o);
          end
        end
        M_EXPAND: begin                                    // o = t, i = k
          u0.kind = K_OP; u0.op = TC_DOT; u0.asrc = SRC_WORK; u0.bsrc = BS_ZIN;
          u0.clr  = 1'b1; u0.x = '0;
          work_ra   = work_w(lyr, o);
          zin_raddr = KW'(i);
          u0.wb = WB_ACT_D0; u0.wb_work = UW'(o * K + i);
        end
        M_GRAD_A, M_GRAD_B: begin
          case (ph)
            PH_LDIN: begin
              u0.kind = K_LDIN;
              if (mode == M_GRAD_A) begin
                u0.asrc = SRC_CORE; core_ren = 1'b1; core_rc = 2'd0; core_ri = IW'(o);
              end else begin
                u0.asrc = SRC_WORK; work_ra = work_mid(lyr, o);
              end
            end
            PH_LDOUT: begin                                // dOut = dMid(p, i)
              u0.kind = K_LDOUT; u0.asrc = SRC_WORK; work_ra = work_dmid(tix);
            end
            PH_DOUT: begin                                 // dW(t) = sum_k A[t,k] Zin(k)
              u0.kind = K_OP; u0.op = TC_ROW; u0.asrc = SRC_ZIN; u0.ssrc = SS_ACT;
              u0.clr  = (c == 0);
              zin_raddr = KW'(c);
              act_raddr = AAW'(tix * K + c);
              if (c == cnt_t'(K - 1)) u0.wb = WB_DOUT_V;
            end
            PH_BUB: u0.kind = K_NOP;
            PH_GFMA: begin                                 // dC(i,x) += In[x] * dOut
              u0.kind  = K_OP; u0.op = TC_FMA; u0.asrc = SRC_GRAD; u0.bsrc = BS_DOUT;
              u0.ssrc  = SS_IN; u0.azero = (o == 0);
              grad_ren = 1'b1;
              grad_rc  = (mode == M_GRAD_B) ? 2'd2 : 2'd1;
              grad_ri  = IW'(i);
              grad_rx  = XW'(c);
              u0.wb = WB_GRAD_V; u0.wb_core = grad_rc; u0.wb_i = IW'(i); u0.wb_x = XW'(c);
            end
            default: begin                                 // PH_GDOT: dIn[x] += C(i,x) . dOut
              u0.kind  = K_OP; u0.op = TC_DOT; u0.asrc = SRC_CORE; u0.bsrc = BS_DOUT;
              u0.clr   = (i == 0);
              core_ren = 1'b1;
              core_rc  = (mode == M_GRAD_B) ? 2'd2 : 2'd1;
              core_ri  = IW'(i);
              core_rx  = XW'(c);
              if (i == i_n - 1 && c == cnt_t'(R - 1)) begin
                if (mode == M_GRAD_B) begin
                  u0.wb = WB_WORK_D; u0.wb_work = UW'(work_dmid(o));
                end else begin
                  u0.wb = WB_GRAD_D; u0.wb_core = 2'd0; u0.wb_i = IW'(o);
                end
              end
            end
          endcase
        end
        default: begin                                     // M_UPD: C <- C - lr * dC
          u0.kind  = K_OP; u0.op = TC_FMA; u0.asrc = SRC_CORE; u0.bsrc = BS_GRAD;
          u0.ssrc  = SS_NEGLR;
          core_ren = 1'b1; core_rc = step; core_ri = IW'(o); core_rx = XW'(i);
          grad_ren = 1'b1; grad_rc = step; grad_ri = IW'(o); grad_rx = XW'(i);
          u0.wb = WB_CORE_V; u0.wb_core = step; u0.wb_i = IW'(o); u0.wb_x = XW'(i);
        end
      endcase
    end
  end

  // ------------------------------------------------------------ sequencer
  // mode of a command's step, and whether another step follows
  function automatic mode_e mode_of(input side_cmd_e cm, input logic [1:0] st);
    case (cm)
      SC_CHAIN:  return (st == 0) ? M_CHAIN_A : M_CHAIN_B;
      SC_PROJ:   return M_PROJ;
      SC_EXPAND: return M_EXPAND;
      SC_GRAD:   return (st == 0) ? M_GRAD_B : M_GRAD_A;
      default:   return M_UPD;
    endcase
  endfunction

  function automatic logic [1:0] steps_of(input side_cmd_e cm);
    case (cm)
      SC_CHAIN, SC_GRAD: return 2'd2;
      SC_UPDATE:         return 2'd3;
      default:           return 2'd1;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      drain   <= '0;
      done    <= 1'b0;
      mode    <= M_CHAIN_A;
      cur_cmd <= SC_CHAIN;
      step    <= '0;
      lyr     <= '0;
      neg_lr  <= FP_ZERO;
      ph      <= PH_SINGLE;
      o       <= '0;
      i       <= '0;
      c       <= '0;
    end else begin
      done <= 1'b0;
      if (!running && drain == 0) begin
        if (start) begin
          running <= 1'b1;
          cur_cmd <= cmd;
          step    <= '0;
          mode    <= mode_of(cmd, 2'd0);
          ph      <= first_phase(mode_of(cmd, 2'd0));
          lyr     <= layer;
          neg_lr  <= fp_neg(lr);
          o <= '0; i <= '0; c <= '0;
        end
      end else if (running) begin
        if (c != phase_len(ph) - 1) begin
          c <= c + 1;
        end else begin
          c <= '0;
          if (!last_phase(mode, ph)) begin
            ph <= next_phase(mode, ph);
          end else begin
            ph <= first_phase(mode);
            if (i != i_n - 1) begin
              i <= i + 1;
            end else begin
              i <= '0;
              if (o != o_n - 1) begin
                o <= o + 1;
              end else begin
                o <= '0;
                if (step + 2'd1 < steps_of(cur_cmd)) begin
                  step <= step + 2'd1;
                  mode <= mode_of(cur_cmd, step + 2'd1);
                  ph   <= first_phase(mode_of(cur_cmd, step + 2'd1));
                end else begin
                  running <= 1'b0;
                  drain   <= 2'd3;
                end
              end
            end
          end
        end
      end else begin
        drain <= drain - 2'd1;
        if (drain == 2'd1) done <= 1'b1;
      end
    end
  end

  assign busy = running || (drain != 0);

  // ----------------------------------------------------------- memories
  fp32_t [R-1:0] core_rdata, grad_rdata, work_rdata;
  logic          core_wen, grad_wen, work_wen;
  logic [1:0]    core_wc, grad_wc;
  logic [IW-1:0] core_wi, grad_wi;
  logic [XW-1:0] core_wx, grad_wx;
  fp32_t [R-1:0] core_wdata, grad_wdata, work_wdata;
  logic [WAW-1:0] work_wa;

  tt_core_mem #(.R(R), .P1(P1), .I2(I2), .I3(I3), .LAYERS(LAYERS)) u_core (
    .clk,
    .rd_en   (core_ren | (h_ren & ~busy)),
    .rd_layer(busy ? lyr : h_layer),
    .rd_core (busy ? core_rc : h_core),
    .rd_i    (busy ? core_ri : h_i),
    .rd_x    (busy ? core_rx : h_x),
    .rd_data (core_rdata),
    .wr_en   (core_wen),
    .wr_layer(busy ? lyr : h_layer),
    .wr_core (core_wc),
    .wr_i    (core_wi),
    .wr_x    (core_wx),
    .wr_data (core_wdata)
  );
  assign h_rdata = core_rdata;

  tt_core_mem #(.R(R), .P1(P1), .I2(I2), .I3(I3), .LAYERS(1)) u_grad (
    .clk,
    .rd_en   (grad_ren),
    .rd_layer(1'b0),
    .rd_core (grad_rc),
    .rd_i    (grad_ri),
    .rd_x    (grad_rx),
    .rd_data (grad_rdata),
    .wr_en   (grad_wen),
    .wr_layer(1'b0),
    .wr_core (grad_wc),
    .wr_i    (grad_wi),
    .wr_x    (grad_wx),
    .wr_data (grad_wdata)
  );

  // forward intermediates (Mid, W) of every layer, and dMid
  fp32_t [R-1:0] work [WDEPTH];
  always_ff @(posedge clk) begin
    if (work_wen) work[work_wa] <= work_wdata;
    work_rdata <= work[work_ra];
  end

  // ------------------------------------------- operands + kernel (stage 1)
  uop_t          u1;
  wb_t           u2;
  fp32_t [R-1:0] in_reg, dout_reg;
  fp32_t [R-1:0] opa, opb, acc_v, acc_d;
  fp32_t         ops;

  always_comb begin
    case (u1.asrc)
      SRC_CORE: opa = core_rdata;
      SRC_WORK: opa = work_rdata;
      SRC_ZIN:  opa = zin_rdata;
      default:  opa = grad_rdata;
    endcase
    if (u1.azero) opa = '0;
    case (u1.bsrc)
      BS_ZIN:  opb = zin_rdata;
      BS_DOUT: opb = dout_reg;
      default: opb = grad_rdata;
    endcase
    case (u1.ssrc)
      SS_ACT:  ops = act_rdata;
      SS_IN:   ops = in_reg[u1.x];
      default: ops = neg_lr;
    endcase
  end

  tc_kernel #(.R(R)) u_kernel (
    .clk, .rst_n,
    .en   (u1.kind == K_OP),
    .op   (u1.op),
    .clr  (u1.clr),
    .lane (u1.x),
    .s    (ops),
    .a    (opa),
    .b    (opb),
    .acc_v(acc_v),
    .acc_d(acc_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u1      <= '0;
      u2      <= '0;
      in_reg  <= '0;
      dout_reg <= '0;
    end else begin
      u1 <= u0;
      if (u1.kind == K_OP) u2 <= '{wb: u1.wb, wb_work: u1.wb_work, wb_core: u1.wb_core,
                                   wb_i: u1.wb_i, wb_x: u1.wb_x};
      else                 u2 <= '0;
      if (u1.kind == K_LDIN)  in_reg   <= opa;
      if (u1.kind == K_LDOUT) dout_reg <= opa;
      if (u2.wb == WB_DOUT_V) dout_reg <= acc_v;
    end
  end

  // -------------------------------------------------- write back (stage 2)
  always_comb begin
    work_wen   = 1'b0;
    work_wa    = WAW'(u2.wb_work);
    work_wdata = (u2.wb == WB_WORK_D) ? acc_d : acc_v;
    core_wen   = 1'b0;
    core_wc    = u2.wb_core;
    core_wi    = u2.wb_i;
    core_wx    = u2.wb_x;
    core_wdata = acc_v;
    grad_wen   = 1'b0;
    grad_wc    = u2.wb_core;
    grad_wi    = u2.wb_i;
    grad_wx    = u2.wb_x;
    grad_wdata = (u2.wb == WB_GRAD_D) ? acc_d : acc_v;
    zout_wen   = 1'b0;
    zout_waddr = KW'(u2.wb_work);
    zout_wdata = acc_v;
    act_wen    = 1'b0;
    act_waddr  = AAW'(u2.wb_work);
    act_wdata  = acc_d[0];
    case (u2.wb)
      WB_WORK_V, WB_WORK_D: work_wen = 1'b1;
      WB_CORE_V:            core_wen = 1'b1;
      WB_GRAD_V, WB_GRAD_D: grad_wen = 1'b1;
      WB_ZOUT_V:            zout_wen = 1'b1;
      WB_ACT_D0:            act_wen  = 1'b1;
      default: ;
    endcase
    if (!busy && h_wen) begin
      core_wen   = 1'b1;
      core_wc    = h_core;
      core_wi    = h_i;
      core_wx    = h_x;
      core_wdata = h_wdata;
    end
  end

endmodule
