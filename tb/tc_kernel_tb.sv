// tc_kernel_tb: self-checking testbench of the rank-parallel contraction
// kernel at its default width (R = 12 lanes, adder tree padded to 16).
//
// 3000 random operations (TC_ROW, TC_DOT, TC_FMA, with and without clr,
// random destination lane, enable sometimes low). The expected result of
// each is worked out in double precision from the operands and the kernel's
// registered state before the operation:
//   * TC_ROW with clr and TC_ROW with s = 1 are single roundings, so the
//     result must equal the correctly rounded FP32 value bit for bit
//     (fp_mul and fp_add are checked exactly this way);
//   * the other cases must be within 1e-6 relative of the exact value;
//   * with en low nothing may change.
// One result per cycle: operands are applied on a falling edge and the
// result is read on the next falling edge.
// The three operations follow the kernel roles of the contraction flow; the
// operand ranges, tolerances and operation mix are this testbench's choice.
module tc_kernel_tb;
  import btt_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned R  = 12;
  localparam int unsigned XW = $clog2(R);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          en = 1'b0, clr = 1'b0;
  tc_op_e        op = TC_ROW;
  logic [XW-1:0] lane = '0;
  fp32_t         s = '0;
  fp32_t [R-1:0] a = '0, b = '0, acc_v, acc_d;

  tc_kernel #(.R(R)) dut (.*);

  int checks = 0, failures = 0;
  int n_row = 0, n_dot = 0, n_fma = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random FP32 value with magnitude 2^-8 .. 2^8
  function automatic fp32_t rnd();
    real v;
    int  e;
    e = $urandom_range(16);
    v = urand(1.0) * real'(1 << e) / 256.0;
    return real2fp(v);
  endfunction

  task automatic cmp(input string what, input fp32_t got, input real exact, input bit exact_bits,
                     input real mag);
    checks++;
    if (exact_bits) begin
      if (got !== real2fp(exact)) begin
        failures++;
        if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, real2fp(exact));
      end
    end else if (rabs(fp2real(got) - exact) > 1e-6 * mag + 1e-30) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %g expected %g", what, fp2real(got), exact);
    end
  endtask

  initial begin
    fp32_t [R-1:0] pv, pd;
    real ex, mag;
    bit  one;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int l = 0; l < int'(R); l++) begin
      checks++;
      if (acc_v[l] != '0 || acc_d[l] != '0) begin failures++; $display("FAIL reset lane %0d", l); end
    end
    for (int it = 0; it < 3000; it++) begin
      pv  = acc_v; pd = acc_d;
      op  = tc_op_e'($urandom_range(2));
      clr = ($urandom_range(3) == 0);
      en  = ($urandom_range(9) != 0);
      lane = XW'($urandom_range(R - 1));
      one = ($urandom_range(3) == 0);
      s   = one ? 32'h3f80_0000 : rnd();
      for (int l = 0; l < int'(R); l++) begin a[l] = rnd(); b[l] = rnd(); end
      @(negedge clk);
      if (!en) begin
        checks++;
        if (acc_v != pv || acc_d != pd) begin failures++; $display("FAIL state changed with en low"); end
        continue;
      end
      case (op)
        TC_ROW: begin
          n_row++;
          for (int l = 0; l < int'(R); l++) begin
            ex  = (clr ? 0.0 : fp2real(pv[l])) + fp2real(s) * fp2real(a[l]);
            mag = (clr ? 0.0 : rabs(fp2real(pv[l]))) + rabs(fp2real(s) * fp2real(a[l]));
            cmp("ROW", acc_v[l], ex, clr || one, mag);
          end
        end
        TC_FMA: begin
          n_fma++;
          for (int l = 0; l < int'(R); l++) begin
            ex  = fp2real(a[l]) + fp2real(s) * fp2real(b[l]);
            mag = rabs(fp2real(a[l])) + rabs(fp2real(s) * fp2real(b[l]));
            cmp("FMA", acc_v[l], ex, one, mag);
          end
          checks++;
          if (acc_d != pd) begin failures++; $display("FAIL FMA touched acc_d"); end
        end
        default: begin
          n_dot++;
          ex  = clr ? 0.0 : fp2real(pd[lane]);
          mag = rabs(ex);
          for (int l = 0; l < int'(R); l++) begin
            ex  += fp2real(a[l]) * fp2real(b[l]);
            mag += rabs(fp2real(a[l]) * fp2real(b[l]));
          end
          cmp("DOT", acc_d[lane], ex, 1'b0, 4.0 * mag);
          for (int l = 0; l < int'(R); l++) if (l != int'(lane)) begin
            checks++;
            if (acc_d[l] != pd[l]) begin failures++; $display("FAIL DOT wrote lane %0d", l); end
          end
          checks++;
          if (acc_v != pv) begin failures++; $display("FAIL DOT touched acc_v"); end
        end
      endcase
    end
    checks++;
    if (n_row == 0 || n_dot == 0 || n_fma == 0) begin failures++; $display("FAIL an operation never ran"); end
    $display("operations: ROW %0d, DOT %0d, FMA %0d", n_row, n_dot, n_fma);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
