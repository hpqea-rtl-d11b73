// tb_alu: the ALU computing both rows of random dense and diagonal gates on
// random amplitude pairs (local-pair operand routing), checked against the
// reference model.
module tb_alu;
  import hpqea_pkg::*;
  import tb_ref_pkg::*;

  logic  op;
  cplx_t m0a, m0b, x0a, x1a, m1a, m1b, x0b, x1b, y0, y1;
  int    checks = 0, failures = 0;
  mat_t  m;
  amp_t  x0, x1, e0, e1;

  alu dut (.op, .m0a, .m0b, .x0a, .x1a, .m1a, .m1b, .x0b, .x1b, .y0, .y1);

  initial begin
    for (int n = 0; n < 300; n++) begin
      unique case (n % 5)
        0: m = g_h();
        1: m = g_rx(real'($urandom_range(6283)) / 1000.0);
        2: m = g_ry(real'($urandom_range(6283)) / 1000.0);
        3: m = g_rz(real'($urandom_range(6283)) / 1000.0);
        default: m = g_s();
      endcase
      op = (n % 5) >= 3;
      x0 = rand_amp(); x1 = rand_amp();
      m0a = m[0]; m0b = m[1]; x0a = x0; x1a = x1;
      m1a = m[3]; m1b = m[2]; x0b = x1; x1b = x0;
      if (op) begin
        e0 = cmulr(m[0], x0);
        e1 = cmulr(m[3], x1);
      end else begin
        e0 = caddr(cmulr(m[0], x0), cmulr(m[1], x1));
        e1 = caddr(cmulr(m[2], x0), cmulr(m[3], x1));
      end
      #1;
      checks += 2;
      if (amp_t'(y0) !== e0) begin failures++; $display("FAIL y0 %0d", n); end
      if (amp_t'(y1) !== e1) begin failures++; $display("FAIL y1 %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
