// tb_special_unit: random dense and sparse operations on one Special Unit,
// compared with the reference Q2.30 arithmetic, plus a few exact cases
// (identity, i*i = -1, products of 0.5).
module tb_special_unit;
  import hpqea_pkg::*;
  import tb_ref_pkg::*;

  logic  op;
  cplx_t i0, i1, i2, i3, y;
  int    checks = 0, failures = 0;

  special_unit dut (.op, .i0, .i1, .i2, .i3, .y);

  task automatic check(amp_t exp, string what);
    #1;
    checks++;
    if (amp_t'(y) !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, y, exp);
    end
  endtask

  initial begin
    // exact cases
    op = 0; i0 = mk(1.0, 0); i1 = mk(0.25, -0.5); i2 = mk(0, 0); i3 = mk(0.7, 0.1);
    check(mk(0.25, -0.5), "1*x + 0*y");
    op = 0; i0 = mk(0, 1.0); i1 = mk(0, 1.0); i2 = mk(0.5, 0); i3 = mk(0.5, 0);
    check(mk(-0.75, 0), "i*i + 0.5*0.5");
    op = 1; i2 = mk(0.5, 0.5); i3 = mk(0.5, 0.5);
    check(mk(-1.0, 0), "sparse i*i");
    repeat (400) begin
      op = 1'($urandom_range(1));
      i0 = rand_amp(); i1 = rand_amp(); i2 = rand_amp(); i3 = rand_amp();
      check(op ? cmulr(i0, i1) : caddr(cmulr(i0, i1), cmulr(i2, i3)), "random");
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
