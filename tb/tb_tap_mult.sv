// tb_tap_mult: self-checking test of the real-or-imaginary tap multiplier.
//
// Drives random and corner-case samples and taps and compares the product
// with one worked out in plain integer arithmetic from the complex formula
// (xi + i*xq) * c, where c = v or c = i*v. Purely combinational, so each
// vector is checked after a 1 ns settle.
module tb_tap_mult;
  import csi_fuzzer_pkg::*;

  iq_t       x;
  tap_coef_t c;
  iq_prod_t  p;
  int        checks = 0, failures = 0;

  tap_mult dut (.x(x), .c(c), .p(p));

  task automatic check_one(input int xi, input int xq, input int v, input bit im);
    longint exp_i, exp_q;
    logic signed [PROD_W-1:0] pi, pq;
    x.i = IQ_W'(xi); x.q = IQ_W'(xq); c.val = COEF_W'(v); c.imag = im;
    // (xi + j xq) * (re + j imv): real = xi*re - xq*imv, imag = xi*imv + xq*re
    if (im) begin
      exp_i = -longint'(xq) * v; exp_q = longint'(xi) * v;
    end else begin
      exp_i = longint'(xi) * v;  exp_q = longint'(xq) * v;
    end
    #1;
    pi = p.i; pq = p.q;
    checks++;
    if (longint'(pi) != exp_i || longint'(pq) != exp_q) begin
      failures++;
      if (failures < 10)
        $display("FAIL x=(%0d,%0d) v=%0d imag=%0b got (%0d,%0d) exp (%0d,%0d)",
                 xi, xq, v, im, pi, pq, exp_i, exp_q);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int corners[6] = '{-32768, 32767, 0, 1, -1, 12345};
    static int cv[5]      = '{-128, 127, 0, 90, -26};
    foreach (corners[a]) foreach (corners[b]) foreach (cv[k]) begin
      check_one(corners[a], corners[b], cv[k], 1'b0);
      check_one(corners[a], corners[b], cv[k], 1'b1);
    end
    repeat (3000) begin
      int xi, xq, v;
      xi = int'($urandom_range(65535)) - 32768;
      xq = int'($urandom_range(65535)) - 32768;
      v  = int'($urandom_range(255)) - 128;
      check_one(xi, xq, v, 1'($urandom_range(1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
