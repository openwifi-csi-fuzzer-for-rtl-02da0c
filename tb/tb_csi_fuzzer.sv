// tb_csi_fuzzer: self-checking test of the CSI fuzzer datapath.
//
// A reference model keeps the last two accepted samples and computes
//   y = sat(round((256*x + sum_k c_k * x_{i-k}) / 256))
// in integer arithmetic, with complex products written out by hand. Each
// sample is checked in the same cycle it is presented, which also checks the
// zero-latency direct path. The stimulus mixes valid gaps, taps that change
// between samples (they must act on the next sample), switching enable
// on and off (bypass must be exact) and full-scale samples that clip.
module tb_csi_fuzzer;
  import csi_fuzzer_pkg::*;

  logic      clk = 0, rst_n = 0;
  logic      enable = 0;
  tap_coef_t coef [1:NUM_TAPS-1];
  logic      in_valid = 0;
  iq_t       in_iq = '0;
  logic      out_valid;
  iq_t       out_iq;
  logic      out_sat;

  int checks = 0, failures = 0;
  int n_sat = 0, n_gap = 0, n_bypass = 0, n_coef_change = 0;
  int hist_i [1:2], hist_q [1:2];

  csi_fuzzer dut (.*);

  always #5 clk = ~clk;

  function automatic int sat16(input longint v, output bit s);
    s = 0;
    if (v > 32767)  begin s = 1; return 32767; end
    if (v < -32768) begin s = 1; return -32768; end
    return int'(v);
  endfunction

  task automatic check_sample();
    longint acc_i, acc_q;
    int     exp_i, exp_q, got_i, got_q;
    bit     si, sq;
    logic signed [IQ_W-1:0] oi, oq, xi, xq;
    xi = in_iq.i; xq = in_iq.q;
    acc_i = longint'(xi) * 256;
    acc_q = longint'(xq) * 256;
    for (int k = 1; k <= 2; k++) begin
      int v;
      v = int'($signed(coef[k].val));
      if (coef[k].imag) begin
        acc_i -= longint'(v) * hist_q[k];
        acc_q += longint'(v) * hist_i[k];
      end else begin
        acc_i += longint'(v) * hist_i[k];
        acc_q += longint'(v) * hist_q[k];
      end
    end
    if (enable) begin
      exp_i = sat16((acc_i + 128) >>> 8, si);
      exp_q = sat16((acc_q + 128) >>> 8, sq);
    end else begin
      exp_i = int'(xi); exp_q = int'(xq); si = 0; sq = 0;
      n_bypass++;
    end
    oi = out_iq.i; oq = out_iq.q;
    got_i = int'(oi); got_q = int'(oq);
    checks++;
    if (!out_valid || got_i != exp_i || got_q != exp_q || out_sat != (si | sq)) begin
      failures++;
      if (failures < 10)
        $display("FAIL t=%0t en=%0b x=(%0d,%0d) got (%0d,%0d,sat %0b) exp (%0d,%0d,sat %0b)",
                 $time, enable, xi, xq, got_i, got_q, out_sat, exp_i, exp_q, si | sq);
    end
    if (si | sq) n_sat++;
    hist_i[2] = hist_i[1]; hist_q[2] = hist_q[1];
    hist_i[1] = int'(xi);  hist_q[1] = int'(xq);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 1; k <= 2; k++) begin coef[k] = '0; hist_i[k] = 0; hist_q[k] = 0; end
    #12 rst_n = 1;
    // The example response of the design's demonstration: [1, 0.35i, 0.1]
    coef[1] = '{imag: 1'b1, val: 8'd90};
    coef[2] = '{imag: 1'b0, val: 8'd26};
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      if (!in_valid) n_gap++;
      if ($urandom_range(15) == 0) enable = ~enable;
      if (n > 0 && $urandom_range(7) == 0) begin
        int k;
        k = int'($urandom_range(1, 2));
        coef[k] = '{imag: 1'($urandom_range(1)), val: 8'($urandom)};
        n_coef_change++;
      end
      if ($urandom_range(9) == 0)
        in_iq = '{i: ($urandom_range(1) != 0) ? 16'h7FFF : 16'h8000,
                  q: ($urandom_range(1) != 0) ? 16'h7FFF : 16'h8000};
      else
        in_iq = '{i: 16'($urandom), q: 16'($urandom)};
      #1;
      if (in_valid) check_sample();
      else begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL out_valid without in_valid"); end
      end
    end
    if (n_sat == 0 || n_gap == 0 || n_bypass == 0 || n_coef_change == 0) begin
      failures++;
      $display("FAIL a mechanism never happened: sat=%0d gap=%0d bypass=%0d coef=%0d",
               n_sat, n_gap, n_bypass, n_coef_change);
    end
    $display("saturations=%0d gaps=%0d bypassed=%0d tap_changes=%0d", n_sat, n_gap, n_bypass, n_coef_change);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
