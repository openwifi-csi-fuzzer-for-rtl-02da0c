// tb_csi_fuzzer_top: end-to-end test of the CSI fuzzer in the transmit chain.
//
// The testbench plays the transmitter and the host. It builds OFDM symbols
// (64-point, 52 QPSK subcarriers, 16-sample cyclic prefix, as in 802.11a/g)
// directly from the inverse DFT, streams them one sample every five clocks
// (20 Msample/s against a 100 MHz clock), and programs the taps through the
// register port the way the host software does: it rounds c1 and c2 to
// multiples of 1/256 and packs them with their real/imaginary flags.
//
// Two independent checks are made:
//  * every DAC sample is compared, in the cycle the PHY presents it, with an
//    integer model of y_i = x_i + c1*x_{i-1} + c2*x_{i-2} (rounded,
//    saturated), which also checks the zero added latency;
//  * for each symbol not disturbed by a tap change, the DFT of the 64 output
//    samples after the cyclic prefix is divided by the DFT of the input and
//    compared on every used subcarrier with H_art(k) = DFT([1, c1, c2, 0...]):
//    the response a receiver would see, and the one an authorized receiver
//    divides out to recover the real channel.
//
// Mechanisms counted (each must happen at least once): fuzzer off (exact
// bypass), fuzzer on with the demonstration taps [1, 0.35i, 0.1], a tap
// change in the middle of a packet that acts on the very next sample, a
// sequence of random responses (as used against analysis of the response and
// for a covert channel), idle cycles between samples, and clipping of an
// overdriven packet.
module tb_csi_fuzzer_top;
  import csi_fuzzer_pkg::*;

  localparam int    NFFT = 64, NCP = 16, SPACING = 5;
  localparam real   PI = 3.14159265358979323846;

  logic        clk = 0, rst_n = 0;
  logic        reg_wr_en = 0;
  logic [3:0]  reg_wr_strb = '0;
  logic [31:0] reg_wr_data = '0, reg_rd_data;
  logic        phy_valid = 0;
  iq_t         phy_iq = '0;
  logic        dac_valid;
  iq_t         dac_iq;
  logic        dac_sat;

  csi_fuzzer_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_off = 0, n_on_demo = 0, n_mid_change = 0, n_random = 0, n_idle = 0, n_sat = 0;
  int n_dft_checked = 0;

  // taps as the testbench programmed them
  bit model_en = 0;
  int model_v [1:2]   = '{0, 0};
  bit model_im [1:2]  = '{0, 0};
  int hist_i [1:2]    = '{0, 0};
  int hist_q [1:2]    = '{0, 0};

  // one symbol of input and output samples
  int sym_xi [NFFT+NCP], sym_xq [NFFT+NCP];
  int sym_yi [NFFT+NCP], sym_yq [NFFT+NCP];
  int qpsk_i [NFFT], qpsk_q [NFFT];

  function automatic int to_q8(input real c);
    int v;
    v = int'($floor(c * 256.0 + 0.5));
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  function automatic logic [31:0] compose(input bit en, input int v1, input bit im1,
                                          input int v2, input bit im2);
    return {en, 6'd0, im2, 8'(v2), 7'd0, im1, 8'(v1)};
  endfunction

  task automatic reg_write(input bit en, input int v1, input bit im1, input int v2, input bit im2);
    @(negedge clk);
    phy_valid = 0;
    reg_wr_en = 1; reg_wr_strb = 4'hF; reg_wr_data = compose(en, v1, im1, v2, im2);
    @(negedge clk);
    reg_wr_en = 0;
    model_en = en; model_v[1] = v1; model_im[1] = im1; model_v[2] = v2; model_im[2] = im2;
    checks++;
    if (reg_rd_data != compose(en, v1, im1, v2, im2)) begin
      failures++; $display("FAIL register readback %h", reg_rd_data);
    end
  endtask

  function automatic int sat16(input longint v, inout bit s);
    if (v > 32767)  begin s = 1; return 32767; end
    if (v < -32768) begin s = 1; return -32768; end
    return int'(v);
  endfunction

  // Present one sample at a negedge, check the DAC side before the next edge.
  task automatic send(input int xi, input int xq, output int yi, output int yq);
    longint ai, aq;
    bit     s;
    int     ei, eq;
    logic signed [IQ_W-1:0] gi, gq;
    repeat (SPACING - 1) begin
      @(negedge clk); phy_valid = 0; phy_iq = '{i: 16'($urandom), q: 16'($urandom)};
      n_idle++;
      #1 checks++;
      if (dac_valid) begin failures++; $display("FAIL dac_valid while idle"); end
    end
    @(negedge clk);
    phy_valid = 1; phy_iq = '{i: 16'(xi), q: 16'(xq)};
    #1;
    s = 0;
    ai = longint'(xi) * 256; aq = longint'(xq) * 256;
    for (int k = 1; k <= 2; k++) begin
      if (model_im[k]) begin
        ai -= longint'(model_v[k]) * hist_q[k]; aq += longint'(model_v[k]) * hist_i[k];
      end else begin
        ai += longint'(model_v[k]) * hist_i[k]; aq += longint'(model_v[k]) * hist_q[k];
      end
    end
    if (model_en) begin ei = sat16((ai + 128) >>> 8, s); eq = sat16((aq + 128) >>> 8, s); end
    else begin ei = xi; eq = xq; end
    gi = dac_iq.i; gq = dac_iq.q;
    yi = int'(gi); yq = int'(gq);
    checks++;
    if (!dac_valid || yi != ei || yq != eq || dac_sat != s) begin
      failures++;
      if (failures < 10)
        $display("FAIL t=%0t x=(%0d,%0d) got (%0d,%0d) exp (%0d,%0d)", $time, xi, xq, yi, yq, ei, eq);
    end
    if (s) n_sat++;
    hist_i[2] = hist_i[1]; hist_q[2] = hist_q[1]; hist_i[1] = xi; hist_q[1] = xq;
  endtask

  // Build a random QPSK OFDM symbol with cyclic prefix, amplitude scale a.
  task automatic make_symbol(input real a);
    for (int k = 0; k < NFFT; k++) begin
      int sc;
      sc = (k < 32) ? k : k - 64;
      if (sc == 0 || sc > 26 || sc < -26) begin qpsk_i[k] = 0; qpsk_q[k] = 0; end
      else begin
        qpsk_i[k] = ($urandom_range(1) != 0) ? 1 : -1;
        qpsk_q[k] = ($urandom_range(1) != 0) ? 1 : -1;
      end
    end
    for (int n = 0; n < NFFT; n++) begin
      real si, sq;
      si = 0.0; sq = 0.0;
      for (int k = 0; k < NFFT; k++) begin
        real ph;
        ph = 2.0 * PI * real'(k * n) / real'(NFFT);
        si += real'(qpsk_i[k]) * $cos(ph) - real'(qpsk_q[k]) * $sin(ph);
        sq += real'(qpsk_i[k]) * $sin(ph) + real'(qpsk_q[k]) * $cos(ph);
      end
      sym_xi[NCP + n] = int'($floor(a * si + 0.5));
      sym_xq[NCP + n] = int'($floor(a * sq + 0.5));
      if (sym_xi[NCP + n] > 32767) sym_xi[NCP + n] = 32767;
      if (sym_xi[NCP + n] < -32768) sym_xi[NCP + n] = -32768;
      if (sym_xq[NCP + n] > 32767) sym_xq[NCP + n] = 32767;
      if (sym_xq[NCP + n] < -32768) sym_xq[NCP + n] = -32768;
    end
    for (int n = 0; n < NCP; n++) begin
      sym_xi[n] = sym_xi[NFFT + n]; sym_xq[n] = sym_xq[NFFT + n];
    end
  endtask

  // Compare Y(k)/X(k) on the used subcarriers with the response of [1, c1, c2].
  task automatic check_response(input real c1r, input real c1i, input real c2r, input real c2i,
                                input real tol, input string what);
    real worst;
    worst = 0.0;
    for (int k = 0; k < NFFT; k++) begin
      real xr, xim, yr, yim, hr, hi, den, gr, gim, ph, err;
      if (qpsk_i[k] == 0) continue;
      xr = 0; xim = 0; yr = 0; yim = 0;
      for (int n = 0; n < NFFT; n++) begin
        ph = -2.0 * PI * real'(k * n) / real'(NFFT);
        xr  += real'(sym_xi[NCP+n]) * $cos(ph) - real'(sym_xq[NCP+n]) * $sin(ph);
        xim += real'(sym_xi[NCP+n]) * $sin(ph) + real'(sym_xq[NCP+n]) * $cos(ph);
        yr  += real'(sym_yi[NCP+n]) * $cos(ph) - real'(sym_yq[NCP+n]) * $sin(ph);
        yim += real'(sym_yi[NCP+n]) * $sin(ph) + real'(sym_yq[NCP+n]) * $cos(ph);
      end
      den = xr * xr + xim * xim;
      gr  = (yr * xr + yim * xim) / den;
      gim = (yim * xr - yr * xim) / den;
      ph  = -2.0 * PI * real'(k) / real'(NFFT);
      hr  = 1.0 + c1r * $cos(ph) - c1i * $sin(ph) + c2r * $cos(2.0 * ph) - c2i * $sin(2.0 * ph);
      hi  =       c1r * $sin(ph) + c1i * $cos(ph) + c2r * $sin(2.0 * ph) + c2i * $cos(2.0 * ph);
      err = (gr - hr) * (gr - hr) + (gim - hi) * (gim - hi);
      if (err > worst) worst = err;
    end
    checks++;
    n_dft_checked++;
    if ($sqrt(worst) > tol) begin
      failures++;
      $display("FAIL %s: worst |CSI/H_art - 1| error %f > %f", what, $sqrt(worst), tol);
    end
  endtask

  function automatic real tap_re(input int v, input bit im); return im ? 0.0 : real'(v) / 256.0; endfunction
  function automatic real tap_im(input int v, input bit im); return im ? real'(v) / 256.0 : 0.0; endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Test plan, one entry per OFDM symbol. wr_at is the sample index at which
  // the taps (en, v1, im1, v2, im2) are written, -1 for no write; a symbol
  // whose write falls after its first sample is not DFT-checked.
  localparam int NSYM = 18;
  typedef enum int {K_OFF, K_DEMO, K_BEFORE, K_MID, K_AFTER, K_RANDOM, K_CLIP} kind_e;
  kind_e plan_kind  [NSYM];
  int    plan_wr_at [NSYM];
  bit    plan_en    [NSYM];
  int    plan_v1    [NSYM], plan_v2 [NSYM];
  bit    plan_im1   [NSYM], plan_im2 [NSYM];
  real   plan_amp   [NSYM];

  task automatic build_plan();
    for (int s = 0; s < NSYM; s++) begin
      plan_wr_at[s] = -1; plan_amp[s] = 300.0;
      plan_en[s] = 1; plan_v1[s] = 0; plan_im1[s] = 0; plan_v2[s] = 0; plan_im2[s] = 0;
    end
    // symbols 0-1: fuzzer off
    plan_kind[0] = K_OFF; plan_kind[1] = K_OFF;
    plan_wr_at[0] = 0; plan_en[0] = 0;
    // symbols 2-4: demonstration response [1, 0.35i, 0.1], rounded to 1/256
    for (int s = 2; s <= 4; s++) plan_kind[s] = K_DEMO;
    plan_wr_at[2] = 0; plan_v1[2] = to_q8(0.35); plan_im1[2] = 1; plan_v2[2] = to_q8(0.1);
    // symbols 5-7: one packet, new response written at sample 40 of symbol 6
    plan_kind[5] = K_BEFORE; plan_kind[6] = K_MID; plan_kind[7] = K_AFTER;
    plan_wr_at[6] = 40; plan_v1[6] = -64; plan_im1[6] = 0; plan_v2[6] = 50; plan_im2[6] = 1;
    // symbols 8-16: a new random response per symbol
    for (int s = 8; s <= 16; s++) begin
      plan_kind[s] = K_RANDOM; plan_wr_at[s] = 0;
      plan_v1[s] = int'($urandom_range(255)) - 128; plan_im1[s] = 1'($urandom_range(1));
      plan_v2[s] = int'($urandom_range(255)) - 128; plan_im2[s] = 1'($urandom_range(1));
    end
    // symbol 17: overdriven with large taps, samples clip
    plan_kind[17] = K_CLIP; plan_wr_at[17] = 0; plan_v1[17] = 127; plan_v2[17] = 127;
    plan_amp[17] = 3000.0;
  endtask

  initial begin
    int  yi, yq;
    bit  disturbed;
    #12 rst_n = 1;
    checks++;
    if (reg_rd_data != 0) begin failures++; $display("FAIL register not cleared by reset"); end
    checks++;
    if (to_q8(0.35) != 90 || to_q8(0.1) != 26) begin failures++; $display("FAIL tap rounding"); end
    build_plan();

    for (int s = 0; s < NSYM; s++) begin
      make_symbol(plan_amp[s]);
      disturbed = 0;
      for (int n = 0; n < NFFT + NCP; n++) begin
        if (n == plan_wr_at[s]) begin
          reg_write(plan_en[s], plan_v1[s], plan_im1[s], plan_v2[s], plan_im2[s]);
          if (n > 0) disturbed = 1;
        end
        send(sym_xi[n], sym_xq[n], yi, yq);
        sym_yi[n] = yi; sym_yq[n] = yq;
      end
      if (disturbed) n_mid_change++;
      if (!disturbed && plan_kind[s] != K_CLIP) begin
        real c1r, c1i, c2r, c2i;
        c1r = model_en ? tap_re(model_v[1], model_im[1]) : 0.0;
        c1i = model_en ? tap_im(model_v[1], model_im[1]) : 0.0;
        c2r = model_en ? tap_re(model_v[2], model_im[2]) : 0.0;
        c2i = model_en ? tap_im(model_v[2], model_im[2]) : 0.0;
        check_response(c1r, c1i, c2r, c2i, 1e-3, plan_kind[s].name());
      end
      case (plan_kind[s])
        K_OFF:    n_off++;
        K_DEMO:   n_on_demo++;
        K_RANDOM: n_random++;
        default:  ;
      endcase
    end

    // The demonstration taps, unrounded, against the response the hardware
    // imposed on the last demonstration symbol: rounding to 1/256 is close.
    begin
      real worst;
      worst = 0.0;
      for (int k = 0; k < NFFT; k++) begin
        real ph, dr, di;
        ph = -2.0 * PI * real'(k) / real'(NFFT);
        // difference of the two responses: (0.35i - 90i/256) e^{j ph} + (0.1 - 26/256) e^{2j ph}
        dr = -(0.35 - 90.0 / 256.0) * $sin(ph) + (0.1 - 26.0 / 256.0) * $cos(2.0 * ph);
        di =  (0.35 - 90.0 / 256.0) * $cos(ph) + (0.1 - 26.0 / 256.0) * $sin(2.0 * ph);
        if (dr * dr + di * di > worst) worst = dr * dr + di * di;
      end
      checks++;
      if ($sqrt(worst) > 4e-3) begin failures++; $display("FAIL tap rounding error %f", $sqrt(worst)); end
    end

    $display("off=%0d demo=%0d mid_change=%0d random=%0d idle=%0d clipped=%0d dft_checks=%0d",
             n_off, n_on_demo, n_mid_change, n_random, n_idle, n_sat, n_dft_checked);
    checks++;
    if (n_off == 0 || n_on_demo == 0 || n_mid_change == 0 || n_random == 0 || n_idle == 0 || n_sat == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
