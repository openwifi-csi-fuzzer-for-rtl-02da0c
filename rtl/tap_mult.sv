// tap_mult: multiplies one complex I/Q sample by one fuzzer tap.
//
// A tap is either purely real, c = v, or purely imaginary, c = i*v, with v a
// signed fraction in [-0.5, 0.5). Restricting the taps that way is what the
// design specifies for hardware simplicity: the complex product then needs
// two real multipliers instead of four, and no adder:
//   real tap:      (xi + i*xq) * v   = ( v*xi) + i*( v*xq)
//   imaginary tap: (xi + i*xq) * i*v = (-v*xq) + i*( v*xi)
// The multiplexing that picks the operand and the sign is this design's own
// realisation.
//
// Interface: x (IQ_W-bit I and Q), c (imag flag and COEF_W-bit value). The
// product p is exact and full width (PROD_W = IQ_W + COEF_W bits, still
// scaled by 2^COEF_W); rounding is left to the adder that sums the taps.
// Timing: purely combinational.
module tap_mult
  import csi_fuzzer_pkg::IQ_W, csi_fuzzer_pkg::COEF_W, csi_fuzzer_pkg::PROD_W, csi_fuzzer_pkg::iq_t, csi_fuzzer_pkg::iq_prod_t, csi_fuzzer_pkg::tap_coef_t;
(
  input  iq_t       x,
  input  tap_coef_t c,
  output iq_prod_t  p
);

  logic signed [IQ_W-1:0]   xi, xq;
  logic signed [COEF_W-1:0] v;
  logic signed [PROD_W-1:0] m_i, m_q;   // v*xi, v*xq

  always_comb begin
    xi  = $signed(x.i);
    xq  = $signed(x.q);
    v   = $signed(c.val);
    m_i = PROD_W'(xi) * PROD_W'(v);
    m_q = PROD_W'(xq) * PROD_W'(v);
    if (c.imag) begin
      p.i = -m_q;
      p.q = m_i;
    end else begin
      p.i = m_i;
      p.q = m_q;
    end
  end

endmodule
