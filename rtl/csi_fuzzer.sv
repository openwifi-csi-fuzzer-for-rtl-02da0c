// csi_fuzzer: the CSI fuzzer datapath, a short complex FIR filter placed
// between the 802.11 transmitter and the DAC.
//
// It imposes the artificial channel impulse response [1, c1, c2] on the
// transmitted baseband signal:
//   y_i = x_i + c1*x_{i-1} + c2*x_{i-2}
// A receiver that estimates the channel from this signal sees the product of
// the real channel and H_art(k) = DFT([1, c1, c2, 0, ...]) on every
// subcarrier k; only a receiver that knows c1, c2 can divide H_art out again.
//
// Structure (as drawn in the design's block diagram): a delay line of
// NUM_TAPS-1 sample registers (Z^-1), one tap_mult per delayed sample, and an
// adder that sums the direct sample with the products. The leading tap is
// fixed at 1, so the direct sample needs no multiplier and reaches the
// output in the same clock cycle it arrives: the fuzzer adds no latency to
// the transmit path, which keeps the SIFS timing of ACK and CTS frames.
// Taps are used as they are presented; a tap change takes effect on the very
// next sample, also in the middle of a packet, as in the design.
//
// This design's own choices: samples are qualified by in_valid and the delay
// line moves only on valid samples; it keeps moving when enable is low, so a
// later switch-on uses true history; the sum carries all product bits,
// rounds once (half up) and saturates to IQ_W bits, with out_sat flagging a
// clipped sample; reset clears the delay line. With enable low, or with all
// taps zero, y_i = x_i exactly.
//
// Interface: in_valid/in_iq from the transmitter, out_valid/out_iq to the
// DAC (out_valid = in_valid, out_iq combinational from in_iq and the
// registers), enable and coef[1..NUM_TAPS-1] from the configuration
// register. Timing: zero-cycle latency, one sample per clock at most.
module csi_fuzzer
  import csi_fuzzer_pkg::IQ_W, csi_fuzzer_pkg::COEF_W, csi_fuzzer_pkg::NUM_TAPS, csi_fuzzer_pkg::PROD_W,
         csi_fuzzer_pkg::iq_t, csi_fuzzer_pkg::iq_prod_t, csi_fuzzer_pkg::tap_coef_t;
#(
  parameter int unsigned N_TAPS = NUM_TAPS  // total taps, leading tap = 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      enable,
  input  tap_coef_t coef [1:N_TAPS-1],
  input  logic      in_valid,
  input  iq_t       in_iq,
  output logic      out_valid,
  output iq_t       out_iq,
  output logic      out_sat
);

  localparam int unsigned ACC_W = PROD_W + $clog2(N_TAPS) + 1;

  // Delay line: dly[k] holds x_{i-k}.
  iq_t      dly  [1:N_TAPS-1];
  iq_prod_t prod [1:N_TAPS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k < N_TAPS; k++) dly[k] <= '0;
    end else if (in_valid) begin
      dly[1] <= in_iq;
      for (int k = 2; k < N_TAPS; k++) dly[k] <= dly[k-1];
    end
  end

  for (genvar k = 1; k < N_TAPS; k++) begin : g_tap
    tap_mult u_mult (
      .x (dly[k]),
      .c (coef[k]),
      .p (prod[k])
    );
  end

  // Sum, round, saturate.
  localparam logic signed [ACC_W-1:0] RND   = ACC_W'(1) <<< (COEF_W - 1);
  localparam logic signed [ACC_W-1:0] Y_MAX = ACC_W'((1 << (IQ_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] Y_MIN = -(ACC_W'(1) <<< (IQ_W - 1));

  logic signed [ACC_W-1:0] acc_i, acc_q, rnd_i, rnd_q;
  logic                    sat_i, sat_q;

  always_comb begin
    acc_i = ACC_W'($signed(in_iq.i)) <<< COEF_W;
    acc_q = ACC_W'($signed(in_iq.q)) <<< COEF_W;
    for (int k = 1; k < N_TAPS; k++) begin
      acc_i = acc_i + ACC_W'($signed(prod[k].i));
      acc_q = acc_q + ACC_W'($signed(prod[k].q));
    end
    rnd_i = (acc_i + RND) >>> COEF_W;
    rnd_q = (acc_q + RND) >>> COEF_W;
    sat_i = (rnd_i > Y_MAX) || (rnd_i < Y_MIN);
    sat_q = (rnd_q > Y_MAX) || (rnd_q < Y_MIN);
  end

  always_comb begin
    out_valid = in_valid;
    out_sat   = 1'b0;
    if (!enable) begin
      out_iq = in_iq;
    end else begin
      out_iq.i = (rnd_i > Y_MAX) ? IQ_W'(Y_MAX) :
                 (rnd_i < Y_MIN) ? IQ_W'(Y_MIN) : IQ_W'(rnd_i);
      out_iq.q = (rnd_q > Y_MAX) ? IQ_W'(Y_MAX) :
                 (rnd_q < Y_MIN) ? IQ_W'(Y_MIN) : IQ_W'(rnd_q);
      out_sat  = in_valid && (sat_i || sat_q);
    end
  end

  initial begin
    assert (N_TAPS >= 2) else $error("csi_fuzzer needs at least two taps");
  end

endmodule
