// csi_fuzzer_top: the CSI fuzzer as it sits in the transmit chain of an
// 802.11 FPGA transceiver, between the OFDM transmitter and the DAC.
//
// The host writes the fuzzer enable and the taps c1, c2 into csi_fuzzer_reg;
// csi_fuzzer filters the transmitter's I/Q stream with the impulse response
// [1, c1, c2] and hands it to the DAC. The transmitter, the DAC with its RF
// front end and the host processor are outside this module: their signals
// are the ports.
//
// Interface:
//   reg_wr_en, reg_wr_strb, reg_wr_data, reg_rd_data  host register port
//   phy_valid, phy_iq                                  samples from the PHY
//   dac_valid, dac_iq                                  samples to the DAC
//   dac_sat                                            a sample was clipped
// Timing: a register write affects samples from the cycle after the write;
// PHY to DAC has zero cycles of latency.
module csi_fuzzer_top
  import csi_fuzzer_pkg::NUM_TAPS, csi_fuzzer_pkg::iq_t, csi_fuzzer_pkg::tap_coef_t,
         csi_fuzzer_pkg::fuzzer_cfg_t;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_wr_en,
  input  logic [3:0]  reg_wr_strb,
  input  logic [31:0] reg_wr_data,
  output logic [31:0] reg_rd_data,
  input  logic        phy_valid,
  input  iq_t         phy_iq,
  output logic        dac_valid,
  output iq_t         dac_iq,
  output logic        dac_sat
);

  fuzzer_cfg_t cfg;
  tap_coef_t   coef [1:NUM_TAPS-1];

  csi_fuzzer_reg u_reg (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (reg_wr_en),
    .wr_strb (reg_wr_strb),
    .wr_data (reg_wr_data),
    .rd_data (reg_rd_data),
    .cfg     (cfg)
  );

  assign coef[1] = cfg.c1;
  assign coef[2] = cfg.c2;

  csi_fuzzer #(.N_TAPS(NUM_TAPS)) u_fuzzer (
    .clk       (clk),
    .rst_n     (rst_n),
    .enable    (cfg.enable),
    .coef      (coef),
    .in_valid  (phy_valid),
    .in_iq     (phy_iq),
    .out_valid (dac_valid),
    .out_iq    (dac_iq),
    .out_sat   (dac_sat)
  );

endmodule
