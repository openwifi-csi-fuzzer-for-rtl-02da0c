// csi_fuzzer_reg: the host-writable configuration register of the fuzzer.
//
// The host software composes one 32-bit word from the enable bit and the two
// taps and writes it here (the field layout is in csi_fuzzer_pkg). The
// decoded fields drive the fuzzer datapath directly, with no shadow copy, so
// a new response takes effect on the next sample after the write, even in
// the middle of a packet; that immediate behaviour follows the design.
//
// The simple bus is this design's own choice: a write strobe with per-byte
// enables, and a read port that returns the stored word with reserved bits
// as 0. Reset clears the register, so the fuzzer starts switched off with
// zero taps.
//
// Timing: a write is accepted on the rising clock edge where wr_en is high;
// cfg and rd_data show the new value from the following cycle.
module csi_fuzzer_reg
  import csi_fuzzer_pkg::COEF_W, csi_fuzzer_pkg::fuzzer_cfg_t, csi_fuzzer_pkg::REG_MASK,
         csi_fuzzer_pkg::REG_C1_LSB, csi_fuzzer_pkg::REG_C1_IMAG, csi_fuzzer_pkg::REG_C2_LSB,
         csi_fuzzer_pkg::REG_C2_IMAG, csi_fuzzer_pkg::REG_ENABLE;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [3:0]  wr_strb,
  input  logic [31:0] wr_data,
  output logic [31:0] rd_data,
  output fuzzer_cfg_t cfg
);

  logic [31:0] reg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_q <= '0;
    end else if (wr_en) begin
      for (int b = 0; b < 4; b++)
        if (wr_strb[b]) reg_q[8*b +: 8] <= wr_data[8*b +: 8] & REG_MASK[8*b +: 8];
    end
  end

  assign rd_data     = reg_q;
  assign cfg.enable  = reg_q[REG_ENABLE];
  assign cfg.c1.val  = reg_q[REG_C1_LSB +: COEF_W];
  assign cfg.c1.imag = reg_q[REG_C1_IMAG];
  assign cfg.c2.val  = reg_q[REG_C2_LSB +: COEF_W];
  assign cfg.c2.imag = reg_q[REG_C2_IMAG];

endmodule
