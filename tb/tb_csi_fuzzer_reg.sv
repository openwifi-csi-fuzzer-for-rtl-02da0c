// tb_csi_fuzzer_reg: self-checking test of the fuzzer configuration register.
//
// Checks the reset value, full-word writes with field decoding (enable, c1
// and c2 values and imaginary flags), per-byte write enables, the masking of
// reserved bits, and that a write shows on cfg exactly one cycle later.
module tb_csi_fuzzer_reg;
  import csi_fuzzer_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        wr_en = 0;
  logic [3:0]  wr_strb = '0;
  logic [31:0] wr_data = '0, rd_data;
  fuzzer_cfg_t cfg;
  int          checks = 0, failures = 0;
  logic [31:0] model;

  csi_fuzzer_reg dut (.*);

  always #5 clk = ~clk;

  task automatic expect_state(input logic [31:0] m, input string what);
    checks++;
    if (rd_data !== m || cfg.enable !== m[31] || cfg.c1.val !== m[7:0] ||
        cfg.c1.imag !== m[8] || cfg.c2.val !== m[23:16] || cfg.c2.imag !== m[24]) begin
      failures++;
      $display("FAIL %s: rd=%h exp=%h cfg=%p", what, rd_data, m, cfg);
    end
  endtask

  task automatic write(input logic [31:0] d, input logic [3:0] s);
    @(negedge clk); wr_en = 1; wr_data = d; wr_strb = s;
    @(negedge clk); wr_en = 0;
    for (int b = 0; b < 4; b++) if (s[b]) model[8*b +: 8] = d[8*b +: 8] & 8'(32'h81FF_01FF >> (8*b));
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    #12 rst_n = 1;
    @(negedge clk);
    expect_state(32'h0, "reset");
    // c1 = 0.35i (90/256, imaginary), c2 = 0.1 (26/256, real), enabled
    write(32'h8000_0000 | (32'd26 << 16) | (32'd1 << 8) | 32'd90, 4'hF);
    expect_state(model, "full write");
    checks++;
    if (!(cfg.enable && cfg.c1.imag && cfg.c1.val == 90 && !cfg.c2.imag && cfg.c2.val == 26)) begin
      failures++; $display("FAIL field decode of the example taps [1, 0.35i, 0.1]");
    end
    // write appears one cycle after the strobe edge, not before
    @(negedge clk); wr_en = 1; wr_data = 32'h0000_00F0; wr_strb = 4'h1;
    checks++;
    if (cfg.c1.val != 90) begin failures++; $display("FAIL write visible too early"); end
    @(negedge clk); wr_en = 0;
    model[7:0] = 8'hF0;
    expect_state(model, "byte 0 write");
    repeat (300) begin
      logic [31:0] d; logic [3:0] s;
      d = $urandom; s = 4'($urandom);
      write(d, s);
      expect_state(model, "random write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
