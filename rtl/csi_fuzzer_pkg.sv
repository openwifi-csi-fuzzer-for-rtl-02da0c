// csi_fuzzer_pkg: types and constants shared by the CSI fuzzer modules.
//
// A baseband sample is a complex I/Q pair of IQ_W-bit two's-complement
// integers. A fuzzer tap is a signed COEF_W-bit fraction v/2^COEF_W, so its
// range is [-0.5, 0.5), plus one flag that says whether the tap is real
// (c = v/2^COEF_W) or imaginary (c = i*v/2^COEF_W). That real-or-imaginary
// restriction and the [-0.5, 0.5) range follow the design; the widths
// IQ_W = 16 and COEF_W = 8 and the register layout below are this design's
// own choice.
//
// Struct members are declared unsigned and read through $signed(): the
// fields hold two's-complement numbers, and keeping the signedness at the
// point of use avoids simulator differences in how signed members of packed
// structs are extracted.
//
// Configuration register (32 bits, written by the host):
//   [7:0]   c1 value, signed, units of 2^-8
//   [8]     c1 imaginary flag (1: c1 = i*value)
//   [23:16] c2 value, signed, units of 2^-8
//   [24]    c2 imaginary flag
//   [31]    fuzzer enable (0: samples pass unchanged)
//   other bits read as 0.
package csi_fuzzer_pkg;

  parameter int unsigned IQ_W     = 16;  // I and Q sample width
  parameter int unsigned COEF_W   = 8;   // tap value width (fraction bits)
  parameter int unsigned NUM_TAPS = 3;   // FIR taps: [1, c1, c2]
  parameter int unsigned PROD_W   = IQ_W + COEF_W;  // full product width

  typedef struct packed {
    logic [IQ_W-1:0] i;  // two's complement
    logic [IQ_W-1:0] q;  // two's complement
  } iq_t;

  typedef struct packed {
    logic [PROD_W-1:0] i;  // two's complement
    logic [PROD_W-1:0] q;  // two's complement
  } iq_prod_t;

  typedef struct packed {
    logic                     imag;  // 1: purely imaginary tap
    logic [COEF_W-1:0] val;  // two's complement, units of 2^-COEF_W
  } tap_coef_t;

  typedef struct packed {
    logic      enable;
    tap_coef_t c1;
    tap_coef_t c2;
  } fuzzer_cfg_t;

  // Register field positions.
  localparam int unsigned REG_C1_LSB   = 0;
  localparam int unsigned REG_C1_IMAG  = 8;
  localparam int unsigned REG_C2_LSB   = 16;
  localparam int unsigned REG_C2_IMAG  = 24;
  localparam int unsigned REG_ENABLE   = 31;
  localparam logic [31:0] REG_MASK     = 32'h81FF_01FF;

endpackage
