// sop_pkg: types and constants shared by the Scaled Outer Product (SOP) matrix unit.
//
// Scale words live in a 12-bit container described at run time by a
// SwExMy format (sign bits w, exponent bits x, mantissa bits y; the
// remaining m = 12-w-x-y bits are per-block metabits). A decoded scale is
// held as sign, unbiased exponent and a 9-bit significand normalised so
// that value = (-1)^sign * sig * 2^(exp - MAX_MAN).
//
// HIF values (the LUT output formats) are a 5-bit two's complement
// coefficient and a power-of-two shift: HIF7 (weights) uses shift 0..3,
// HIF8 (activations) shift 0..4. Both sit in an 8-bit container
// {shift[2:0], coef[4:0]}; the container layout is this design's choice.
package sop_pkg;

  localparam int unsigned SCALE_BITS = 12;  // scale container width
  localparam int unsigned MAX_MAN    = 8;   // widest mantissa field handled
  localparam int unsigned SIG_BITS   = MAX_MAN + 1;
  localparam int unsigned EXP_BITS   = 10;  // signed exponent width inside the datapath
  localparam int unsigned HIF_BITS   = 8;   // HIF7/HIF8 container
  localparam int unsigned CODE_BITS  = 5;   // widest weight code (n = 5)
  localparam int unsigned LUT_DEPTH  = 32;  // 2^CODE_BITS entries per LUT

  // Run-time scale format (per layer, separately for activations and weights)
  typedef struct packed {
    logic       sign_en;   // w: 1 = signed scale
    logic [3:0] exp_bits;  // x: 1..8
    logic [3:0] man_bits;  // y: 0..8
  } scale_fmt_t;

  // Decoded scale value
  typedef struct packed {
    logic                        sign;
    logic signed [EXP_BITS-1:0]  exp;   // unbiased exponent
    logic [SIG_BITS-1:0]         sig;   // hidden bit + mantissa, left aligned
    logic [1:0]                  meta;  // meta[0] selects FMTa/FMTb
  } scale_val_t;

  // Scale as used by the array: sign, significand and the full binary
  // exponent of one significand LSB (F_layer shift already removed).
  typedef struct packed {
    logic                        sign;
    logic [SIG_BITS-1:0]         sig;
    logic signed [EXP_BITS-1:0]  exp;
  } scale_lane_t;

  // HIF value: 5-bit two's complement coefficient and a shift amount
  typedef struct packed {
    logic [2:0]        sa;
    logic signed [4:0] coef;
  } hif_t;

  // One sparse correction entry (OPQ outlier or Wr residual)
  typedef struct packed {
    logic [15:0] k;      // element index along K within the tile
    logic [7:0]  col;    // output column within the tile
    logic        is_wr;  // 0: OPQ value in BF16, 1: Wr value in E3M4 (low byte)
    logic [15:0] value;
  } sparse_entry_t;

  // Recommended SOP-native scale format S1E5M5 and the FP6-tier UE4M4
  localparam scale_fmt_t FMT_S1E5M5 = '{sign_en: 1'b1, exp_bits: 4'd5, man_bits: 4'd5};
  localparam scale_fmt_t FMT_UE4M4  = '{sign_en: 1'b0, exp_bits: 4'd4, man_bits: 4'd4};

endpackage
