// lut_pair: the codebook pair of one weight lane of the SOP matrix unit.
//
// Each layer quantises its weights with a pair of n-bit codebooks
// (FMTa, FMTb); a metabit in each block's scale word says which one
// reconstructs the block. Every weight lane holds both codebooks as two
// 32 x 8-bit LUTs, enough for n = 4 (16 entries) and n = 5 (32 entries),
// so a 128-lane unit holds 256 such LUTs. Entries are HIF7 values:
// bits [4:0] a two's complement coefficient, bits [6:5] the shift 0..3;
// bit 7 is not used by the datapath.
//
// The LUTs are flip-flop arrays written one entry per cycle through the
// write port (loaded once per layer) and read combinationally: the code
// of the current beat and the block's metabit give the HIF7 weight in the
// same cycle. Codes are masked to n bits (n_bits = 4 or 5).
//
// Direct mode (direct = 1) bypasses the LUTs: the 8-bit code input is
// itself a stored HIF7 weight. This serves layers kept in a HIF7 or
// E2M3 grid (E2M3 values are HIF7 values up to a power of two that the
// block scale absorbs), whose codes are wider than the LUTs' 5 bits.
module lut_pair
  import sop_pkg::*;
(
  input  logic                  clk,
  input  logic                  wr_en,
  input  logic                  wr_sel,   // 0: FMTa LUT, 1: FMTb LUT
  input  logic [CODE_BITS-1:0]  wr_addr,
  input  logic [HIF_BITS-1:0]   wr_data,
  input  logic [2:0]            n_bits,   // codebook width n (4 or 5)
  input  logic                  direct,   // code is a HIF7 value
  input  logic [HIF_BITS-1:0]   code,
  input  logic                  sel,      // block metabit
  output hif_t                  w_hif
);

  logic [HIF_BITS-1:0] mem [2][LUT_DEPTH];
  logic [CODE_BITS-1:0] addr;
  logic [HIF_BITS-1:0]  rd, lut_rd;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_sel][wr_addr] <= wr_data;
  end

  assign addr   = (n_bits >= 3'd5) ? code[CODE_BITS-1:0] : {1'b0, code[CODE_BITS-2:0]};
  assign lut_rd = mem[sel][addr];
  assign rd     = direct ? code : lut_rd;
  assign w_hif.coef = signed'(rd[4:0]);
  assign w_hif.sa   = {1'b0, rd[6:5]};

endmodule
