// column_decoder: demultiplexes column numbers into the column drive mask
// of a crossbar array.
//
// Up to four single columns (col_idx, enabled by col_vld; data or work
// columns, numbered 0..COLS-1) and up to two word patterns (word_en: the
// 32-bit pattern word_bits placed on data word word_idx, bit i in column
// 32*word_idx+i) are ORed into one mask. The control logic uses single
// columns for the FALSE and IMPLY steps of the in-array algorithms and word
// patterns for the two-step SET/RESET writes of immediates, IO data and
// return addresses. Purely combinational.
module column_decoder
  import pia_pkg::*;
#(
  parameter int unsigned COLS_P = pia_pkg::COLS
) (
  input  logic [3:0][COL_W-1:0] col_idx,
  input  logic [3:0]            col_vld,
  input  logic [1:0]            word_en,
  input  logic [1:0][3:0]       word_idx,
  input  logic [1:0][XLEN-1:0]  word_bits,
  output logic [COLS_P-1:0]     mask
);

  always_comb begin
    mask = '0;
    for (int k = 0; k < 4; k++)
      if (col_vld[k] && int'(col_idx[k]) < COLS_P) mask[col_idx[k]] = 1'b1;
    for (int k = 0; k < 2; k++)
      if (word_en[k])
        for (int i = 0; i < XLEN; i++)
          if (32 * int'(word_idx[k]) + i < COLS_P && word_bits[k][i])
            mask[32 * int'(word_idx[k]) + i] = 1'b1;
  end

endmodule
