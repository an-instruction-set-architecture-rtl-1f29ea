// crossbar_array: behavioural model of one memristive 1T1R crossbar array
// (the analog memristor array itself cannot be synthesised; this model
// reproduces its logical, stateful-logic behaviour with one flip-flop per
// memristor).
//
// The array has ROWS rows of DATA_COLS data memristors followed by WORK_COLS
// work memristors. A logical 1 is the low-resistance state. In one step the
// column drivers apply one operation to every selected row at once (serial
// IMPLY topology):
//   XB_RESET  columns in col_mask are reset to 0 (V_RESET)
//   XB_SET    columns in col_mask are set to 1 (V_SET alone)
//   XB_IMPLY  cond_mask names the condition column p (V_COND), col_mask the
//             target q (V_SET); q <= p -> q, i.e. q becomes 1 where p is 0.
// An IMPLY is meant for exactly one condition column; the assertion below
// checks this. The sense amplifiers read word rd_word of row rd_row
// combinationally (bit i of word w is column 32*w+i, a choice of this
// design). Rows not in row_en and a disabled array keep their contents.
// The operation takes effect at the rising clock edge; contents are zero
// after power-up (the reset input is not used by the array itself, as the
// memristive cells are non-volatile).
module crossbar_array
  import pia_pkg::*;
#(
  parameter int unsigned ROWS_P      = pia_pkg::ROWS,
  parameter int unsigned DATA_COLS_P = pia_pkg::DATA_COLS,
  parameter int unsigned WORK_COLS_P = pia_pkg::WORK_COLS,
  parameter int unsigned COLS_P      = DATA_COLS_P + WORK_COLS_P
) (
  input  logic                      clk,
  input  logic                      en,
  input  xb_op_e                    op,
  input  logic [ROWS_P-1:0]         row_en,
  input  logic [COLS_P-1:0]         col_mask,
  input  logic [COLS_P-1:0]         cond_mask,
  input  logic [$clog2(ROWS_P)-1:0] rd_row,
  input  logic [3:0]                rd_word,
  output logic [XLEN-1:0]           rd_data
);

  logic [COLS_P-1:0] cells [ROWS_P];

  initial begin
    for (int r = 0; r < ROWS_P; r++) cells[r] = '0;
  end

  always_ff @(posedge clk) begin
    if (en && op != XB_NOP) begin
      for (int r = 0; r < ROWS_P; r++) begin
        if (row_en[r]) begin
          unique case (op)
            XB_RESET: cells[r] <= cells[r] & ~col_mask;
            XB_SET:   cells[r] <= cells[r] | col_mask;
            XB_IMPLY: if ((cells[r] & cond_mask) == '0) cells[r] <= cells[r] | col_mask;
            default: ;
          endcase
        end
      end
    end
  end

  // Sense amplifiers: one 32-bit word of one row.
  always_comb begin
    rd_data = '0;
    for (int i = 0; i < XLEN; i++) begin
      if (32 * int'(rd_word) + i < COLS_P)
        rd_data[i] = cells[rd_row][32 * int'(rd_word) + i];
    end
  end

  // An IMPLY needs exactly one condition column.
  assert property (@(posedge clk) (en && op == XB_IMPLY) |-> $onehot(cond_mask))
    else $error("crossbar_array: IMPLY without a single condition column");

endmodule
