// tb_column_decoder: compares the column decoder with a reference model.
//
// Random single-column selections (up to four, each with a valid bit) and
// up to two word patterns (a 32-bit value placed on word w, columns
// 32w..32w+31) are applied; the mask must be the OR of all of them.
// Combinational; checked 1 ns after each input change.
module tb_column_decoder;
  import pia_pkg::*;
  logic [3:0][COL_W-1:0] col_idx;
  logic [3:0]            col_vld;
  logic [1:0]            word_en;
  logic [1:0][3:0]       word_idx;
  logic [1:0][31:0]      word_bits;
  logic [COLS-1:0]       mask, exp_mask;

  column_decoder dut (.col_idx, .col_vld, .word_en, .word_idx, .word_bits, .mask);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    for (int it = 0; it < 5000; it++) begin
      exp_mask = '0;
      for (int k = 0; k < 4; k++) begin
        col_idx[k] = COL_W'($urandom_range(0, COLS - 1));
        col_vld[k] = 1'($urandom);
        if (col_vld[k]) exp_mask[col_idx[k]] = 1'b1;
      end
      for (int k = 0; k < 2; k++) begin
        word_en[k] = 1'($urandom);
        word_idx[k] = 4'($urandom);
        word_bits[k] = $urandom;
        if (word_en[k]) exp_mask[word_idx[k]*32 +: 32] |= word_bits[k];
      end
      #1;
      check(mask == exp_mask, $sformatf("iteration %0d", it));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
