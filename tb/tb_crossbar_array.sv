// tb_crossbar_array: random test of the crossbar model against a reference.
//
// A reduced array (16 rows, 64 data + 8 work columns) receives random
// RESET, SET, IMPLY and NOP steps on random row and column selections while
// enabled or disabled. A reference copy of the cells is updated with the
// same rules (RESET clears, SET sets, IMPLY sets the selected columns of a
// row whose condition column is 0) and every word is compared through the
// read port after each step. A step takes effect at the next rising clock
// edge; the read port is combinational.
module tb_crossbar_array;
  import pia_pkg::*;
  localparam int unsigned R = 16, D = 64, W = 8, C = D + W;

  logic clk = 1'b0;
  logic en;
  xb_op_e op;
  logic [R-1:0] row_en;
  logic [C-1:0] col_mask, cond_mask;
  logic [3:0] rd_row;
  logic [3:0] rd_word;
  logic [31:0] rd_data;
  logic [C-1:0] ref_cells [R];

  crossbar_array #(.ROWS_P(R), .DATA_COLS_P(D), .WORK_COLS_P(W)) dut (
    .clk, .en, .op, .row_en, .col_mask, .cond_mask, .rd_row, .rd_word, .rd_data);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    int n_imply_set = 0;
    foreach (ref_cells[r]) ref_cells[r] = '0;
    en = 1'b0; op = XB_NOP; row_en = '0; col_mask = '0; cond_mask = '0; rd_row = '0; rd_word = '0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      en = ($urandom_range(0, 7) != 0);
      op = xb_op_e'($urandom_range(0, 3));
      row_en = R'($urandom);
      col_mask = {W'($urandom), 32'($urandom), 32'($urandom)};
      if ($urandom_range(0, 1) == 1) col_mask = C'(1) << $urandom_range(0, C - 1);
      cond_mask = C'(1) << $urandom_range(0, C - 1);
      col_mask = col_mask & ~cond_mask;
      @(posedge clk);
      if (en)
        for (int r = 0; r < R; r++)
          if (row_en[r])
            unique case (op)
              XB_RESET: ref_cells[r] &= ~col_mask;
              XB_SET:   ref_cells[r] |= col_mask;
              XB_IMPLY: if ((ref_cells[r] & cond_mask) == '0) begin
                          ref_cells[r] |= col_mask;
                          n_imply_set++;
                        end
              default: ;
            endcase
      @(negedge clk);
      en = 1'b0;
      for (int r = 0; r < R; r++)
        for (int w = 0; w < D / 32; w++) begin
          rd_row = 4'(r); rd_word = 4'(w);
          #1;
          check(rd_data == ref_cells[r][w*32 +: 32], $sformatf("it %0d row %0d word %0d", it, r, w));
        end
      for (int r = 0; r < R; r++)
        check(dut.cells[r][C-1:D] == ref_cells[r][C-1:D], $sformatf("work columns row %0d", r));
    end
    check(n_imply_set > 100, "IMPLY with p = 0 exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
