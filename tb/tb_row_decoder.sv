// tb_row_decoder: compares the row decoder with a reference loop.
//
// Random and corner-case start rows, row counts and strides (including
// ranges running past the last row and the single-row mode) are applied;
// the expected selection is rows start + k*(stride+1) for every k with
// k*(stride+1) <= num_rows, limited to the array. Combinational; checked
// 1 ns after each input change.
module tb_row_decoder;
  import pia_pkg::*;
  logic [8:0] start_row, num_rows;
  logic [5:0] stride;
  logic single;
  logic [511:0] row_en, exp_en;

  row_decoder dut (.start_row, .num_rows, .stride, .single, .row_en);

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
    for (int it = 0; it < 4000; it++) begin
      start_row = 9'($urandom); num_rows = 9'($urandom); stride = 6'($urandom);
      single = ($urandom_range(0, 9) == 0);
      if (it < 8) begin start_row = (it & 1) ? 9'd511 : 9'd0; num_rows = (it & 2) ? 9'd511 : 9'd0;
                         stride = (it & 4) ? 6'd63 : 6'd0; single = 1'b0; end
      if (it % 5 == 1) stride = 6'($urandom_range(0, 4));
      exp_en = '0;
      for (int k = 0; k * (int'(stride) + 1) <= int'(num_rows); k++)
        if (int'(start_row) + k * (int'(stride) + 1) <= 511)
          exp_en[int'(start_row) + k * (int'(stride) + 1)] = 1'b1;
      if (single) begin exp_en = '0; exp_en[start_row] = 1'b1; end
      #1;
      check(row_en == exp_en, $sformatf("start %0d num %0d stride %0d single %0b: %0d rows, expected %0d",
            start_row, num_rows, stride, single, $countones(row_en), $countones(exp_en)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
