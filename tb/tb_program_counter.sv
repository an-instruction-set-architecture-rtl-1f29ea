// tb_program_counter: reset, increment and jump.
//
// After reset the PC is 0; on each clock edge it adds 4 when inc is set and
// takes the target when load is set (load wins), otherwise it holds. A
// reference model follows random sequences and a second reset in the middle.
module tb_program_counter;
  import pia_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, inc = 1'b0, load = 1'b0;
  logic [31:0] target = '0, pc, r_pc;

  program_counter dut (.clk, .rst_n, .inc, .load, .target, .pc);

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
    @(negedge clk);
    check(pc == '0, "reset value");
    rst_n = 1'b1; r_pc = '0;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      inc = 1'($urandom); load = ($urandom_range(0, 4) == 0); target = $urandom & ~32'h3;
      if (it == 2500) begin rst_n = 1'b0; #1; r_pc = '0; check(pc == '0, "asynchronous reset"); rst_n = 1'b1; end
      @(posedge clk);
      if (load) r_pc = target; else if (inc) r_pc = r_pc + 32'd4;
      @(negedge clk);
      inc = 1'b0; load = 1'b0;
      check(pc == r_pc, $sformatf("iteration %0d: %h expected %h", it, pc, r_pc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
