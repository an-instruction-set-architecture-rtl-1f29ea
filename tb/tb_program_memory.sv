// tb_program_memory: writes every word, then reads it back.
//
// All 512 words are written through the programming port with random
// values and read back through the fetch port (combinational); a write
// becomes visible one clock edge after it is applied, and a later partial
// rewrite changes only the addressed words.
module tb_program_memory;
  import pia_pkg::*;
  logic clk = 1'b0, we = 1'b0;
  logic [8:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] ref_mem [512];

  program_memory dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

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
    for (int i = 0; i < 512; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = 9'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int i = 0; i < 512; i++) begin
      raddr = 9'(i); #1;
      check(rdata == ref_mem[i], $sformatf("word %0d", i));
    end
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      we = 1'b1; waddr = 9'($urandom); wdata = $urandom; raddr = waddr;
      #1;
      check(rdata == ref_mem[waddr], "old value until the clock edge");
      @(posedge clk); ref_mem[waddr] = wdata;
      @(negedge clk); we = 1'b0;
      raddr = 9'($urandom); #1;
      check(rdata == ref_mem[raddr], $sformatf("word %0d after rewrite", raddr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
