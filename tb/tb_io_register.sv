// tb_io_register: peripheral and core writes, interrupt flag.
//
// Random peripheral writes, core (sio) writes and interrupt acknowledges,
// sometimes together, are applied; a reference model expects the
// peripheral to win over the core in the same cycle, every peripheral
// write to raise irq and irq_ack to clear it. Everything updates on the
// clock edge; reset clears value and flag.
module tb_io_register;
  import pia_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic periph_we = 1'b0, core_we = 1'b0, irq_ack = 1'b0;
  logic [31:0] periph_wdata = '0, core_wdata = '0, q;
  logic irq;
  logic [31:0] r_q;
  logic r_irq;

  io_register dut (.clk, .rst_n, .periph_we, .periph_wdata, .core_we, .core_wdata, .irq_ack, .q, .irq);

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
    repeat (2) @(negedge clk);
    check(q == '0 && irq == 1'b0, "reset state");
    rst_n = 1'b1;
    r_q = '0; r_irq = 1'b0;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      periph_we = ($urandom_range(0, 3) == 0); periph_wdata = $urandom;
      core_we = ($urandom_range(0, 3) == 0); core_wdata = $urandom;
      irq_ack = ($urandom_range(0, 2) == 0);
      @(posedge clk);
      if (periph_we) r_q = periph_wdata; else if (core_we) r_q = core_wdata;
      if (periph_we) r_irq = 1'b1; else if (irq_ack) r_irq = 1'b0;
      @(negedge clk);
      periph_we = 1'b0; core_we = 1'b0; irq_ack = 1'b0;
      check(q == r_q && irq == r_irq, $sformatf("iteration %0d: q %h/%h irq %b/%b", it, q, r_q, irq, r_irq));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
