// tb_csr_bank: programming writes, trap entry and mret.
//
// Checks that configuration writes land in the addressed entry and appear on
// mtvec/mie one clock edge later, that a trap saves the PC in mepc and the
// cause in mcause, copies MIE to MPIE and clears MIE, and that mret restores
// MIE from MPIE and sets MPIE, over random sequences of the three events.
module tb_csr_bank;
  import pia_pkg::*;
  logic clk = 1'b0;
  logic cfg_we = 1'b0, trap = 1'b0, mret = 1'b0;
  logic [4:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, trap_pc = '0, trap_cause = '0;
  logic [31:0] mtvec, mepc, mcause;
  logic mie;
  logic [31:0] r_status, r_tvec, r_epc, r_cause;

  csr_bank dut (.clk, .cfg_we, .cfg_addr, .cfg_wdata, .trap, .trap_pc, .trap_cause, .mret,
                .mtvec, .mepc, .mcause, .mie);

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
    int n_trap = 0, n_mret = 0;
    int sel;
    r_status = '0; r_tvec = '0; r_epc = '0; r_cause = '0;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      cfg_we = 1'b0; trap = 1'b0; mret = 1'b0;
      sel = $urandom_range(0, 3);
      unique case (sel)
        0: begin
          cfg_we = 1'b1; cfg_addr = 5'($urandom_range(0, 3)); cfg_wdata = $urandom;
        end
        1: begin trap = 1'b1; trap_pc = $urandom; trap_cause = $urandom; end
        2: mret = 1'b1;
        default: ;
      endcase
      @(posedge clk);
      if (cfg_we) begin
        unique case (cfg_addr)
          CSR_MSTATUS: r_status = cfg_wdata;
          CSR_MTVEC:   r_tvec = cfg_wdata;
          CSR_MEPC:    r_epc = cfg_wdata;
          default:     r_cause = cfg_wdata;
        endcase
      end else if (trap) begin
        r_epc = trap_pc; r_cause = trap_cause;
        r_status[7] = r_status[3]; r_status[3] = 1'b0;
        n_trap++;
      end else if (mret) begin
        r_status[3] = r_status[7]; r_status[7] = 1'b1;
        n_mret++;
      end
      @(negedge clk);
      cfg_we = 1'b0; trap = 1'b0; mret = 1'b0;
      check(mtvec == r_tvec && mepc == r_epc && mcause == r_cause && mie == r_status[3],
            $sformatf("iteration %0d", it));
      check(dut.bank[CSR_MSTATUS] == r_status, $sformatf("mstatus iteration %0d", it));
    end
    check(n_trap > 100 && n_mret > 100, "traps and returns exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
