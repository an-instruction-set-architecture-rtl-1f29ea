// tb_control_logic: checks the controller's outputs instruction by instruction.
//
// The controller runs against simple models written here: a PC register,
// a program memory array, an address bank (SET/RESET cycles applied to a
// slot array), the real u-OP cache, a CSR model and a crossbar read port
// that returns a fixed function of (row, word). The testbench watches the
// crossbar commands rather than any array contents:
//   * li  -> one RESET of the word bits that are 0, then one SET of those
//            that are 1, on the configured rows/stride;
//   * and / add / sll -> 160 / 640 / 1218 crossbar steps, the first being a
//            FALSE on work memristors; insn_done after them;
//   * beq/bne against the modelled read data -> pc_load with the target;
//   * lai/laui -> address-bank SET/RESET of the right bits;
//   * illegal instruction -> csr_trap with mcause 2 and jump to mtvec;
//   * wfi -> sleeping until io_irq, then the interrupt trap (MIE set);
//   * nxt_array -> array_id increments and the PC is loaded with 0.
module tb_control_logic;
  import pia_pkg::*;
  import pia_asm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] pc;
  logic pc_inc, pc_load;
  logic [31:0] pc_target;
  logic [8:0] pm_addr;
  logic [31:0] pm_rdata;
  logic [4:0] ab_ra_slot, ab_rb_slot, ab_rc_slot, ab_wr_slot;
  logic [31:0] ab_ra_data, ab_rb_data, ab_rc_data, ab_wr_mask, ab_wr_data;
  logic ab_set_en, ab_rst_en;
  kernel_e uc_kernel;
  logic [4:0] uc_step;
  uop_t uc_uop;
  logic csr_trap, csr_mret;
  logic [31:0] csr_trap_pc, csr_trap_cause;
  logic [31:0] csr_mtvec = 32'h0000_0400, csr_mepc = '0;
  logic csr_mie = 1'b0;
  logic [31:0] io_q = 32'h1234_5678;
  logic io_irq = 1'b0;
  logic io_core_we, io_irq_ack;
  logic [31:0] io_core_wdata;
  xb_op_e xb_op;
  logic [8:0] row_start, row_num, rd_row;
  logic [5:0] row_stride;
  logic row_single;
  logic [3:0][COL_W-1:0] cd_idx;
  logic [3:0] cd_vld;
  logic [1:0] cd_wen;
  logic [1:0][3:0] cd_widx;
  logic [1:0][31:0] cd_wbits;
  logic [COL_W-1:0] cond_idx;
  logic cond_vld;
  logic [3:0] rd_word;
  logic [31:0] rd_data;
  logic [0:0] array_id;
  logic xb_step, insn_done, trap_taken, sleeping, array_switch;
  logic [31:0] ir_out;

  control_logic #(.N_ARRAYS(2), .INSN_THRESHOLD(1000)) dut (.*);
  uop_cache u_uc (.kernel(uc_kernel), .step(uc_step), .uop(uc_uop));

  always #5 clk = ~clk;

  // environment models
  logic [31:0] pm [512];
  logic [31:0] ab [32];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pc <= '0;
    else if (pc_load) pc <= pc_target;
    else if (pc_inc) pc <= pc + 32'd4;
  always_ff @(posedge clk) begin
    if (ab_set_en) ab[ab_wr_slot] <= ab[ab_wr_slot] | (ab_wr_mask & ab_wr_data);
    if (ab_rst_en) ab[ab_wr_slot] <= ab[ab_wr_slot] & ~(ab_wr_mask & ~ab_wr_data);
  end
  assign pm_rdata = pm[pm_addr];
  assign ab_ra_data = ab[ab_ra_slot];
  assign ab_rb_data = ab[ab_rb_slot];
  assign ab_rc_data = ab[ab_rc_slot];
  function automatic logic [31:0] rd_model(logic [8:0] r, logic [3:0] w);
    return {r, 3'b0, w, 16'h0} ^ 32'h0000_00F0;
  endfunction
  assign rd_data = rd_model(rd_row, rd_word);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  // record of crossbar commands of the current instruction
  int n_steps, n_reset, n_set, n_false_work;
  logic [31:0] last_set_bits, last_reset_bits;
  logic [8:0]  last_start, last_num;
  logic [5:0]  last_stride;
  logic [3:0]  last_widx;
  int cyc_insn;
  always @(posedge clk) begin
    cyc_insn++;
    if (xb_step) begin
      n_steps++;
      if (xb_op == XB_RESET && cd_wen[0]) begin n_reset++; last_reset_bits = cd_wbits[0]; end
      if (xb_op == XB_SET && cd_wen[0]) begin
        n_set++; last_set_bits = cd_wbits[0];
        last_start = row_start; last_num = row_num; last_stride = row_stride; last_widx = cd_widx[0];
      end
      if (n_steps == 1 && xb_op == XB_RESET && cd_vld[0] && cd_idx[0] >= COL_W'(DATA_COLS)) n_false_work++;
    end
  end

  task automatic step_insn(output int steps, output int cyc);
    n_steps = 0; n_reset = 0; n_set = 0; n_false_work = 0; cyc_insn = 0;
    do @(posedge clk); while (!insn_done && cyc_insn < 5000);
    steps = n_steps; cyc = cyc_insn;
    @(negedge clk);
  endtask

  initial begin
    int s, c;
    logic [31:0] cf;
    foreach (pm[i]) pm[i] = i_wfi();
    foreach (ab[i]) ab[i] = '0;
    cf = cfg(3, 4, 20, 8, 1);
    ab[1] = cf;
    ab[2] = cfg(5, 0, 7, 0, 0);
    ab[3] = cfg(6, 0, 7, 0, 0);
    pm[0] = i_li(1, 12'h5A3);
    pm[1] = i_and(1);
    pm[2] = i_add(1);
    pm[3] = i_sll(1);
    pm[4] = i_beq(2, 3, 16);     // not taken: read data differ by word
    pm[5] = i_bne(2, 3, 12);     // taken -> pm[8]
    pm[8] = i_lai(4, 12'hABC);
    pm[9] = i_laui(4, 20'h12345);
    pm[10] = 32'hFFFF_FFFF;      // illegal -> mtvec 0x400
    pm[256] = i_nxt();           // at mtvec: switch array, PC <- 0
    @(negedge clk); rst_n = 1'b1;

    step_insn(s, c);
    check(s == 2 && n_reset == 1 && n_set == 1, $sformatf("li: %0d steps (%0d reset, %0d set)", s, n_reset, n_set));
    check(last_reset_bits == 32'h0000_0A5C && last_set_bits == 32'h0000_05A3, "li: bit patterns");
    check(pc == 32'd4, "li: PC advanced");
    check(last_start == 9'd20 && last_num == 9'd8 && last_stride == 6'd1 && last_widx == 4'd3,
          "li: rows and word of the address configuration");
    check(c >= 4 && c <= 6, $sformatf("li: %0d cycles", c));

    step_insn(s, c);
    check(s == 160 && n_false_work == 1, $sformatf("and: %0d crossbar steps", s));
    check(c >= s && c <= s + 8, $sformatf("and: %0d cycles for %0d steps", c, s));
    step_insn(s, c);
    check(s == 640, $sformatf("add: %0d crossbar steps", s));
    step_insn(s, c);
    check(s == 1218, $sformatf("sll: %0d crossbar steps", s));

    step_insn(s, c);
    check(s == 0 && pc == 32'd20, $sformatf("beq not taken: pc %h", pc));
    step_insn(s, c);
    check(s == 0 && pc == 32'd32, $sformatf("bne taken: pc %h", pc));

    step_insn(s, c);
    check(ab[4][11:0] == 12'hABC, $sformatf("lai: slot %h", ab[4]));
    step_insn(s, c);
    check(ab[4] == 32'h1234_5ABC, $sformatf("laui: slot %h", ab[4]));

    // illegal instruction
    n_steps = 0; cyc_insn = 0;
    do @(posedge clk); while (!csr_trap && cyc_insn < 100);
    check(csr_trap && csr_trap_cause == 32'd2 && csr_trap_pc == 32'd40, "illegal: trap with mcause 2, mepc");
    @(negedge clk);
    step_insn(s, c);
    check(array_id == 1'b1 && pc == 32'd0, $sformatf("nxt_array: array %0d pc %h", array_id, pc));

    // with a wfi at address 0 the core sleeps until the interrupt
    pm[0] = i_wfi();
    repeat (20) @(posedge clk);
    check(sleeping, "wfi: sleeping");
    csr_mie = 1'b1; io_irq = 1'b1;
    cyc_insn = 0;
    do @(negedge clk); while (!csr_trap && cyc_insn < 100);
    check(csr_trap && csr_trap_cause == MCAUSE_EXT_IRQ, "irq: interrupt trap taken");
    check(io_irq_ack, "irq: acknowledged");
    @(negedge clk);
    io_irq = 1'b0;
    check(pc == csr_mtvec, $sformatf("irq: jumped to mtvec, pc %h", pc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
