// tb_pia_top: end-to-end test of the processing-in-array core.
//
// Each test case is a short program built with the encoders of
// pia_asm_pkg, loaded through the programming port while the core is in
// reset, and run until the core sleeps in its final wfi. Results are then
// read straight from the crossbar cells and compared with values computed
// here from the operands. Covered:
//   * every in-array instruction (R-type and immediate forms, mv, li, lui,
//     auipc) on four rows at once with a random start row and stride,
//     with the crossbar step count of every instruction checked against
//     the algorithm's count (ISA table; sra per its routine);
//   * rows skipped by the stride keep their data, operand A is preserved;
//   * all six branches taken and not taken, jal, jalr, la/lai/laui;
//   * a pointer kept in the array, advanced by add and loaded with la;
//   * an interrupt from the peripheral: wfi wakes, the handler stores the IO
//     value into several rows with lio and reads a word out with sio, mret;
//   * ebreak and illegal-instruction traps;
//   * the array switch by nxt_array and by the instruction threshold.
// Each of these mechanisms is counted and must occur at least once.
module tb_pia_top;
  import pia_pkg::*;
  import pia_asm_pkg::*;

  localparam int unsigned THR = 200;   // instruction threshold for switching

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic             prog_pm_we = 1'b0;
  logic [8:0]       prog_pm_addr = '0;
  logic [31:0]      prog_pm_wdata = '0;
  logic             prog_csr_we = 1'b0;
  logic [4:0]       prog_csr_addr = '0;
  logic [31:0]      prog_csr_wdata = '0;
  logic             periph_we = 1'b0;
  logic [31:0]      periph_wdata = '0;
  logic [31:0]      io_value, mcause, pc, insn;
  logic [0:0]       array_id;
  logic             xb_step, insn_done, trap_taken, sleeping, array_switch;

  pia_top #(.INSN_THRESHOLD(THR)) dut (
    .clk, .rst_n, .prog_pm_we, .prog_pm_addr, .prog_pm_wdata,
    .prog_csr_we, .prog_csr_addr, .prog_csr_wdata,
    .periph_we, .periph_wdata, .io_value, .mcause,
    .pc, .insn, .array_id, .xb_step, .insn_done, .trap_taken, .sleeping, .array_switch
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ monitors
  int steps_now = 0;
  int steps_at [int];         // crossbar steps of the instruction at a PC
  int n_switch = 0, n_trap = 0;
  int mech [string];

  always @(posedge clk) begin
    cycles++;
    if (rst_n) begin
      if (xb_step) steps_now++;
      if (insn_done) begin
        steps_at[int'(pc)] = steps_now;
        steps_now = 0;
      end
      if (array_switch) n_switch++;
      if (trap_taken) n_trap++;
    end else begin
      steps_now = 0;
    end
  end

  // ------------------------------------------------------------ helpers
  logic [31:0] prog [$];

  function automatic logic [31:0] cell_word(int arr, int row, int word);
    if (arr == 0) return dut.g_array[0].u_xbar.cells[row][word*32 +: 32];
    else          return dut.g_array[1].u_xbar.cells[row][word*32 +: 32];
  endfunction

  // write a 32-bit value to one word of one row (uses slot 30)
  task automatic p_put(int row, int word, logic [31:0] v);
    logic [31:0] c;
    c = cfg(word, 0, row, 0, 0);
    prog.push_back(i_laui(30, int'(c[31:12])));
    prog.push_back(i_lai(30, int'(c[11:0])));
    prog.push_back(i_lui(30, int'(v[31:12])));
    prog.push_back(i_li(30, int'(v[11:0])));
  endtask

  task automatic p_slot(int slot, logic [31:0] c);
    prog.push_back(i_laui(slot, int'(c[31:12])));
    prog.push_back(i_lai(slot, int'(c[11:0])));
  endtask

  function automatic int pc_of_next();
    return 4 * prog.size();
  endfunction

  // load prog[] and csr values, run until the core sleeps
  task automatic run(logic [31:0] mtvec, bit mie, int max_cycles, output bit slept);
    rst_n = 1'b0;
    @(posedge clk);
    foreach (prog[k]) begin
      prog_pm_we = 1'b1; prog_pm_addr = 9'(k); prog_pm_wdata = prog[k];
      @(posedge clk);
    end
    prog_pm_we = 1'b0;
    prog_csr_we = 1'b1; prog_csr_addr = CSR_MTVEC; prog_csr_wdata = mtvec;
    @(posedge clk);
    prog_csr_addr = CSR_MSTATUS; prog_csr_wdata = mie ? 32'h8 : 32'h0;
    @(posedge clk);
    prog_csr_we = 1'b0;
    @(posedge clk);
    rst_n = 1'b1;
    slept = 1'b0;
    repeat (3) @(posedge clk);
    for (int c = 0; c < max_cycles; c++) begin
      @(posedge clk);
      if (sleeping) begin slept = 1'b1; break; end
    end
  endtask

  // ------------------------------------------------------------ ALU tests
  typedef enum int {
    T_ADD, T_SUB, T_AND, T_OR, T_XOR, T_SLL, T_SRL, T_SRA, T_SLT, T_SLTU,
    T_ADDI, T_ANDI, T_ORI, T_XORI, T_SLTI, T_SLTIU, T_SLLI, T_SRLI, T_SRAI,
    T_AUIPC, T_MV, T_LILUI
  } alu_t;

  function automatic logic [31:0] rnd_val(int kind);
    unique case (kind % 4)
      0: return $urandom;
      1: return 32'($signed($urandom_range(0, 40)) - 20);
      2: return {$urandom_range(0, 1) == 1 ? 1'b1 : 1'b0, 31'($urandom)};
      default: return 32'($urandom_range(0, 255));
    endcase
  endfunction

  task automatic alu_case(alu_t t);
    int ca, cb, r0, st, nr, op_pc;
    logic [31:0] av [4], bv [4], ea [4], eb [4];
    logic [31:0] imm, simm;
    int exp_steps;
    bit slept;
    string nm;
    nm = t.name();
    ca = $urandom_range(0, 15);
    do cb = $urandom_range(0, 15); while (cb == ca);
    st = $urandom_range(0, 2);
    nr = 3 * (st + 1);
    r0 = $urandom_range(0, 500);
    imm  = 32'($urandom_range(0, 4095));
    simm = {{20{imm[11]}}, imm[11:0]};
    prog.delete();
    for (int k = 0; k < 4; k++) begin
      av[k] = rnd_val($urandom);
      bv[k] = rnd_val($urandom);
      if ($urandom_range(0, 5) == 0) bv[k] = av[k];
      if (k == 3 && (t == T_SLT || t == T_SLTU)) bv[k] = av[k];
      if (r0 + k * (st + 1) <= 511) begin
        p_put(r0 + k * (st + 1), ca, av[k]);
        p_put(r0 + k * (st + 1), cb, bv[k]);
      end
    end
    // a row skipped by the stride keeps its B word
    if (st > 0 && r0 + 1 <= 511) p_put(r0 + 1, cb, 32'h5A5A_1234);
    p_slot(1, cfg(ca, cb, r0, nr, st));
    op_pc = pc_of_next();
    unique case (t)
      T_ADD:   prog.push_back(i_add(1));
      T_SUB:   prog.push_back(i_sub(1));
      T_AND:   prog.push_back(i_and(1));
      T_OR:    prog.push_back(i_or(1));
      T_XOR:   prog.push_back(i_xor(1));
      T_SLL:   prog.push_back(i_sll(1));
      T_SRL:   prog.push_back(i_srl(1));
      T_SRA:   prog.push_back(i_sra(1));
      T_SLT:   prog.push_back(i_slt(1));
      T_SLTU:  prog.push_back(i_sltu(1));
      T_ADDI:  prog.push_back(i_addi(1, int'(imm)));
      T_ANDI:  prog.push_back(i_andi(1, int'(imm)));
      T_ORI:   prog.push_back(i_ori(1, int'(imm)));
      T_XORI:  prog.push_back(i_xori(1, int'(imm)));
      T_SLTI:  prog.push_back(i_slti(1, int'(imm)));
      T_SLTIU: prog.push_back(i_sltiu(1, int'(imm)));
      T_SLLI:  prog.push_back(i_slli(1, int'(imm)));
      T_SRLI:  prog.push_back(i_srli(1, int'(imm)));
      T_SRAI:  prog.push_back(i_srai(1, int'(imm)));
      T_AUIPC: begin
        // auipc takes its address configuration from bits 11:7
        prog.push_back(i_auipc(1, int'($urandom_range(0, 32'hFFFFF))));
      end
      T_MV:    prog.push_back(i_mv(1));
      default: begin // li then lui on all four rows at once
        prog.push_back(i_li(1, int'(imm)));
        prog.push_back(i_lui(1, int'(imm) * 97));
      end
    endcase
    prog.push_back(i_wfi());
    run(32'h0, 1'b0, 200_000, slept);
    check(slept, {nm, ": program finished"});

    for (int k = 0; k < 4; k++) begin
      logic [31:0] a, b, sh_b, imm_u;
      a = av[k]; b = bv[k];
      ea[k] = a; eb[k] = b;
      // shift immediates put the whole 12-bit field (shamt and funct7 bits) in B
      sh_b = {{20{prog[op_pc/4][31]}}, prog[op_pc/4][31:20]};
      imm_u = {prog[op_pc/4][31:12], 12'b0};
      unique case (t)
        T_ADD:   eb[k] = a + b;
        T_SUB:   eb[k] = a - b;
        T_AND:   eb[k] = a & b;
        T_OR:    eb[k] = a | b;
        T_XOR:   eb[k] = a ^ b;
        T_SLL:   ea[k] = a << b[4:0];
        T_SRL:   ea[k] = a >> b[4:0];
        T_SRA:   ea[k] = 32'($signed(a) >>> b[4:0]);
        T_SLT:   eb[k] = {31'b0, $signed(a) < $signed(b)};
        T_SLTU:  eb[k] = {31'b0, a < b};
        T_ADDI:  begin ea[k] = simm; eb[k] = simm + b; end
        T_ANDI:  begin ea[k] = simm; eb[k] = simm & b; end
        T_ORI:   begin ea[k] = simm; eb[k] = simm | b; end
        T_XORI:  begin ea[k] = simm; eb[k] = simm ^ b; end
        T_SLTI:  eb[k] = {31'b0, $signed(a) < $signed(simm)};
        T_SLTIU: eb[k] = {31'b0, a < simm};
        T_SLLI:  begin eb[k] = sh_b; ea[k] = a << imm[4:0]; end
        T_SRLI:  begin eb[k] = sh_b; ea[k] = a >> imm[4:0]; end
        T_SRAI:  begin eb[k] = sh_b; ea[k] = 32'($signed(a) >>> imm[4:0]); end
        T_AUIPC: begin ea[k] = imm_u; eb[k] = imm_u + 32'(op_pc); end
        T_MV:    eb[k] = a;
        default: ea[k] = {20'(imm * 97), imm[11:0]};
      endcase
      if (r0 + k * (st + 1) <= 511) begin
        check(cell_word(0, r0 + k * (st + 1), ca) == ea[k],
              $sformatf("%s row %0d A: got %h exp %h", nm, r0 + k * (st + 1), cell_word(0, r0 + k * (st + 1), ca), ea[k]));
        check(cell_word(0, r0 + k * (st + 1), cb) == eb[k],
              $sformatf("%s row %0d B: got %h exp %h (a=%h b=%h)", nm, r0 + k * (st + 1),
                        cell_word(0, r0 + k * (st + 1), cb), eb[k], a, b));
      end
    end
    if (st > 0 && r0 + 1 <= 511) begin
      check(cell_word(0, r0 + 1, cb) == 32'h5A5A_1234, {nm, ": row skipped by the stride unchanged"});
      mech["stride"]++;
    end
    mech["multi_row"]++;
    mech[nm]++;

    // crossbar steps of the instruction under test
    unique case (t)
      T_ADD, T_SUB:         exp_steps = 20 * 32;
      T_AND:                exp_steps = 5 * 32;
      T_OR:                 exp_steps = 3 * 32;
      T_XOR:                exp_steps = 9 * 32;
      T_SLL, T_SRL:         exp_steps = 8 * 32 * 5 - 2 * 32 + 2;
      T_SRA:                exp_steps = 8 * 31 * 5;
      T_SLT:                exp_steps = 26 * 32 - 16;
      T_SLTU:               exp_steps = 26 * 32 - 12;
      T_ADDI:               exp_steps = 20 * 32 + 2;
      T_ANDI:               exp_steps = 5 * 32 + 2;
      T_ORI:                exp_steps = 3 * 32 + 2;
      T_XORI:               exp_steps = 9 * 32 + 2;
      T_SLTI:               exp_steps = 26 * 32 - 16 + 2;
      T_SLTIU:              exp_steps = 26 * 32 - 12 + 2;
      T_SLLI, T_SRLI:       exp_steps = 8 * 32 * 5 - 2 * 32 + 4;
      T_SRAI:               exp_steps = 8 * 31 * 5 + 2;
      T_AUIPC:              exp_steps = 20 * 32 + 2;
      T_MV:                 exp_steps = 3 * 32;
      default:              exp_steps = 2;
    endcase
    check(steps_at.exists(op_pc) && steps_at[op_pc] == exp_steps,
          $sformatf("%s: %0d crossbar steps, expected %0d", nm,
                    steps_at.exists(op_pc) ? steps_at[op_pc] : -1, exp_steps));
  endtask

  // ------------------------------------------------------------ control flow
  task automatic branch_case(int f3, logic [31:0] x, logic [31:0] y);
    bit take, slept;
    int br_pc, jal_pc;
    logic [31:0] marker;
    unique case (f3)
      0: take = (x == y);
      1: take = (x != y);
      4: take = ($signed(x) < $signed(y));
      5: take = ($signed(x) >= $signed(y));
      6: take = (x < y);
      default: take = (x >= y);
    endcase
    prog.delete();
    p_put(100, 2, x);
    p_put(37, 5, y);
    p_put(200, 3, 32'h0);                 // marker word
    p_slot(2, cfg(2, 9, 100, 7, 1));      // only start row / col A matter
    p_slot(3, cfg(5, 0, 37, 0, 0));
    p_slot(4, cfg(3, 0, 200, 0, 0));
    p_slot(5, cfg(6, 0, 201, 0, 0));      // jal return-address location
    br_pc = pc_of_next();
    prog.push_back(enc_b(12, 3, 2, 3'(f3)));   // -> br_pc + 12
    prog.push_back(i_li(4, 1));                // not taken path
    jal_pc = pc_of_next();
    prog.push_back(i_jal(5, 8));               // -> br_pc + 16
    prog.push_back(i_li(4, 2));                // taken path
    prog.push_back(i_wfi());
    run(32'h0, 1'b0, 20_000, slept);
    marker = cell_word(0, 200, 3);
    check(slept && marker == (take ? 32'd2 : 32'd1),
          $sformatf("branch f3=%0d x=%h y=%h: marker %0d, take=%0d", f3, x, y, marker, take));
    if (!take) begin
      check(cell_word(0, 201, 6) == 32'(jal_pc + 4), "jal: return address stored");
      check(steps_at.exists(jal_pc) && steps_at[jal_pc] == 2, "jal: two crossbar steps");
      mech["jal"]++;
    end
    check(steps_at.exists(br_pc) && steps_at[br_pc] == 0, "branch: no crossbar step");
    mech[take ? "branch_taken" : "branch_not_taken"]++;
  endtask

  task automatic jalr_la_case();
    bit slept;
    int jalr_pc, tgt;
    logic [31:0] c;
    prog.delete();
    // la: pointer word in the array holds an address configuration
    c = cfg(4, 5, 300, 2, 0);
    p_put(10, 7, c);
    p_slot(6, cfg(7, 0, 10, 0, 0));
    prog.push_back(i_la(8, 6));            // slot 8 <- word at [row 10, col 7]
    prog.push_back(i_lui(8, 32'hABCDE));   // writes rows 300..302, col 4
    prog.push_back(i_li(8, 32'h123));
    // jalr: base address in the array, return address to slot 9's location
    p_put(11, 1, 32'd0);                    // base address, value set below
    p_slot(9, cfg(2, 0, 12, 0, 0));
    p_slot(10, cfg(1, 0, 11, 0, 0));
    jalr_pc = pc_of_next();
    prog.push_back(i_jalr(9, 10, 8));       // -> base + 8
    prog.push_back(i_ebreak());             // skipped
    prog.push_back(i_ebreak());             // skipped
    tgt = pc_of_next();
    prog.push_back(i_wfi());
    // patch the base value: the jalr target is base + 8 = tgt
    prog[jalr_pc/4 - 8 + 2] = i_lui(30, int'(32'(tgt - 8) >> 12));
    prog[jalr_pc/4 - 8 + 3] = i_li(30, int'(32'(tgt - 8) & 32'hFFF));
    run(32'h0, 1'b0, 20_000, slept);
    check(slept && pc == 32'(tgt), $sformatf("jalr: reached %h, expected %h", pc, tgt));
    check(cell_word(0, 12, 2) == 32'(jalr_pc + 4), "jalr: return address stored");
    check(dut.u_abank.bank[8] == c, "la: address bank slot loaded from the array");
    for (int r = 300; r <= 302; r++)
      check(cell_word(0, r, 4) == 32'hABCDE123, $sformatf("la: loaded configuration used, row %0d", r));
    check(steps_at.exists(jalr_pc) && steps_at[jalr_pc] == 2, "jalr: two crossbar steps");
    mech["jalr"]++; mech["la"]++; mech["lai_laui"]++;
  endtask


  // a pointer stored in the array is advanced by an in-array add, loaded
  // with la and used as an address configuration
  task automatic pointer_case();
    bit slept;
    logic [31:0] base;
    base = cfg(3, 0, 100, 0, 0);
    prog.delete();
    p_put(20, 0, base);                    // pointer
    p_put(20, 1, cfg(0, 0, 1, 0, 0));      // iterator: start row + 1
    p_slot(16, cfg(1, 0, 20, 0, 0));
    p_slot(17, cfg(0, 0, 20, 0, 0));
    prog.push_back(i_add(16));             // pointer += iterator
    prog.push_back(i_add(16));
    prog.push_back(i_la(18, 17));
    prog.push_back(i_lui(18, 32'h13579));
    prog.push_back(i_li(18, 32'h246));
    prog.push_back(i_wfi());
    run(32'h0, 1'b0, 20_000, slept);
    check(slept && cell_word(0, 20, 0) == base + cfg(0, 0, 2, 0, 0), "pointer: advanced in the array");
    check(cell_word(0, 102, 3) == 32'h1357_9246, "pointer: loaded with la and used");
    mech["pointer_add_la"]++;
  endtask

  task automatic irq_case();
    bit slept;
    int handler;
    logic [31:0] sample;
    prog.delete();
    p_put(50, 9, 32'hCAFE_F00D);
    p_put(41, 6, 32'h1111_1111);
    p_slot(11, cfg(6, 0, 40, 6, 2));        // lio target: rows 40, 43, 46, col 6
    p_slot(12, cfg(9, 0, 50, 0, 0));        // sio source
    prog.push_back(i_wfi());                // sleep until the sensor interrupt
    prog.push_back(i_wfi());                // final sleep after the handler
    handler = pc_of_next();
    prog.push_back(i_lio(11));
    prog.push_back(i_sio(12));
    prog.push_back(i_mret());
    run(32'(handler), 1'b1, 20_000, slept);
    check(slept, "irq: core sleeps in wfi");
    mech["wfi_sleep"]++;
    sample = $urandom;
    repeat (5) @(posedge clk);
    periph_we = 1'b1; periph_wdata = sample;
    @(posedge clk);
    periph_we = 1'b0;
    @(posedge clk);
    for (int c = 0; c < 2000 && !sleeping; c++) @(posedge clk);
    check(sleeping && pc == 32'(handler - 4), $sformatf("irq: handler ran and returned, pc=%h", pc));
    check(mcause == MCAUSE_EXT_IRQ, "irq: mcause is the external interrupt");
    check(io_value == 32'hCAFE_F00D, $sformatf("sio: IO register %h", io_value));
    for (int r = 40; r <= 46; r += 3)
      check(cell_word(0, r, 6) == sample, $sformatf("lio: row %0d holds the sample", r));
    check(cell_word(0, 41, 6) == 32'h1111_1111, "lio: stride skips row 41");
    mech["irq"]++; mech["lio"]++; mech["sio"]++; mech["mret"]++;
  endtask

  task automatic trap_case(bit brk);
    bit slept;
    int handler, bad_pc;
    prog.delete();
    prog.push_back(i_lai(0, 0));
    bad_pc = pc_of_next();
    prog.push_back(brk ? i_ebreak() : 32'hFFFF_FFFF);
    prog.push_back(i_wfi());
    handler = pc_of_next();
    prog.push_back(i_wfi());
    run(32'(handler), 1'b0, 2000, slept);
    check(slept && pc == 32'(handler), $sformatf("trap: handler reached (pc=%h)", pc));
    check(mcause == (brk ? MCAUSE_BREAK : MCAUSE_ILLEGAL), $sformatf("trap: mcause %h", mcause));
    check(dut.u_csr.bank[CSR_MEPC] == 32'(bad_pc), "trap: mepc");
    mech[brk ? "ebreak_trap" : "illegal_trap"]++;
  endtask

  task automatic nxt_array_case();
    bit slept;
    int n0;
    prog.delete();
    p_slot(13, cfg(15, 0, 511, 0, 0));     // flag word
    p_slot(14, cfg(14, 0, 511, 0, 0));     // zero word
    prog.push_back(i_lui(14, 0));
    prog.push_back(i_li(14, 0));
    prog.push_back(i_bne(13, 14, 20));     // flag set: done
    prog.push_back(i_lui(13, 0));
    prog.push_back(i_li(13, 1));
    prog.push_back(i_nxt());
    prog.push_back(i_wfi());               // not reached
    prog.push_back(i_wfi());
    n0 = n_switch;
    run(32'h0, 1'b0, 5000, slept);
    check(slept && n_switch - n0 == 2, $sformatf("nxt_array: %0d switches", n_switch - n0));
    check(cell_word(0, 511, 15) == 32'd1 && cell_word(1, 511, 15) == 32'd1,
          "nxt_array: both arrays initialised in turn");
    mech["nxt_array"] += n_switch - n0;
  endtask

  task automatic threshold_case();
    bit slept;
    int n0;
    prog.delete();
    p_slot(15, cfg(13, 0, 256, 0, 0));
    for (int k = 2; k < 220; k++) prog.push_back(i_li(15, k));
    prog.push_back(i_wfi());
    n0 = n_switch;
    run(32'h0, 1'b0, 20_000, slept);
    check(slept && n_switch - n0 == 1 && array_id == 1'b1, "threshold: one array switch");
    check(cell_word(0, 256, 13) % 4096 == THR - 1, $sformatf("threshold: last write to array 0 is %0d",
          cell_word(0, 256, 13) % 4096));
    check(cell_word(1, 256, 13) % 4096 == 219, "threshold: later writes go to array 1");
    mech["threshold_switch"] += n_switch - n0;
  endtask

  // ------------------------------------------------------------ main
  initial begin
    nxt_array_case();
    threshold_case();
    for (int rep = 0; rep < 4; rep++)
      for (int t = T_ADD; t <= T_LILUI; t++) alu_case(alu_t'(t));
    for (int f = 0; f < 8; f++) begin
      if (f == 2 || f == 3) continue;
      branch_case(f, 32'd5, 32'd5);
      branch_case(f, 32'hFFFF_FFF0, 32'd3);
      branch_case(f, 32'd3, 32'hFFFF_FFF0);
    end
    jalr_la_case();
    pointer_case();
    irq_case();
    trap_case(1'b1);
    trap_case(1'b0);

    foreach (mech[m]) $display("mechanism %-16s %0d", m, mech[m]);
    begin
      automatic string need [$] = '{"multi_row", "stride", "branch_taken", "branch_not_taken", "jal", "jalr",
                          "la", "lai_laui", "pointer_add_la", "lio", "sio", "irq", "mret", "wfi_sleep", "ebreak_trap",
                          "illegal_trap", "nxt_array", "threshold_switch"};
      foreach (need[k]) check(mech.exists(need[k]) && mech[need[k]] > 0, {"mechanism happened: ", need[k]});
    end
    $display("cycles simulated: %0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
