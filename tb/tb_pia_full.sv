// tb_pia_full: the full-size core running a sensor-node workload.
//
// The core is instantiated with its default parameters (two 512-row arrays,
// 512-word program memory, switch threshold 2^20 instructions). The program
// follows the temperature-monitoring case study: 4 measurement periods of
// 8 samples each. For every sample the core sleeps in wfi; the testbench,
// acting as the sensor, writes a signed temperature into the IO register,
// which raises the interrupt; the handler returns at once and the main code
// stores the sample with lio into (period row, sample word). Then, on all
// four period rows in parallel, the samples above a threshold held in every
// row are counted (mv, slt, add per sample), the eight samples are summed with add, the
// sum divided by 8 with srai, copied with mv and compared with a threshold
// held in every row by slt. A branch per period counts the periods above
// the threshold with addi, and sio puts the count into the IO register.
// The testbench checks every average, flag and the count against values
// computed from the samples, and the total number of crossbar steps against
// the sum of the per-instruction step counts of the instructions executed.
module tb_pia_full;
  import pia_pkg::*;
  import pia_asm_pkg::*;

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

  pia_top dut (
    .clk, .rst_n, .prog_pm_we, .prog_pm_addr, .prog_pm_wdata,
    .prog_csr_we, .prog_csr_addr, .prog_csr_wdata,
    .periph_we, .periph_wdata, .io_value, .mcause,
    .pc, .insn, .array_id, .xb_step, .insn_done, .trap_taken, .sleeping, .array_switch
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400_000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  localparam int PERIODS = 4, SAMPLES = 8;
  localparam int C_SUM = 8, C_SH = 9, C_THR = 10, C_FLAG = 11, C_IMM = 12, C_CNT = 13, C_ZERO = 14,
                 C_NSUP = 15;
  localparam int THRESHOLD = 600;

  logic [31:0] prog [$];
  longint exp_steps = 0;       // crossbar steps of the straight-line code
  longint n_steps = 0, n_irq = 0;

  always @(posedge clk)
    if (rst_n) begin
      if (xb_step) n_steps++;
      if (trap_taken) n_irq++;
    end

  task automatic emit(logic [31:0] w, int steps);
    prog.push_back(w);
    exp_steps += steps;
  endtask

  task automatic slot(int s, logic [31:0] c);
    emit(i_laui(s, int'(c[31:12])), 2);   // address-bank SET and RESET
    emit(i_lai(s, int'(c[11:0])), 2);
  endtask

  // 32-bit constant into the rows of slot s (lui then li)
  task automatic put(int s, logic [31:0] v);
    emit(i_lui(s, int'(v[31:12])), 2);
    emit(i_li(s, int'(v[11:0])), 2);
  endtask

  initial begin
    logic signed [31:0] smp [PERIODS][SAMPLES];
    logic signed [31:0] avg [PERIODS];
    int count, handler, flag_steps;
    foreach (smp[p, j]) smp[p][j] = 32'($signed($urandom_range(0, 2000)) - 500);
    // make at least one period clearly above and one below the threshold
    foreach (smp[0][j]) smp[0][j] = 32'(THRESHOLD + 100 + j);
    foreach (smp[1][j]) smp[1][j] = 32'(THRESHOLD - 400 - j);

    // ---------------- program
    slot(1, cfg(C_SUM, 0, 0, PERIODS - 1, 0));
    put(1, 32'h0);                                   // sums to 0 in all rows
    slot(2, cfg(C_THR, 0, 0, PERIODS - 1, 0));
    put(2, 32'(THRESHOLD));                          // threshold in every row
    slot(3, cfg(C_CNT, 0, 0, 0, 0));
    put(3, 32'h0);
    slot(4, cfg(C_ZERO, 0, 0, 0, 0));
    put(4, 32'h0);
    for (int p = 0; p < PERIODS; p++)
      for (int j = 0; j < SAMPLES; j++) begin
        emit(i_wfi(), 0);
        slot(5, cfg(j, 0, p, 0, 0));
        emit(i_lio(5), 2);
      end
    // per period, in parallel: number of samples above the threshold
    slot(13, cfg(C_NSUP, 0, 0, PERIODS - 1, 0));
    put(13, 32'h0);
    for (int j = 0; j < SAMPLES; j++) begin
      slot(8, cfg(j, C_FLAG, 0, PERIODS - 1, 0));
      emit(i_mv(8), 96);
      slot(9, cfg(C_THR, C_FLAG, 0, PERIODS - 1, 0));
      emit(i_slt(9), 816);                           // flag = threshold < sample
      slot(13, cfg(C_FLAG, C_NSUP, 0, PERIODS - 1, 0));
      emit(i_add(13), 640);
    end
    // per period, in parallel: average of the eight samples
    for (int j = 0; j < SAMPLES; j++) begin
      slot(6, cfg(j, C_SUM, 0, PERIODS - 1, 0));
      emit(i_add(6), 640);
    end
    slot(7, cfg(C_SUM, C_SH, 0, PERIODS - 1, 0));
    emit(i_srai(7, 3), 1242);
    slot(8, cfg(C_SUM, C_FLAG, 0, PERIODS - 1, 0));
    emit(i_mv(8), 96);
    slot(9, cfg(C_THR, C_FLAG, 0, PERIODS - 1, 0));
    emit(i_slt(9), 816);                             // flag = threshold < average
    slot(10, cfg(C_IMM, C_CNT, 0, 0, 0));
    for (int p = 0; p < PERIODS; p++) begin
      slot(11, cfg(C_FLAG, 0, p, 0, 0));
      emit(i_beq(11, 4, 8), 0);                      // flag 0: skip the count
      emit(i_addi(10, 1), 0);                        // counted below when executed
    end
    slot(12, cfg(C_CNT, 0, 0, 0, 0));
    emit(i_sio(12), 0);
    emit(i_wfi(), 0);
    emit(i_wfi(), 0);                                // after the last mret
    handler = 4 * prog.size();
    emit(i_mret(), 0);
    check(prog.size() <= 512, $sformatf("program of %0d words fits the program memory", prog.size()));

    // ---------------- load and start
    foreach (prog[k]) begin
      @(negedge clk);
      prog_pm_we = 1'b1; prog_pm_addr = 9'(k); prog_pm_wdata = prog[k];
    end
    @(negedge clk);
    prog_pm_we = 1'b0;
    prog_csr_we = 1'b1; prog_csr_addr = CSR_MTVEC; prog_csr_wdata = 32'(handler);
    @(negedge clk);
    prog_csr_addr = CSR_MSTATUS; prog_csr_wdata = 32'h8;
    @(negedge clk);
    prog_csr_we = 1'b0;
    rst_n = 1'b1;

    // ---------------- sensor
    for (int p = 0; p < PERIODS; p++)
      for (int j = 0; j < SAMPLES; j++) begin
        automatic int waited = 0;
        while (!sleeping && waited < 20000) begin @(negedge clk); waited++; end
        check(sleeping, $sformatf("core waits for sample %0d.%0d", p, j));
        repeat ($urandom_range(1, 30)) @(negedge clk);
        periph_we = 1'b1; periph_wdata = smp[p][j];
        @(negedge clk);
        periph_we = 1'b0;
        @(negedge clk);
      end
    begin
      automatic int waited = 0;
      @(negedge clk);
      while (!sleeping && waited < 100000) begin @(negedge clk); waited++; end
    end
    check(sleeping, "core sleeps at the end of the program");

    // ---------------- results
    count = 0;
    flag_steps = 0;
    for (int p = 0; p < PERIODS; p++) begin
      logic signed [31:0] sum;
      sum = 0;
      for (int j = 0; j < SAMPLES; j++) begin
        sum += smp[p][j];
        check(dut.g_array[0].u_xbar.cells[p][j*32 +: 32] == smp[p][j], $sformatf("sample %0d.%0d stored", p, j));
      end
      avg[p] = sum >>> 3;
      begin
        int nsup;
        nsup = 0;
        for (int j = 0; j < SAMPLES; j++) if (smp[p][j] > THRESHOLD) nsup++;
        check(dut.g_array[0].u_xbar.cells[p][C_NSUP*32 +: 32] == 32'(nsup),
              $sformatf("period %0d: %0d samples above the threshold", p, nsup));
      end
      check(dut.g_array[0].u_xbar.cells[p][C_SUM*32 +: 32] == avg[p],
            $sformatf("period %0d average %0d, got %0d", p, avg[p],
                      $signed(dut.g_array[0].u_xbar.cells[p][C_SUM*32 +: 32])));
      check(dut.g_array[0].u_xbar.cells[p][C_FLAG*32 +: 32] == 32'(avg[p] > THRESHOLD),
            $sformatf("period %0d flag", p));
      if (avg[p] > THRESHOLD) begin count++; flag_steps += 642; end
    end
    check(io_value == 32'(count), $sformatf("count of periods above threshold %0d, got %0d", count, io_value));
    check(n_irq == PERIODS * SAMPLES + 0, $sformatf("%0d interrupts taken", n_irq));
    check(n_steps == exp_steps + flag_steps,
          $sformatf("crossbar steps %0d, expected %0d", n_steps, exp_steps + flag_steps));
    check(array_id == 1'b0, "no array switch below the threshold");
    $display("program words %0d, crossbar steps %0d", prog.size(), n_steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
