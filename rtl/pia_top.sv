// pia_top: standalone IMPLY processing-in-array microcontroller.
//
// Wires the control logic to its program counter and IO register, to the
// system memory (program memory, address bank, CSR bank, u-OP cache), and
// through one row decoder and two column decoders (drive columns and the
// IMPLY condition column) to N_ARRAYS memristive crossbar arrays. All
// arrays share the decoders; only the array named by the control logic's
// array-ID register is enabled, and the sense-amplifier outputs are
// multiplexed by the same ID.
//
// Outside world: a programming port loads the program memory and the CSR
// bank (mtvec, mstatus) while the core is held in reset; the peripheral
// (sensor) writes the IO register and so raises the interrupt, and reads
// the IO register after sio. Status outputs expose the PC, the current
// instruction, the last trap cause, the active array, and per-cycle strobes for crossbar steps,
// retired instructions, traps, sleep (wfi) and array switches.
module pia_top
  import pia_pkg::*;
#(
  parameter int unsigned N_ARRAYS       = 2,
  parameter int unsigned INSN_THRESHOLD = 1 << 20,
  parameter int unsigned AID_W          = (N_ARRAYS > 1) ? $clog2(N_ARRAYS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // programming port
  input  logic             prog_pm_we,
  input  logic [8:0]       prog_pm_addr,
  input  logic [XLEN-1:0]  prog_pm_wdata,
  input  logic             prog_csr_we,
  input  logic [4:0]       prog_csr_addr,
  input  logic [XLEN-1:0]  prog_csr_wdata,
  // peripheral sensor
  input  logic             periph_we,
  input  logic [XLEN-1:0]  periph_wdata,
  output logic [XLEN-1:0]  io_value,
  output logic [XLEN-1:0]  mcause,
  // status
  output logic [XLEN-1:0]  pc,
  output logic [XLEN-1:0]  insn,
  output logic [AID_W-1:0] array_id,
  output logic             xb_step,
  output logic             insn_done,
  output logic             trap_taken,
  output logic             sleeping,
  output logic             array_switch
);

  // program counter
  logic            pc_inc, pc_load;
  logic [XLEN-1:0] pc_target;
  // program memory
  logic [8:0]      pm_addr;
  logic [XLEN-1:0] pm_rdata;
  // address bank
  logic [4:0]      ab_ra_slot, ab_rb_slot, ab_rc_slot, ab_wr_slot;
  logic [XLEN-1:0] ab_ra_data, ab_rb_data, ab_rc_data, ab_wr_mask, ab_wr_data;
  logic            ab_set_en, ab_rst_en;
  // u-OP cache
  kernel_e         uc_kernel;
  logic [4:0]      uc_step;
  uop_t            uc_uop;
  // CSR bank
  logic            csr_trap, csr_mret, csr_mie;
  logic [XLEN-1:0] csr_trap_pc, csr_trap_cause, csr_mtvec, csr_mepc;
  // IO register
  logic            io_irq, io_core_we, io_irq_ack;
  logic [XLEN-1:0] io_core_wdata;
  // crossbar side
  xb_op_e                xb_op;
  logic [8:0]            row_start, row_num;
  logic [5:0]            row_stride;
  logic                  row_single;
  logic [3:0][COL_W-1:0] cd_idx;
  logic [3:0]            cd_vld;
  logic [1:0]            cd_wen;
  logic [1:0][3:0]       cd_widx;
  logic [1:0][XLEN-1:0]  cd_wbits;
  logic [COL_W-1:0]      cond_idx;
  logic                  cond_vld;
  logic [8:0]            rd_row;
  logic [3:0]            rd_word;
  logic [XLEN-1:0]       rd_data;
  logic [ROWS-1:0]       row_en;
  logic [COLS-1:0]       col_mask, cond_mask;
  logic [XLEN-1:0]       arr_rd [N_ARRAYS];

  program_counter u_pc (
    .clk, .rst_n, .inc(pc_inc), .load(pc_load), .target(pc_target), .pc(pc)
  );

  program_memory #(.DEPTH(512)) u_pmem (
    .clk, .we(prog_pm_we), .waddr(prog_pm_addr), .wdata(prog_pm_wdata),
    .raddr(pm_addr), .rdata(pm_rdata)
  );

  address_bank #(.ENTRIES(32)) u_abank (
    .clk, .set_en(ab_set_en), .rst_en(ab_rst_en), .wr_slot(ab_wr_slot),
    .wr_mask(ab_wr_mask), .wr_data(ab_wr_data),
    .ra_slot(ab_ra_slot), .rb_slot(ab_rb_slot), .rc_slot(ab_rc_slot),
    .ra_data(ab_ra_data), .rb_data(ab_rb_data), .rc_data(ab_rc_data)
  );

  csr_bank #(.ENTRIES(32)) u_csr (
    .clk, .cfg_we(prog_csr_we), .cfg_addr(prog_csr_addr), .cfg_wdata(prog_csr_wdata),
    .trap(csr_trap), .trap_pc(csr_trap_pc), .trap_cause(csr_trap_cause), .mret(csr_mret),
    .mtvec(csr_mtvec), .mepc(csr_mepc), .mcause(mcause), .mie(csr_mie)
  );

  uop_cache u_ucache (.kernel(uc_kernel), .step(uc_step), .uop(uc_uop));

  io_register u_io (
    .clk, .rst_n, .periph_we, .periph_wdata, .core_we(io_core_we),
    .core_wdata(io_core_wdata), .irq_ack(io_irq_ack), .q(io_value), .irq(io_irq)
  );

  control_logic #(.N_ARRAYS(N_ARRAYS), .INSN_THRESHOLD(INSN_THRESHOLD), .AID_W(AID_W)) u_ctrl (
    .clk, .rst_n,
    .pc, .pc_inc, .pc_load, .pc_target,
    .pm_addr, .pm_rdata,
    .ab_ra_slot, .ab_rb_slot, .ab_rc_slot, .ab_ra_data, .ab_rb_data, .ab_rc_data,
    .ab_set_en, .ab_rst_en, .ab_wr_slot, .ab_wr_mask, .ab_wr_data,
    .uc_kernel, .uc_step, .uc_uop,
    .csr_trap, .csr_trap_pc, .csr_trap_cause, .csr_mret, .csr_mtvec, .csr_mepc, .csr_mie,
    .io_q(io_value), .io_irq, .io_core_we, .io_core_wdata, .io_irq_ack,
    .xb_op, .row_start, .row_num, .row_stride, .row_single,
    .cd_idx, .cd_vld, .cd_wen, .cd_widx, .cd_wbits, .cond_idx, .cond_vld,
    .rd_row, .rd_word, .rd_data, .array_id,
    .xb_step, .insn_done, .trap_taken, .sleeping, .array_switch, .ir_out(insn)
  );

  row_decoder #(.ROWS_P(ROWS)) u_rowdec (
    .start_row(row_start), .num_rows(row_num), .stride(row_stride),
    .single(row_single), .row_en
  );

  column_decoder #(.COLS_P(COLS)) u_coldec (
    .col_idx(cd_idx), .col_vld(cd_vld), .word_en(cd_wen), .word_idx(cd_widx),
    .word_bits(cd_wbits), .mask(col_mask)
  );

  column_decoder #(.COLS_P(COLS)) u_conddec (
    .col_idx({{(3*COL_W){1'b0}}, cond_idx}), .col_vld({3'b000, cond_vld}),
    .word_en(2'b00), .word_idx('0), .word_bits('0), .mask(cond_mask)
  );

  for (genvar g = 0; g < N_ARRAYS; g++) begin : g_array
    crossbar_array #(.ROWS_P(ROWS), .DATA_COLS_P(DATA_COLS), .WORK_COLS_P(WORK_COLS)) u_xbar (
      .clk, .en(int'(array_id) == g), .op(xb_op), .row_en, .col_mask, .cond_mask,
      .rd_row, .rd_word, .rd_data(arr_rd[g])
    );
  end

  assign rd_data = arr_rd[array_id];

endmodule
