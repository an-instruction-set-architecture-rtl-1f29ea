// control_logic: fetch / decode / execute controller of the IMPLY
// processing-in-array core.
//
// Every instruction is fetched from the program memory at the PC, decoded,
// and its rs1 (and, where used, rs2 and rd/address) fields index the
// address bank. The address configuration read from the bank names the
// operand words (Column A, Column B) and the set of active rows (Start Row,
// Num Rows, Stride). Execution then takes one of these paths:
//
//  * In-array algorithms (and/or/xor/add/sub/sll/srl/sra/slt/sltu/mv and the
//    immediate forms): a sequencer walks over the bits of the operands and,
//    for every bit, replays a per-bit algorithm from the u-OP cache, one
//    crossbar step per clock. The cache holds role-level steps; this module
//    binds the roles (a, b, carry, select, mux source, w1..w3) to physical
//    columns. All active rows compute in parallel.
//      - bitwise/add/sub/copy: bit 0 .. 31, result in B (carry in work
//        memristor 3, cleared in the first step of bit 0).
//      - shifts: log2 stages j; right shifts walk i upwards, left shifts
//        downwards, using the 2:1 multiplexer or the zero-fill auxiliary
//        step; srl/sll/sra shift A in place by the low 5 bits of B.
//      - sltu: comparator on the MSB, then for each lower bit a comparator,
//        two ANDs and an OR, accumulating "less" in b_i and "equal" in a
//        work memristor that alternates between w0 and w3; a final RESET
//        clears b[31:1]. slt runs this on bits 30..0, then combines the
//        sign bits as (E31 + L31) -> E31 & sltu; the final RESET is shared.
//  * Immediate writes (li, lui, the operand of immediate instructions, lio,
//    jal/jalr return address): two crossbar steps, RESET of the 0 bits then
//    SET of the 1 bits, on the selected word of all active rows.
//  * Reads through the sense amplifiers (branches, jalr base, la, sio), one
//    cycle per word; branch conditions are evaluated by the CMOS comparator.
//  * Address-bank writes (la, lai, laui): a SET cycle then a RESET cycle.
//  * System: wfi sleeps until the IO interrupt, mret returns through mepc,
//    ebreak and unknown instructions trap; interrupts are taken before a
//    fetch when mstatus.MIE is set.
//
// Active array: an array-ID register selects which crossbar array executes.
// It is incremented after INSN_THRESHOLD executed instructions, and by the
// nxt_array instruction, which also restarts the program at PC 0 (this
// restart, the instruction's encoding, and the threshold value are choices
// of this design).
//
// Timing: fetch 1 cycle, decode 1 cycle, then the execution steps, then one
// cycle that advances the PC. xb_step marks every cycle that applies a
// crossbar or address-bank pulse, so the number of steps of an instruction
// is directly observable. The step counts follow the ISA's algorithms; see
// the README for the per-instruction numbers. Operand-step counts differ
// from the ISA's table only for sra/srai (see below).
//
// sra: the ISA's routine updates bits 0 .. n-2 in every stage (bit n-1 is
// the sign bit and stays), which gives 8*(n-1)*log2(n) steps; its table
// quotes 8*n*log2(n). The routine is followed.
//
// Lint: verilator reports unused bits of the latched address configurations
// (cfg_w, cfg_rb, ra_cfg, rc_cfg): each use needs only some fields (a write
// needs Column A and the rows, a branch's second operand only Column A and
// Start Row, a jalr/la read only the start row and word), and the whole
// 32-bit configuration is kept for clarity. Bit 5 of the bit counters passed
// to acol/bcol is unused because the counters also count to 32 as a loop
// end marker. None of these is a circuit problem.
module control_logic
  import pia_pkg::*;
#(
  parameter int unsigned N_ARRAYS       = 2,
  parameter int unsigned INSN_THRESHOLD = 1 << 20,
  parameter int unsigned AID_W          = (N_ARRAYS > 1) ? $clog2(N_ARRAYS) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // program counter
  input  logic [XLEN-1:0]       pc,
  output logic                  pc_inc,
  output logic                  pc_load,
  output logic [XLEN-1:0]       pc_target,
  // program memory
  output logic [8:0]            pm_addr,
  input  logic [XLEN-1:0]       pm_rdata,
  // address bank
  output logic [4:0]            ab_ra_slot,
  output logic [4:0]            ab_rb_slot,
  output logic [4:0]            ab_rc_slot,
  input  logic [XLEN-1:0]       ab_ra_data,
  input  logic [XLEN-1:0]       ab_rb_data,
  input  logic [XLEN-1:0]       ab_rc_data,
  output logic                  ab_set_en,
  output logic                  ab_rst_en,
  output logic [4:0]            ab_wr_slot,
  output logic [XLEN-1:0]       ab_wr_mask,
  output logic [XLEN-1:0]       ab_wr_data,
  // u-OP cache
  output kernel_e               uc_kernel,
  output logic [4:0]            uc_step,
  input  uop_t                  uc_uop,
  // CSR bank
  output logic                  csr_trap,
  output logic [XLEN-1:0]       csr_trap_pc,
  output logic [XLEN-1:0]       csr_trap_cause,
  output logic                  csr_mret,
  input  logic [XLEN-1:0]       csr_mtvec,
  input  logic [XLEN-1:0]       csr_mepc,
  input  logic                  csr_mie,
  // IO register
  input  logic [XLEN-1:0]       io_q,
  input  logic                  io_irq,
  output logic                  io_core_we,
  output logic [XLEN-1:0]       io_core_wdata,
  output logic                  io_irq_ack,
  // crossbar arrays, through the row and column decoders
  output xb_op_e                xb_op,
  output logic [8:0]            row_start,
  output logic [8:0]            row_num,
  output logic [5:0]            row_stride,
  output logic                  row_single,
  output logic [3:0][COL_W-1:0] cd_idx,
  output logic [3:0]            cd_vld,
  output logic [1:0]            cd_wen,
  output logic [1:0][3:0]       cd_widx,
  output logic [1:0][XLEN-1:0]  cd_wbits,
  output logic [COL_W-1:0]      cond_idx,
  output logic                  cond_vld,
  output logic [8:0]            rd_row,
  output logic [3:0]            rd_word,
  input  logic [XLEN-1:0]       rd_data,
  output logic [AID_W-1:0]      array_id,
  // status
  output logic                  xb_step,
  output logic                  insn_done,
  output logic                  trap_taken,
  output logic                  sleeping,
  output logic                  array_switch,
  output logic [XLEN-1:0]       ir_out
);

  // ------------------------------------------------------------ state
  typedef enum logic [3:0] {
    S_FETCH, S_DECODE, S_WR0, S_WR1, S_RDA, S_RDB, S_BR, S_AB0, S_AB1,
    S_SEQ, S_CLR, S_WFI, S_NEXT, S_JUMP
  } state_e;

  typedef enum logic [1:0] { SQ_BIT, SQ_SHIFT, SQ_CMP } seq_e;
  typedef enum logic [1:0] { SH_L, SH_R, SH_RA } shdir_e;
  typedef enum logic [1:0] { P_FIRST, P_LOOP, P_MSB } cphase_e;

  // what follows the immediate write / reads
  typedef enum logic [2:0] { AF_NEXT, AF_SEQ, AF_JUMP, AF_JALR_WR, AF_AB, AF_SIO, AF_BR } after_e;

  state_e    state;
  logic [XLEN-1:0] ir;
  addr_cfg_t cfg_a, cfg_w;            // operand configuration, write target
  after_e    after;
  // immediate write registers (two word patterns)
  logic [1:0]           w_en;
  logic [1:0][3:0]      w_word;
  logic [1:0][XLEN-1:0] w_val;
  logic [1:0][XLEN-1:0] w_fmask;
  logic                 w_single;
  // address-bank write
  logic [4:0]      abw_slot;
  logic [XLEN-1:0] abw_mask, abw_data;
  // reads
  logic [XLEN-1:0] opa, opb;
  addr_cfg_t       cfg_rb;
  logic [XLEN-1:0] jump_target;
  // sequencer
  seq_e      sq;
  kernel_e   kern;
  shdir_e    shdir;
  cphase_e   cph;
  logic      cmp_signed;
  logic [4:0] step;
  logic [5:0] bi;       // bit index / shift walk counter
  logic [2:0] sj;       // shift stage
  logic [1:0] sub;      // sub-step within a comparator iteration
  logic       ea_sel;   // comparator: equality accumulator in w3 (1) or w0 (0)
  // array selection
  logic [AID_W-1:0] aid;
  logic [31:0]      insn_cnt;

  // ------------------------------------------------------------ decode
  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [6:0] funct7;
  logic [XLEN-1:0] imm_i, imm_u, imm_b, imm_j;
  logic illegal;
  addr_cfg_t ra_cfg, rc_cfg;
  assign ra_cfg = addr_cfg_t'(ab_ra_data);
  assign rc_cfg = addr_cfg_t'(ab_rc_data);
  assign opcode = ir[6:0];
  assign funct3 = ir[14:12];
  assign funct7 = ir[31:25];
  assign imm_i  = {{20{ir[31]}}, ir[31:20]};
  assign imm_u  = {ir[31:12], 12'b0};
  assign imm_b  = {{19{ir[31]}}, ir[31], ir[7], ir[30:25], ir[11:8], 1'b0};
  assign imm_j  = {{11{ir[31]}}, ir[31], ir[19:12], ir[20], ir[30:21], 1'b0};

  // Address-bank read ports: rs1 field, rs2 field, rd/address field.
  assign ab_ra_slot = ir[19:15];
  assign ab_rb_slot = ir[24:20];
  assign ab_rc_slot = ir[11:7];
  assign pm_addr    = pc[10:2];
  assign array_id   = aid;
  assign ir_out     = ir;

  // Branch comparator (CMOS).
  logic br_take;
  branch_unit u_branch (.funct3(funct3), .a(opa), .b(opb), .take(br_take));

  // ------------------------------------------------------------ role binding
  localparam int unsigned TOPBIT = XLEN - 1;
  logic [COL_W-1:0] rc [N_ROLES];   // column of each role for the current step
  logic             first_carry;    // first step of an add/sub: also clear carry

  function automatic logic [COL_W-1:0] acol(input logic [5:0] i);
    return data_col(cfg_a.col_a, i[4:0]);
  endfunction
  function automatic logic [COL_W-1:0] bcol(input logic [5:0] i);
    return data_col(cfg_a.col_b, i[4:0]);
  endfunction

  logic [5:0] sh_i, sh_src, sh_dist;
  logic       sh_aux;
  kernel_e    cur_kernel;

  always_comb begin
    for (int r = 0; r < N_ROLES; r++) rc[r] = '0;
    cur_kernel  = kern;
    first_carry = 1'b0;
    sh_dist     = 6'd1 << sj;
    sh_i        = (shdir == SH_L) ? 6'(TOPBIT) - bi : bi;
    sh_src      = '0;
    sh_aux      = 1'b0;
    unique case (shdir)
      SH_L:  begin sh_aux = (sh_i < sh_dist);  sh_src = sh_i - sh_dist; end
      SH_R:  begin sh_aux = (sh_i + sh_dist > 6'(TOPBIT)); sh_src = sh_i + sh_dist; end
      SH_RA: begin sh_src = (sh_i + sh_dist > 6'(TOPBIT)) ? 6'(TOPBIT) : sh_i + sh_dist; end
      default: ;
    endcase

    unique case (sq)
      SQ_BIT: begin
        rc[R_A]  = acol(bi);
        rc[R_B]  = bcol(bi);
        rc[R_C]  = work_col(3'd3);
        rc[R_W1] = work_col(3'd0);
        rc[R_W2] = work_col(3'd1);
        rc[R_W3] = work_col(3'd2);
        first_carry = (kern == K_FA || kern == K_FS) && bi == 6'd0 && step == 5'd0;
      end
      SQ_SHIFT: begin
        cur_kernel = sh_aux ? K_AUX : K_MUX;
        rc[R_A]  = acol(sh_i);
        rc[R_X]  = acol(sh_src);
        rc[R_S]  = bcol({3'b0, sj});
        rc[R_W1] = work_col(3'd0);
        rc[R_W2] = work_col(3'd1);
      end
      default: begin // SQ_CMP
        unique case (cph)
          P_FIRST: begin
            cur_kernel = K_CMP;
            rc[R_A]  = acol(bi);
            rc[R_B]  = bcol(bi);
            rc[R_W1] = work_col(3'd0);
            rc[R_W2] = work_col(3'd1);
            rc[R_W3] = work_col(3'd2);
          end
          P_LOOP: begin
            unique case (sub)
              2'd0: begin
                cur_kernel = K_CMP;
                rc[R_A]  = acol(bi);
                rc[R_B]  = bcol(bi);
                rc[R_W1] = ea_sel ? work_col(3'd0) : work_col(3'd3);
                rc[R_W2] = work_col(3'd1);
                rc[R_W3] = work_col(3'd2);
              end
              2'd1: begin   // L_i' = E_acc & L_i
                cur_kernel = K_AND;
                rc[R_A]  = ea_sel ? work_col(3'd3) : work_col(3'd0);
                rc[R_B]  = bcol(bi);
                rc[R_W1] = work_col(3'd1);
              end
              2'd2: begin   // L_i'' = L_(i+1) + L_i'
                cur_kernel = K_OR;
                rc[R_A]  = bcol(bi + 6'd1);
                rc[R_B]  = bcol(bi);
                rc[R_W1] = work_col(3'd1);
              end
              default: begin // E_acc' = E_acc & E_i
                cur_kernel = K_AND;
                rc[R_A]  = ea_sel ? work_col(3'd3) : work_col(3'd0);
                rc[R_B]  = ea_sel ? work_col(3'd0) : work_col(3'd3);
                rc[R_W1] = work_col(3'd1);
              end
            endcase
          end
          default: begin // P_MSB (slt only)
            unique case (sub)
              2'd0: begin
                cur_kernel = K_CMP;
                rc[R_A]  = acol(6'(TOPBIT));
                rc[R_B]  = bcol(6'(TOPBIT));
                rc[R_W1] = work_col(3'd0);
                rc[R_W2] = work_col(3'd1);
                rc[R_W3] = work_col(3'd2);
              end
              2'd1: begin   // b31 = E31 + L31
                cur_kernel = K_OR;
                rc[R_A]  = work_col(3'd0);
                rc[R_B]  = bcol(6'(TOPBIT));
                rc[R_W1] = work_col(3'd1);
              end
              2'd2: begin   // b0 = E31 & sltu(low bits)
                cur_kernel = K_AND;
                rc[R_A]  = work_col(3'd0);
                rc[R_B]  = bcol(6'd0);
                rc[R_W1] = work_col(3'd1);
              end
              default: begin // b0 = b31 -> b0
                cur_kernel = K_IMP;
                rc[R_X]  = bcol(6'(TOPBIT));
                rc[R_B]  = bcol(6'd0);
              end
            endcase
          end
        endcase
      end
    endcase
  end

  assign uc_kernel = cur_kernel;
  assign uc_step   = step;

  // ------------------------------------------------------------ outputs
  always_comb begin
    pc_inc         = 1'b0;
    pc_load        = 1'b0;
    pc_target      = '0;
    ab_set_en      = 1'b0;
    ab_rst_en      = 1'b0;
    ab_wr_slot     = abw_slot;
    ab_wr_mask     = abw_mask;
    ab_wr_data     = abw_data;
    csr_trap       = 1'b0;
    csr_trap_pc    = pc;
    csr_trap_cause = MCAUSE_EXT_IRQ;
    csr_mret       = 1'b0;
    io_core_we     = 1'b0;
    io_core_wdata  = rd_data;
    io_irq_ack     = 1'b0;
    xb_op          = XB_NOP;
    row_start      = cfg_a.start_row;
    row_num        = cfg_a.num_rows;
    row_stride     = cfg_a.stride;
    row_single     = 1'b0;
    cd_idx         = '0;
    cd_vld         = '0;
    cd_wen         = '0;
    cd_widx        = w_word;
    cd_wbits       = '0;
    cond_idx       = '0;
    cond_vld       = 1'b0;
    rd_row         = cfg_a.start_row;
    rd_word        = cfg_a.col_a;
    insn_done      = 1'b0;
    trap_taken     = 1'b0;
    sleeping       = (state == S_WFI);

    unique case (state)
      S_FETCH: begin
        if (io_irq && csr_mie) begin
          csr_trap   = 1'b1;
          io_irq_ack = 1'b1;
          pc_load    = 1'b1;
          pc_target  = csr_mtvec;
          trap_taken = 1'b1;
        end
      end
      S_WR0, S_WR1: begin
        xb_op      = (state == S_WR0) ? XB_RESET : XB_SET;
        row_start  = cfg_w.start_row;
        row_num    = cfg_w.num_rows;
        row_stride = cfg_w.stride;
        row_single = w_single;
        cd_wen     = w_en;
        for (int k = 0; k < 2; k++)
          cd_wbits[k] = (state == S_WR0) ? (w_fmask[k] & ~w_val[k]) : (w_fmask[k] & w_val[k]);
      end
      S_RDA: begin
        rd_row     = cfg_a.start_row;
        rd_word    = cfg_a.col_a;
        io_core_we = (after == AF_SIO);   // sio: sensed word to the IO register
      end
      S_RDB: begin
        rd_row  = cfg_rb.start_row;
        rd_word = cfg_rb.col_a;
      end
      S_AB0: ab_set_en = 1'b1;
      S_AB1: ab_rst_en = 1'b1;
      S_SEQ: begin
        unique case (uc_uop.kind)
          U_FALSE: begin
            xb_op     = XB_RESET;
            cd_idx[0] = rc[uc_uop.q];
            cd_idx[1] = rc[uc_uop.q2];
            cd_idx[2] = rc[uc_uop.q3];
            cd_idx[3] = rc[R_C];
            cd_vld    = {first_carry, uc_uop.q3 != R_NONE, uc_uop.q2 != R_NONE, uc_uop.q != R_NONE};
          end
          U_IMPLY: begin
            xb_op     = XB_IMPLY;
            cond_idx  = rc[uc_uop.p];
            cond_vld  = 1'b1;
            cd_idx[0] = rc[uc_uop.q];
            cd_vld    = 4'b0001;
          end
          default: ;
        endcase
      end
      S_CLR: begin      // reset L_31 .. L_1 of the comparison
        xb_op       = XB_RESET;
        cd_wen      = 2'b01;
        cd_widx[0]  = cfg_a.col_b;
        cd_wbits[0] = 32'hFFFF_FFFE;
      end
      S_BR: begin
        if (br_take) begin
          pc_load   = 1'b1;
          pc_target = pc + imm_b;
        end else begin
          pc_inc = 1'b1;
        end
        insn_done = 1'b1;
      end
      S_JUMP: begin
        pc_load   = 1'b1;
        pc_target = jump_target;
        insn_done = 1'b1;
      end
      S_NEXT: begin
        pc_inc    = 1'b1;
        insn_done = 1'b1;
      end
      S_DECODE: begin
        // system instructions that finish in decode
        if (opcode == OPC_SYSTEM && ir == INSN_MRET) begin
          csr_mret  = 1'b1;
          pc_load   = 1'b1;
          pc_target = csr_mepc;
          insn_done = 1'b1;
        end else if (opcode == OPC_CUST2 && funct3 == F3_NXT) begin
          pc_load   = 1'b1;
          pc_target = '0;
          insn_done = 1'b1;
        end else if (illegal || (opcode == OPC_SYSTEM && ir == INSN_EBREAK)) begin
          csr_trap       = 1'b1;
          csr_trap_cause = illegal ? MCAUSE_ILLEGAL : MCAUSE_BREAK;
          pc_load        = 1'b1;
          pc_target      = csr_mtvec;
          trap_taken     = 1'b1;
          insn_done      = 1'b1;
        end
      end
      default: ;
    endcase
  end

  assign xb_step = (xb_op != XB_NOP) || ab_set_en || ab_rst_en;

  // ------------------------------------------------------------ legality
  always_comb begin
    unique case (opcode)
      OPC_OP:     illegal = !(funct7 == 7'b0 || (funct7 == 7'b0100000 && (funct3 == 3'b000 || funct3 == 3'b101)));
      OPC_OPIMM:  illegal = (funct3 == 3'b001 && funct7 != 7'b0) ||
                            (funct3 == 3'b101 && funct7 != 7'b0 && funct7 != 7'b0100000);
      OPC_LUI, OPC_AUIPC, OPC_JAL, OPC_LAUI: illegal = 1'b0;
      OPC_JALR:   illegal = (funct3 != 3'b000);
      OPC_BRANCH: illegal = (funct3 == 3'b010 || funct3 == 3'b011);
      OPC_CUST0:  illegal = (funct3 > F3_LAI);
      OPC_CUST2:  illegal = (funct3 > F3_NXT);
      OPC_SYSTEM: illegal = !(ir == INSN_WFI || ir == INSN_MRET || ir == INSN_EBREAK);
      default:    illegal = 1'b1;
    endcase
  end

  // ------------------------------------------------------------ sequencing
  task automatic start_seq(input seq_e s, input kernel_e k);
    sq   <= s;
    kern <= k;
    step <= '0;
    bi   <= '0;
    sj   <= '0;
    sub  <= '0;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_FETCH;
      ir          <= '0;
      cfg_a       <= '0;
      cfg_w       <= '0;
      cfg_rb      <= '0;
      after       <= AF_NEXT;
      w_en        <= '0;
      w_word      <= '0;
      w_val       <= '0;
      w_fmask     <= '0;
      w_single    <= 1'b0;
      abw_slot    <= '0;
      abw_mask    <= '0;
      abw_data    <= '0;
      opa         <= '0;
      opb         <= '0;
      jump_target <= '0;
      sq          <= SQ_BIT;
      kern        <= K_AND;
      shdir       <= SH_R;
      cph         <= P_FIRST;
      cmp_signed  <= 1'b0;
      step        <= '0;
      bi          <= '0;
      sj          <= '0;
      sub         <= '0;
      ea_sel      <= 1'b0;
      aid         <= '0;
      insn_cnt    <= '0;
      array_switch <= 1'b0;
    end else begin
      array_switch <= 1'b0;
      // count executed instructions and switch arrays at the threshold
      if (insn_done) begin
        if (opcode == OPC_CUST2 && funct3 == F3_NXT && state == S_DECODE) begin
          insn_cnt     <= '0;
          aid          <= (int'(aid) == N_ARRAYS - 1) ? '0 : aid + 1'b1;
          array_switch <= 1'b1;
        end else if (insn_cnt == INSN_THRESHOLD - 1) begin
          insn_cnt     <= '0;
          aid          <= (int'(aid) == N_ARRAYS - 1) ? '0 : aid + 1'b1;
          array_switch <= 1'b1;
        end else begin
          insn_cnt <= insn_cnt + 1;
        end
      end

      unique case (state)
        S_FETCH: begin
          if (!(io_irq && csr_mie)) begin
            ir    <= pm_rdata;
            state <= S_DECODE;
          end
        end

        S_DECODE: begin
          cfg_a    <= addr_cfg_t'(ab_ra_data);
          cfg_rb   <= addr_cfg_t'(ab_rb_data);
          cfg_w    <= addr_cfg_t'(ab_ra_data);
          w_single <= 1'b0;
          w_en     <= 2'b01;
          w_word   <= {4'd0, ra_cfg.col_a};
          w_fmask  <= {32'd0, 32'hFFFF_FFFF};
          after    <= AF_NEXT;
          state    <= S_NEXT;
          if (illegal) begin
            state <= S_FETCH;
          end else begin
            unique case (opcode)
              OPC_OP: begin
                unique case (funct3)
                  3'b000: start_seq(SQ_BIT, funct7[5] ? K_FS : K_FA);
                  3'b100: start_seq(SQ_BIT, K_XOR);
                  3'b110: start_seq(SQ_BIT, K_OR);
                  3'b111: start_seq(SQ_BIT, K_AND);
                  3'b010, 3'b011: begin
                    start_seq(SQ_CMP, K_CMP);
                    cmp_signed <= (funct3 == 3'b010);
                    cph        <= P_FIRST;
                    bi         <= (funct3 == 3'b010) ? 6'(TOPBIT - 1) : 6'(TOPBIT);
                  end
                  default: begin // 001 sll, 101 srl/sra
                    start_seq(SQ_SHIFT, K_MUX);
                    shdir <= (funct3 == 3'b001) ? SH_L : (funct7[5] ? SH_RA : SH_R);
                  end
                endcase
                state <= S_SEQ;
              end
              OPC_OPIMM: begin
                // operand preparation: immediate into A (addi, boolean) or
                // B (slti/sltiu, shifts), then the register-form algorithm
                w_val[0] <= imm_i;
                if (funct3 == 3'b010 || funct3 == 3'b011 || funct3 == 3'b001 || funct3 == 3'b101)
                  w_word[0] <= ra_cfg.col_b;
                unique case (funct3)
                  3'b000: start_seq(SQ_BIT, K_FA);
                  3'b100: start_seq(SQ_BIT, K_XOR);
                  3'b110: start_seq(SQ_BIT, K_OR);
                  3'b111: start_seq(SQ_BIT, K_AND);
                  3'b010, 3'b011: begin
                    start_seq(SQ_CMP, K_CMP);
                    cmp_signed <= (funct3 == 3'b010);
                    cph        <= P_FIRST;
                    bi         <= (funct3 == 3'b010) ? 6'(TOPBIT - 1) : 6'(TOPBIT);
                  end
                  default: begin
                    start_seq(SQ_SHIFT, K_MUX);
                    shdir <= (funct3 == 3'b001) ? SH_L : (funct7[5] ? SH_RA : SH_R);
                  end
                endcase
                after <= AF_SEQ;
                state <= S_WR0;
              end
              OPC_AUIPC: begin
                // imm<<12 into A and the PC into B in the same two steps
                cfg_a    <= addr_cfg_t'(ab_rc_data);
                cfg_w    <= addr_cfg_t'(ab_rc_data);
                w_en     <= 2'b11;
                w_word   <= {rc_cfg.col_b, rc_cfg.col_a};
                w_val    <= {pc, imm_u};
                w_fmask  <= {32'hFFFF_FFFF, 32'hFFFF_FFFF};
                start_seq(SQ_BIT, K_FA);
                after    <= AF_SEQ;
                state    <= S_WR0;
              end
              OPC_LUI: begin
                cfg_w     <= addr_cfg_t'(ab_rc_data);
                w_word[0] <= rc_cfg.col_a;
                w_val[0]  <= imm_u;
                w_fmask[0] <= 32'hFFFF_F000;
                state     <= S_WR0;
              end
              OPC_JAL: begin
                cfg_w       <= addr_cfg_t'(ab_rc_data);
                w_single    <= 1'b1;
                w_word[0]   <= rc_cfg.col_a;
                w_val[0]    <= pc + 32'd4;
                jump_target <= pc + imm_j;
                after       <= AF_JUMP;
                state       <= S_WR0;
              end
              OPC_JALR: begin
                cfg_w     <= addr_cfg_t'(ab_rc_data);
                w_single  <= 1'b1;
                w_word[0] <= rc_cfg.col_a;
                w_val[0]  <= pc + 32'd4;
                after     <= AF_JALR_WR;
                state     <= S_RDA;
              end
              OPC_BRANCH: begin
                after <= AF_BR;
                state <= S_RDA;
              end
              OPC_CUST0: begin
                unique case (funct3)
                  F3_LI: begin
                    w_val[0]   <= imm_i;
                    w_fmask[0] <= 32'h0000_0FFF;
                    state      <= S_WR0;
                  end
                  F3_MV: begin
                    start_seq(SQ_BIT, K_COPY);
                    state <= S_SEQ;
                  end
                  F3_LA: begin
                    abw_slot <= ir[11:7];
                    abw_mask <= 32'hFFFF_FFFF;
                    after    <= AF_AB;
                    state    <= S_RDA;
                  end
                  default: begin // F3_LAI
                    abw_slot <= ir[11:7];
                    abw_mask <= 32'h0000_0FFF;
                    abw_data <= {20'd0, ir[31:20]};
                    state    <= S_AB0;
                  end
                endcase
              end
              OPC_LAUI: begin
                abw_slot <= ir[11:7];
                abw_mask <= 32'hFFFF_F000;
                abw_data <= imm_u;
                state    <= S_AB0;
              end
              OPC_CUST2: begin
                unique case (funct3)
                  F3_LIO: begin
                    w_val[0] <= io_q;
                    state    <= S_WR0;
                  end
                  F3_SIO: begin
                    after <= AF_SIO;
                    state <= S_RDA;
                  end
                  default: state <= S_FETCH;   // nxt_array, done in decode
                endcase
              end
              default: begin // OPC_SYSTEM
                if (ir == INSN_WFI) state <= S_WFI;
                else                state <= S_FETCH; // mret / ebreak done in decode
              end
            endcase
          end
        end

        S_WR0: state <= S_WR1;
        S_WR1: begin
          unique case (after)
            AF_SEQ:  state <= S_SEQ;
            AF_JUMP: state <= S_JUMP;
            default: state <= S_NEXT;
          endcase
        end

        S_RDA: begin
          opa <= rd_data;
          unique case (after)
            AF_BR: state <= S_RDB;
            AF_JALR_WR: begin
              jump_target <= (rd_data + imm_i) & ~32'd1;
              after       <= AF_JUMP;
              state       <= S_WR0;
            end
            AF_AB: begin
              abw_data <= rd_data;
              state    <= S_AB0;
            end
            default: state <= S_NEXT;
          endcase
        end

        S_RDB: begin
          opb   <= rd_data;
          state <= S_BR;
        end

        S_BR:   state <= S_FETCH;
        S_JUMP: state <= S_FETCH;
        S_AB0:  state <= S_AB1;
        S_AB1:  state <= S_NEXT;

        S_SEQ: begin
          if (!uc_uop.last) begin
            step <= step + 5'd1;
          end else begin
            step <= '0;
            unique case (sq)
              SQ_BIT: begin
                if (bi == 6'(TOPBIT)) state <= S_NEXT;
                else                  bi    <= bi + 6'd1;
              end
              SQ_SHIFT: begin
                if (bi == ((shdir == SH_RA) ? 6'(TOPBIT - 1) : 6'(TOPBIT))) begin
                  bi <= '0;
                  if (sj == 3'(SHAMT_W - 1)) state <= S_NEXT;
                  else                       sj    <= sj + 3'd1;
                end else begin
                  bi <= bi + 6'd1;
                end
              end
              default: begin // SQ_CMP
                unique case (cph)
                  P_FIRST: begin
                    ea_sel <= 1'b0;
                    cph    <= P_LOOP;
                    sub    <= '0;
                    bi     <= bi - 6'd1;
                  end
                  P_LOOP: begin
                    if (sub != 2'd3) begin
                      sub <= sub + 2'd1;
                    end else begin
                      sub    <= '0;
                      ea_sel <= !ea_sel;
                      if (bi == 6'd0) begin
                        if (cmp_signed) cph   <= P_MSB;
                        else            state <= S_CLR;
                      end else begin
                        bi <= bi - 6'd1;
                      end
                    end
                  end
                  default: begin // P_MSB
                    if (sub != 2'd3) sub   <= sub + 2'd1;
                    else             state <= S_CLR;
                  end
                endcase
              end
            endcase
          end
        end

        S_CLR: state <= S_NEXT;

        S_WFI: if (io_irq) state <= S_NEXT;

        S_NEXT: state <= S_FETCH;

        default: state <= S_FETCH;
      endcase
    end
  end

endmodule
