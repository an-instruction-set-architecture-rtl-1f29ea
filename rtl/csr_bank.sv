// csr_bank: the control and status bank (32 x 32 bits) of the system memory.
//
// Entries used by this design: 0 mstatus, 1 mtvec, 2 mepc, 3 mcause (the
// numbering is this design's; the rest of the bank is storage reachable
// only through the programming port). As in RISC-V machine mode, trap entry
// saves trap_pc in mepc and trap_cause in mcause, copies mstatus.MIE (bit 3)
// to MPIE (bit 7) and clears MIE; mret restores MIE from MPIE and sets MPIE.
// The programming port (cfg_we) sets mtvec and mstatus before the run; it
// has priority over trap and mret in the same cycle. Zero at power-up.
module csr_bank
  import pia_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic                       clk,
  input  logic                       cfg_we,
  input  logic [$clog2(ENTRIES)-1:0] cfg_addr,
  input  logic [XLEN-1:0]            cfg_wdata,
  input  logic                       trap,
  input  logic [XLEN-1:0]            trap_pc,
  input  logic [XLEN-1:0]            trap_cause,
  input  logic                       mret,
  output logic [XLEN-1:0]            mtvec,
  output logic [XLEN-1:0]            mepc,
  output logic [XLEN-1:0]            mcause,
  output logic                       mie
);

  logic [XLEN-1:0] bank [ENTRIES];

  initial begin
    for (int e = 0; e < ENTRIES; e++) bank[e] = '0;
  end

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      bank[cfg_addr] <= cfg_wdata;
    end else if (trap) begin
      bank[CSR_MEPC]      <= trap_pc;
      bank[CSR_MCAUSE]    <= trap_cause;
      bank[CSR_MSTATUS][7] <= bank[CSR_MSTATUS][3];
      bank[CSR_MSTATUS][3] <= 1'b0;
    end else if (mret) begin
      bank[CSR_MSTATUS][3] <= bank[CSR_MSTATUS][7];
      bank[CSR_MSTATUS][7] <= 1'b1;
    end
  end

  assign mtvec  = bank[CSR_MTVEC];
  assign mepc   = bank[CSR_MEPC];
  assign mcause = bank[CSR_MCAUSE];
  assign mie    = bank[CSR_MSTATUS][3];

endmodule
