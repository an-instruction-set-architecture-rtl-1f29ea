// address_bank: the 32-entry bank of 32-bit address configurations that
// stands in for the RISC-V register file.
//
// Each slot holds {col A, col B, start row, num rows, stride}. Three
// combinational read ports serve rs1 (operand addressing), rs2 (second
// branch operand) and rd (jalr return-address location, and the slot a
// write targets). The bank is a memristive array, so a write takes two
// cycles: a SET cycle (set_en) that sets the bits where wr_data is 1, then a
// RESET cycle (rst_en) that clears the bits where wr_data is 0, both only
// inside wr_mask (all 32 bits for la, bits 11:0 for lai, bits 31:12 for
// laui). Slot 0 is an ordinary slot. Contents are zero at power-up.
module address_bank
  import pia_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic                       clk,
  input  logic                       set_en,
  input  logic                       rst_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_slot,
  input  logic [XLEN-1:0]            wr_mask,
  input  logic [XLEN-1:0]            wr_data,
  input  logic [$clog2(ENTRIES)-1:0] ra_slot,
  input  logic [$clog2(ENTRIES)-1:0] rb_slot,
  input  logic [$clog2(ENTRIES)-1:0] rc_slot,
  output logic [XLEN-1:0]            ra_data,
  output logic [XLEN-1:0]            rb_data,
  output logic [XLEN-1:0]            rc_data
);

  logic [XLEN-1:0] bank [ENTRIES];

  initial begin
    for (int e = 0; e < ENTRIES; e++) bank[e] = '0;
  end

  always_ff @(posedge clk) begin
    if (set_en)      bank[wr_slot] <= bank[wr_slot] |  (wr_mask &  wr_data);
    else if (rst_en) bank[wr_slot] <= bank[wr_slot] & ~(wr_mask & ~wr_data);
  end

  assign ra_data = bank[ra_slot];
  assign rb_data = bank[rb_slot];
  assign rc_data = bank[rc_slot];

  assert property (@(posedge clk) !(set_en && rst_en))
    else $error("address_bank: SET and RESET in the same cycle");

endmodule
