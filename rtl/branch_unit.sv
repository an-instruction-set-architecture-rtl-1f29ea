// branch_unit: the CMOS comparator that decides conditional branches.
//
// Branches are not computed in the array: the control logic reads both
// operands with the sense amplifiers and this comparator evaluates the
// RV32I condition selected by funct3 (beq 000, bne 001, blt 100, bge 101,
// bltu 110, bgeu 111). Combinational; unused funct3 codes never branch.
module branch_unit
  import pia_pkg::*;
(
  input  logic [2:0]      funct3,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  output logic            take
);

  always_comb begin
    unique case (funct3)
      3'b000:  take = (a == b);
      3'b001:  take = (a != b);
      3'b100:  take = ($signed(a) <  $signed(b));
      3'b101:  take = ($signed(a) >= $signed(b));
      3'b110:  take = (a <  b);
      3'b111:  take = (a >= b);
      default: take = 1'b0;
    endcase
  end

endmodule
