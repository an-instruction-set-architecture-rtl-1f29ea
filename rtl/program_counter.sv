// program_counter: the volatile 32-bit CMOS program counter.
//
// Cleared to zero by reset (each run of the program starts at address 0).
// In a cycle with load = 1 it takes target (jumps, taken branches, trap
// entry, mret, array switch); otherwise inc = 1 advances it by 4, one
// instruction. load has priority over inc.
module program_counter
  import pia_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            inc,
  input  logic            load,
  input  logic [XLEN-1:0] target,
  output logic [XLEN-1:0] pc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    pc <= '0;
    else if (load) pc <= target;
    else if (inc)  pc <= pc + 32'd4;
  end

endmodule
