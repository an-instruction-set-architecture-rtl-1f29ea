// program_memory: the 512 x 32-bit instruction store of the system memory.
//
// Read-only while the core runs: the control logic reads the word at raddr
// (PC[10:2]) combinationally in its fetch cycle. A programming port (we,
// waddr, wdata), an addition of this design, loads the program before the
// core is released from reset. Contents are zero at power-up.
module program_memory
  import pia_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [XLEN-1:0]          wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [XLEN-1:0]          rdata
);

  logic [XLEN-1:0] mem [DEPTH];

  initial begin
    for (int a = 0; a < DEPTH; a++) mem[a] = '0;
  end

  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];

endmodule
