// io_register: the 32-bit IO register inside the control logic.
//
// A peripheral writes it (periph_we) and so raises irq, which stays high
// until the control logic takes the interrupt (irq_ack). The sio
// instruction writes a word read from the array (core_we) for the
// peripheral to pick up; lio copies q into the array. When both write in
// the same cycle the peripheral wins. irq_ack in the same cycle as a new
// peripheral write leaves irq set. Reset clears value and irq.
module io_register
  import pia_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            periph_we,
  input  logic [XLEN-1:0] periph_wdata,
  input  logic            core_we,
  input  logic [XLEN-1:0] core_wdata,
  input  logic            irq_ack,
  output logic [XLEN-1:0] q,
  output logic            irq
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q   <= '0;
      irq <= 1'b0;
    end else begin
      if (periph_we)    q <= periph_wdata;
      else if (core_we) q <= core_wdata;
      if (periph_we)    irq <= 1'b1;
      else if (irq_ack) irq <= 1'b0;
    end
  end

endmodule
