// row_decoder: turns the row fields of an address configuration into the
// row-select lines of a crossbar array.
//
// A row r is selected when r = start_row + k*(stride+1) for some k >= 0 with
// k*(stride+1) <= num_rows. num_rows = 0 still selects the start row, and
// rows past the end of the array are simply dropped, both as the ISA
// defines. With single = 1 only the start row is selected (scalar
// instructions: branches, jumps, la, sio). The stride interval is stride+1,
// following the worked example of the ISA (stride 3 = every fourth row).
// Implemented as a chain of per-row comparisons with a running phase counter
// (a demultiplexer widened by a repeat pattern); purely combinational.
module row_decoder
  import pia_pkg::*;
#(
  parameter int unsigned ROWS_P = pia_pkg::ROWS
) (
  input  logic [8:0]        start_row,
  input  logic [8:0]        num_rows,
  input  logic [5:0]        stride,
  input  logic              single,
  output logic [ROWS_P-1:0] row_en
);

  always_comb begin
    logic [6:0]  phase;   // distance to the last selected row, modulo stride+1
    logic [9:0]  offset;  // r - start_row once inside the range
    logic        in_range;
    phase  = '0;
    offset = '0;
    in_range = 1'b0;
    row_en = '0;
    for (int r = 0; r < ROWS_P; r++) begin
      if (r[9:0] == {1'b0, start_row}) begin
        in_range = 1'b1;
        offset = '0;
        phase  = '0;
      end
      if (in_range) begin
        row_en[r] = (phase == 7'd0) && (offset <= {1'b0, num_rows}) &&
                    (!single || offset == 10'd0);
        offset = offset + 10'd1;
        phase  = (phase == {1'b0, stride}) ? 7'd0 : phase + 7'd1;
      end
    end
  end

endmodule
