// tb_branch_unit: checks the six RV32I branch conditions.
//
// Random and boundary operand pairs (equal values, sign boundaries) are
// compared with beq/bne/blt/bge/bltu/bgeu semantics for every funct3.
// Combinational; checked 1 ns after each input change.
module tb_branch_unit;
  import pia_pkg::*;
  logic [2:0] funct3;
  logic [31:0] a, b;
  logic take;

  branch_unit dut (.funct3, .a, .b, .take);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    logic [31:0] edges [6] = '{32'h0, 32'h1, 32'h7FFF_FFFF, 32'h8000_0000, 32'hFFFF_FFFF, 32'h8000_0001};
    for (int it = 0; it < 6000; it++) begin
      bit e;
      a = (it % 3 == 0) ? edges[$urandom_range(0, 5)] : $urandom;
      b = (it % 4 == 0) ? a : (it % 3 == 1) ? edges[$urandom_range(0, 5)] : $urandom;
      funct3 = 3'($urandom_range(0, 7));
      if (funct3 == 3'd2 || funct3 == 3'd3) funct3 = 3'd0;
      unique case (funct3)
        3'd0: e = (a == b);
        3'd1: e = (a != b);
        3'd4: e = ($signed(a) < $signed(b));
        3'd5: e = ($signed(a) >= $signed(b));
        3'd6: e = (a < b);
        default: e = (a >= b);
      endcase
      #1;
      check(take == e, $sformatf("f3=%0d a=%h b=%h take=%b", funct3, a, b, take));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
