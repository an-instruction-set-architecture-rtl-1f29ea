// uop_cache: the micro-operation lookup table of the system memory.
//
// For every per-bit IMPLY algorithm of the instruction set it stores the
// sequence of crossbar steps, addressed by {kernel, step}. An entry is
// either FALSE on up to three memristors (q, q2, q3) or an IMPLY q <= p -> q,
// and its last flag marks the final step of the algorithm. Operands are
// roles (a, b, carry c, select s, second mux input x, work memristors
// w1..w3); the control logic binds the roles to physical columns for each
// bit. The step tables are those of the ISA: AND (5 steps), OR (3), XOR (9),
// copy (3), full adder (20), full subtractor (20), 2:1 multiplexer (8),
// shift auxiliary a = ~d & a (6) and single-bit comparator (13, E in w1,
// L in b). K_IMP is one IMPLY b <= x -> b used by slt. Read-only,
// combinational, implemented as a constant table.
module uop_cache
  import pia_pkg::*;
(
  input  kernel_e    kernel,
  input  logic [4:0] step,
  output uop_t       uop
);

  function automatic uop_t F(input role_e q, input role_e q2 = R_NONE, input role_e q3 = R_NONE);
    return '{kind: U_FALSE, p: R_NONE, q: q, q2: q2, q3: q3, last: 1'b0};
  endfunction

  function automatic uop_t I(input role_e p, input role_e q);
    return '{kind: U_IMPLY, p: p, q: q, q2: R_NONE, q3: R_NONE, last: 1'b0};
  endfunction

  function automatic uop_t L(input uop_t u);
    uop_t v;
    v = u;
    v.last = 1'b1;
    return v;
  endfunction

  localparam uop_t NOP = '{kind: U_NOP, p: R_NONE, q: R_NONE, q2: R_NONE, q3: R_NONE, last: 1'b1};

  always_comb begin
    uop = NOP;
    unique case (kernel)
      K_AND: case (step)          // b = a & b
        5'd0: uop = F(R_W1);
        5'd1: uop = I(R_B, R_W1);
        5'd2: uop = I(R_A, R_W1);
        5'd3: uop = F(R_B);
        5'd4: uop = L(I(R_W1, R_B));
        default: ;
      endcase
      K_OR: case (step)           // b = a | b
        5'd0: uop = F(R_W1);
        5'd1: uop = I(R_A, R_W1);
        5'd2: uop = L(I(R_W1, R_B));
        default: ;
      endcase
      K_XOR: case (step)          // b = a ^ b
        5'd0: uop = F(R_W1, R_W2, R_W3);
        5'd1: uop = I(R_A, R_W1);
        5'd2: uop = I(R_B, R_W2);
        5'd3: uop = I(R_A, R_W3);
        5'd4: uop = I(R_W2, R_W3);
        5'd5: uop = I(R_W1, R_W2);
        5'd6: uop = F(R_B);
        5'd7: uop = I(R_W3, R_B);
        5'd8: uop = L(I(R_W2, R_B));
        default: ;
      endcase
      K_COPY: case (step)         // b = a
        5'd0: uop = F(R_W1, R_B);
        5'd1: uop = I(R_A, R_W1);
        5'd2: uop = L(I(R_W1, R_B));
        default: ;
      endcase
      K_FA: case (step)           // b = a ^ b ^ c, c = carry out
        5'd0:  uop = F(R_W1, R_W2, R_W3);
        5'd1:  uop = I(R_A, R_W1);
        5'd2:  uop = I(R_B, R_W2);
        5'd3:  uop = I(R_W1, R_B);
        5'd4:  uop = I(R_A, R_W2);
        5'd5:  uop = F(R_W1);
        5'd6:  uop = I(R_C, R_W1);
        5'd7:  uop = I(R_W2, R_C);
        5'd8:  uop = I(R_B, R_W3);
        5'd9:  uop = I(R_W2, R_W3);
        5'd10: uop = I(R_W3, R_W1);
        5'd11: uop = F(R_W3);
        5'd12: uop = I(R_C, R_W3);
        5'd13: uop = I(R_B, R_W3);
        5'd14: uop = I(R_B, R_C);
        5'd15: uop = F(R_B);
        5'd16: uop = I(R_W1, R_B);
        5'd17: uop = I(R_C, R_B);
        5'd18: uop = F(R_C);
        5'd19: uop = L(I(R_W3, R_C));
        default: ;
      endcase
      K_FS: case (step)           // b = a - b - c, c = borrow out
        5'd0:  uop = F(R_W1, R_W2, R_W3);
        5'd1:  uop = I(R_A, R_W1);
        5'd2:  uop = I(R_W1, R_W2);
        5'd3:  uop = I(R_W1, R_W3);
        5'd4:  uop = I(R_B, R_W3);
        5'd5:  uop = I(R_W2, R_B);
        5'd6:  uop = F(R_W1, R_W2);
        5'd7:  uop = I(R_B, R_W1);
        5'd8:  uop = I(R_W3, R_W1);
        5'd9:  uop = I(R_W1, R_W2);
        5'd10: uop = F(R_B);
        5'd11: uop = I(R_C, R_B);
        5'd12: uop = I(R_C, R_W1);
        5'd13: uop = F(R_C);
        5'd14: uop = I(R_W1, R_C);
        5'd15: uop = I(R_W3, R_C);
        5'd16: uop = I(R_B, R_W2);
        5'd17: uop = F(R_B);
        5'd18: uop = I(R_W2, R_B);
        5'd19: uop = L(I(R_W1, R_B));
        default: ;
      endcase
      K_MUX: case (step)          // a = s ? x : a
        5'd0: uop = F(R_W1, R_W2);
        5'd1: uop = I(R_S, R_W1);
        5'd2: uop = I(R_W1, R_W2);
        5'd3: uop = I(R_X, R_W1);
        5'd4: uop = I(R_A, R_W2);
        5'd5: uop = F(R_A);
        5'd6: uop = I(R_W2, R_A);
        5'd7: uop = L(I(R_W1, R_A));
        default: ;
      endcase
      K_AUX: case (step)          // a = ~s & a
        5'd0: uop = F(R_W1, R_W2);
        5'd1: uop = I(R_A, R_W1);
        5'd2: uop = I(R_S, R_W2);
        5'd3: uop = I(R_W2, R_W1);
        5'd4: uop = F(R_A);
        5'd5: uop = L(I(R_W1, R_A));
        default: ;
      endcase
      K_CMP: case (step)          // w1 = (a == b), b = (~a & b)
        5'd0:  uop = F(R_W1, R_W2, R_W3);
        5'd1:  uop = I(R_A, R_W1);
        5'd2:  uop = I(R_B, R_W2);
        5'd3:  uop = I(R_B, R_W3);
        5'd4:  uop = I(R_W1, R_W2);
        5'd5:  uop = I(R_W3, R_W1);
        5'd6:  uop = F(R_W3);
        5'd7:  uop = I(R_W1, R_W3);
        5'd8:  uop = I(R_W2, R_W3);
        5'd9:  uop = F(R_W1);
        5'd10: uop = I(R_W3, R_W1);
        5'd11: uop = F(R_B);
        5'd12: uop = L(I(R_W2, R_B));
        default: ;
      endcase
      K_IMP: uop = L(I(R_X, R_B));
      default: ;
    endcase
  end

endmodule
