// tb_uop_cache: checks every per-bit algorithm stored in the u-OP cache.
//
// For each kernel and each combination of its input bits (a, b, carry c,
// select s, second input x) and random initial work-memristor states, the
// testbench executes the table entry by entry on a one-row model of the
// crossbar (FALSE clears q/q2/q3, IMPLY sets q <= p -> q), stops at the
// entry with the last flag and compares the result bits and the number of
// steps with the function and step count the ISA gives each algorithm.
// The table is combinational; one entry is looked up per 1 ns.
module tb_uop_cache;
  import pia_pkg::*;

  kernel_e    kernel;
  logic [4:0] step;
  uop_t       uop;

  uop_cache dut (.kernel, .step, .uop);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  // run one kernel on the role values m; returns the number of steps
  task automatic exec(kernel_e k, inout logic [N_ROLES-1:0] m, output int n);
    n = 0;
    for (int s = 0; s < 32; s++) begin
      kernel = k; step = 5'(s);
      #1;
      n++;
      if (uop.kind == U_FALSE) begin
        m[uop.q] = 1'b0; m[uop.q2] = 1'b0; m[uop.q3] = 1'b0;
      end else if (uop.kind == U_IMPLY) begin
        m[uop.q] = ~m[uop.p] | m[uop.q];
      end
      m[R_NONE] = 1'b0;
      if (uop.last) break;
    end
  endtask

  initial begin
    kernel_e ks [10] = '{K_AND, K_OR, K_XOR, K_COPY, K_FA, K_FS, K_MUX, K_AUX, K_CMP, K_IMP};
    int      ns [10] = '{5, 3, 9, 3, 20, 20, 8, 6, 13, 1};
    for (int ki = 0; ki < 10; ki++) begin
      for (int v = 0; v < 32; v++) begin
        for (int rep = 0; rep < 4; rep++) begin
          logic [N_ROLES-1:0] m;
          logic a, b, c, s, x;
          int n;
          bit ok;
          {a, b, c, s, x} = 5'(v);
          m = N_ROLES'($urandom);
          m[R_A] = a; m[R_B] = b; m[R_C] = c; m[R_S] = s; m[R_X] = x; m[R_NONE] = 1'b0;
          exec(ks[ki], m, n);
          unique case (ks[ki])
            K_AND:  ok = m[R_B] == (a & b) && m[R_A] == a;
            K_OR:   ok = m[R_B] == (a | b) && m[R_A] == a;
            K_XOR:  ok = m[R_B] == (a ^ b) && m[R_A] == a;
            K_COPY: ok = m[R_B] == a && m[R_A] == a;
            K_FA:   ok = m[R_B] == (a ^ b ^ c) && m[R_C] == ((a & b) | (a & c) | (b & c)) && m[R_A] == a;
            K_FS:   ok = m[R_B] == (a ^ b ^ c) && m[R_C] == ((~a & (b | c)) | (b & c)) && m[R_A] == a;
            K_MUX:  ok = m[R_A] == (s ? x : a) && m[R_S] == s && m[R_X] == x;
            K_AUX:  ok = m[R_A] == (~s & a) && m[R_S] == s;
            K_CMP:  ok = m[R_W1] == (a == b) && m[R_B] == (~a & b) && m[R_A] == a;
            default: ok = m[R_B] == (~x | b);
          endcase
          check(ok, $sformatf("%s a=%b b=%b c=%b s=%b x=%b -> %b", ks[ki].name(), a, b, c, s, x, m));
          check(n == ns[ki], $sformatf("%s: %0d steps, expected %0d", ks[ki].name(), n, ns[ki]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
