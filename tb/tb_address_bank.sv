// tb_address_bank: random SET/RESET writes and three-port reads.
//
// A reference array follows every SET cycle (OR in mask & data) and RESET
// cycle (clear mask & ~data); after each clock edge all three read ports,
// on random slots, must return the reference value. A write is visible one
// clock edge after it is applied; reads are combinational.
module tb_address_bank;
  import pia_pkg::*;
  logic clk = 1'b0;
  logic set_en = 1'b0, rst_en = 1'b0;
  logic [4:0] wr_slot, ra_slot, rb_slot, rc_slot;
  logic [31:0] wr_mask, wr_data, ra_data, rb_data, rc_data;
  logic [31:0] ref_bank [32];

  address_bank dut (.clk, .set_en, .rst_en, .wr_slot, .wr_mask, .wr_data,
                    .ra_slot, .rb_slot, .rc_slot, .ra_data, .rb_data, .rc_data);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    int sel;
    foreach (ref_bank[i]) ref_bank[i] = '0;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      sel = $urandom_range(0, 2);
      unique case (sel)
        0: begin set_en = 1'b1; rst_en = 1'b0; end
        1: begin set_en = 1'b0; rst_en = 1'b1; end
        default: begin set_en = 1'b0; rst_en = 1'b0; end
      endcase
      wr_slot = 5'($urandom); wr_mask = $urandom; wr_data = $urandom;
      if ($urandom_range(0, 3) == 0) wr_mask = 32'hFFFF_F000;
      ra_slot = wr_slot;
      #1;
      check(ra_data == ref_bank[wr_slot], "value held until the clock edge");
      @(posedge clk);
      if (set_en) ref_bank[wr_slot] |= wr_mask & wr_data;
      if (rst_en) ref_bank[wr_slot] &= ~(wr_mask & ~wr_data);
      @(negedge clk);
      set_en = 1'b0; rst_en = 1'b0;
      ra_slot = wr_slot; rb_slot = 5'($urandom); rc_slot = 5'($urandom);
      #1;
      check(ra_data == ref_bank[ra_slot], $sformatf("port a slot %0d", ra_slot));
      check(rb_data == ref_bank[rb_slot], $sformatf("port b slot %0d", rb_slot));
      check(rc_data == ref_bank[rc_slot], $sformatf("port c slot %0d", rc_slot));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
