// tb_delta_value_reg: capture only for the awaited sequence number, hold
// while valid, clear, restore by load; non-zero mask and true deltas
// checked against values computed from the bytes written.
// Expected values come from integer arithmetic on the bytes written; the
// stimulus sequence is this test's own.

module tb_delta_value_reg;
  import rs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cap_valid, clear, load, load_valid, valid;
  seq_t cap_seq, want_seq; vreg_t cap_data; logic [LANES-1:0] cap_ovf, load_ovf, ovf, nz;
  logic [LANES-1:0][7:0] load_val, val; logic [LANES-1:0][8:0] dtrue;
  int checks = 0, failures = 0;

  delta_value_reg dut (.*);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic check_contents(vreg_t dat, logic [LANES-1:0] o);
    for (int l = 0; l < LANES; l++) begin
      int e; e = int'($signed(dat[l*8 +: 8]));
      if (o[l]) e = (e < 0) ? e + 256 : e - 256;
      chk(nz[l] == (e != 0), $sformatf("nz lane %0d", l));
      chk(int'($signed(dtrue[l])) == e, $sformatf("dtrue lane %0d = %0d exp %0d", l, $signed(dtrue[l]), e));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    vreg_t d1, d2; logic [LANES-1:0] o1, o2;
    {cap_valid, clear, load, load_valid} = '0; cap_seq = '0; want_seq = 8'd5; cap_data = '0; cap_ovf = '0;
    load_val = '0; load_ovf = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      d1 = {$urandom, $urandom, $urandom, $urandom};
      for (int l = 0; l < LANES; l++) if ($urandom_range(0, 1)) d1[l*8 +: 8] = 8'h00;
      o1 = 16'($urandom) & ~16'h0001;
      o1[1] = 1'b1; d1[15:8] = 8'h01;  // -255 in lane 1
      // wrong sequence number: ignored
      @(negedge clk); cap_valid = 1; cap_seq = want_seq + 1; cap_data = d1; cap_ovf = o1;
      @(negedge clk); chk(!valid, "ignored other seq");
      cap_seq = want_seq;
      @(negedge clk); cap_valid = 0;
      chk(valid, "captured"); chk(val == d1, "value"); check_contents(d1, o1);
      // a second writeback while valid must not overwrite
      d2 = ~d1; o2 = ~o1;
      cap_valid = 1; cap_data = d2; cap_ovf = o2;
      @(negedge clk); cap_valid = 0; chk(val == d1, "held while valid");
      // restore an older state by load
      load = 1; load_valid = 1; load_val = d2; load_ovf = o2;
      @(negedge clk); load = 0; chk(valid && val == d2 && ovf == o2, "load"); check_contents(d2, o2);
      clear = 1;
      @(negedge clk); clear = 0; chk(!valid, "cleared");
      want_seq = want_seq + 8'd3;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
