// tb_mla8_unit: random mla8 operations against a reference computed here:
// acc[r].lane[l] += w[4r+l] * x[k] (or * scalar), with 32-bit wrap, and a
// one-cycle latency check on out_valid.
// The lane mapping checked is the one the mla8 description gives; the
// random stimulus is this test's own.

module tb_mla8_unit;
  import rs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, use_scalar, out_valid; vreg_t w, x; logic [3:0] k; logic [7:0] scalar;
  vreg_t [3:0] acc_in, acc_out, exp_acc;
  int checks = 0, failures = 0;

  mla8_unit dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; use_scalar = 0; w = '0; x = '0; k = '0; scalar = '0; acc_in = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      logic signed [7:0] xs;
      @(negedge clk);
      w = {$urandom, $urandom, $urandom, $urandom};
      x = {$urandom, $urandom, $urandom, $urandom};
      if (t < 4) begin w = {16{8'h80}}; x = {16{8'h80}}; end   // extreme products
      k = 4'($urandom); use_scalar = ($urandom_range(0, 3) == 0); scalar = 8'($urandom);
      for (int r = 0; r < 4; r++) acc_in[r] = {$urandom, $urandom, $urandom, $urandom};
      in_valid = 1;
      xs = use_scalar ? scalar : x[k*8 +: 8];
      for (int r = 0; r < 4; r++) for (int l = 0; l < 4; l++) begin
        int p; p = int'($signed(w[(r*4+l)*8 +: 8])) * int'(xs);
        exp_acc[r][l*32 +: 32] = acc_in[r][l*32 +: 32] + 32'(p);
      end
      @(posedge clk); #1;
      checks++; if (!out_valid) begin failures++; $display("FAIL no out_valid after 1 cycle"); end
      checks++; if (acc_out !== exp_acc) begin failures++; $display("FAIL result t=%0d", t); end
      in_valid = 0;
      @(posedge clk); #1;
      checks++; if (out_valid) begin failures++; $display("FAIL out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
