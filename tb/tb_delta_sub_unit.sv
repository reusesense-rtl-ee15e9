// tb_delta_sub_unit: random and corner byte pairs; checks the wrapped
// difference and the overflow flag against a 32-bit reference, and the
// one-cycle latency.
// The reference is plain integer subtraction; the stimulus is this test's own.

module tb_delta_sub_unit;
  import rs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid; vreg_t a, b, d; logic [LANES-1:0] ovf;
  int checks = 0, failures = 0, novf = 0;

  delta_sub_unit dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; a = '0; b = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      a = {$urandom, $urandom, $urandom, $urandom};
      b = {$urandom, $urandom, $urandom, $urandom};
      if (t == 0) begin a = {16{8'h7f}}; b = {16{8'h80}}; end
      if (t == 1) begin a = {16{8'h80}}; b = {16{8'h7f}}; end
      if (t == 2) begin a = {16{8'h80}}; b = {16{8'h80}}; end
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++; if (!out_valid) begin failures++; $display("FAIL latency"); end
      for (int l = 0; l < LANES; l++) begin
        int e; e = int'($signed(a[l*8 +: 8])) - int'($signed(b[l*8 +: 8]));
        checks++;
        if (d[l*8 +: 8] != 8'(e) || ovf[l] != (e > 127 || e < -128)) begin
          failures++; $display("FAIL lane %0d a=%0d b=%0d d=%0d ovf=%0d", l, $signed(a[l*8+:8]), $signed(b[l*8+:8]), $signed(d[l*8+:8]), ovf[l]);
        end
        if (ovf[l]) novf++;
      end
    end
    checks++; if (novf == 0) begin failures++; $display("FAIL no overflow seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
