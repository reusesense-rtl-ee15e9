// tb_rs_scratchpad: fills all 48 entries, reads them back in random order
// (one-cycle read latency), overwrites some and reads again.
// The 48 x 128-bit size follows the described configuration; the access
// pattern is this test's own.

module tb_rs_scratchpad;
  import rs_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en; logic [5:0] wr_idx, rd_idx; vreg_t wr_data, rd_data;
  vreg_t ref_m [NVPREG];
  int checks = 0, failures = 0;

  rs_scratchpad dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_idx = '0; rd_idx = '0; wr_data = '0;
    @(negedge clk);
    for (int i = 0; i < NVPREG; i++) begin
      ref_m[i] = {$urandom, $urandom, $urandom, $urandom};
      wr_en = 1; wr_idx = 6'(i); wr_data = ref_m[i]; @(negedge clk);
    end
    wr_en = 0;
    for (int t = 0; t < 600; t++) begin
      int i; i = $urandom_range(0, NVPREG-1);
      rd_en = 1; rd_idx = 6'(i);
      if (t % 3 == 0) begin
        int j; j = $urandom_range(0, NVPREG-1);
        if (j != i) begin
          wr_en = 1; wr_idx = 6'(j); wr_data = {$urandom, $urandom, $urandom, $urandom};
        end
      end
      @(negedge clk);
      checks++;
      if (rd_data !== ref_m[i]) begin failures++; $display("FAIL entry %0d", i); end
      if (wr_en) ref_m[wr_idx] = wr_data;
      wr_en = 0; rd_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
