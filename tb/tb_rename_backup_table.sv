// tb_rename_backup_table: saves a random map, changes the live map, checks
// the copy is held unchanged until the next save, and the saved flag.
// Timing: save at one edge, the copy is visible from the next. The random
// maps are this test's own stimulus.

module tb_rename_backup_table;
  import rs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic save, release_i, saved; logic [NARCH-1:0][VPREG_W-1:0] map_in, map_out, keep;
  int checks = 0, failures = 0;

  rename_backup_table dut (.*);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    save = 0; release_i = 0; map_in = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(!saved, "empty after reset");
    for (int t = 0; t < 100; t++) begin
      for (int a = 0; a < NARCH; a++) map_in[a] = 6'($urandom_range(0, NVPREG-1));
      keep = map_in; save = 1; @(negedge clk); save = 0;
      chk(saved && map_out == keep, "saved copy");
      for (int c = 0; c < 5; c++) begin
        for (int a = 0; a < NARCH; a++) map_in[a] = 6'($urandom_range(0, NVPREG-1));
        @(negedge clk);
        chk(map_out == keep, "copy held while live map changes");
      end
      release_i = 1; @(negedge clk); release_i = 0;
      chk(!saved, "released");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
