// tb_param_table: allocates the seven rows with random registers and
// sequence numbers, delivers writebacks in random order (plus decoys with
// other sequence numbers), checks values, 'known' only after commit,
// all_known, and that a later writeback reusing a sequence number does not
// overwrite a captured value; then clear.
// Known-at-commit follows the described behaviour; the reordering and
// decoys are this test's own stress.

module tb_param_table;
  import rs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, alloc, wb_valid, all_known; logic [2:0] alloc_idx; ipreg_t alloc_reg; seq_t alloc_seq, wb_seq;
  logic [XLEN-1:0] wb_data; logic [GEN_WIDTH-1:0] cmt_valid; seq_t [GEN_WIDTH-1:0] cmt_seq;
  ipreg_t [NPARAM-1:0] regidx; logic [NPARAM-1:0][XLEN-1:0] value; logic [NPARAM-1:0] known;
  int checks = 0, failures = 0;

  param_table dut (.*);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ipreg_t r [NPARAM]; seq_t s [NPARAM]; logic [63:0] v [NPARAM]; int ord [NPARAM];
    {clear, alloc, wb_valid} = '0; alloc_idx = '0; alloc_reg = '0; alloc_seq = '0; wb_seq = '0; wb_data = '0;
    cmt_valid = '0; cmt_seq = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      clear = 1; @(negedge clk); clear = 0;
      chk(known == '0 && !all_known, "cleared");
      for (int p = 0; p < NPARAM; p++) begin
        r[p] = 7'($urandom); s[p] = seq_t'(t*16 + p); v[p] = {$urandom, $urandom}; ord[p] = p;
        alloc = 1; alloc_idx = 3'(p); alloc_reg = r[p]; alloc_seq = s[p];
        @(negedge clk);
      end
      alloc = 0;
      for (int p = 0; p < NPARAM; p++) chk(regidx[p] == r[p], $sformatf("regidx %0d", p));
      ord.shuffle();
      for (int i = 0; i < NPARAM; i++) begin
        wb_valid = 1; wb_seq = s[ord[i]] + 8'd100; wb_data = '1;    // decoy
        @(negedge clk);
        wb_seq = s[ord[i]]; wb_data = v[ord[i]];
        @(negedge clk);
      end
      wb_valid = 0;
      for (int p = 0; p < NPARAM; p++) chk(value[p] == v[p], $sformatf("value %0d", p));
      chk(known == '0, "not known before commit");
      // a reused sequence number must not overwrite
      wb_valid = 1; wb_seq = s[2]; wb_data = 64'hdead; @(negedge clk); wb_valid = 0;
      chk(value[2] == v[2], "no overwrite after capture");
      for (int i = 0; i < NPARAM; i += 4) begin
        for (int c = 0; c < 4; c++) begin
          cmt_valid[c] = (i + c < NPARAM); cmt_seq[c] = s[(i + c) % NPARAM];
        end
        @(negedge clk);
        cmt_valid = '0;
        if (i + 4 < NPARAM) chk(!all_known, "partially known");
      end
      chk(known == '1 && all_known, "all known after commit");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
