// tb_rs_ctrl: one crs call after another against a model of the core's
// vector register file. Checks: decode is blocked from crs to crs_done;
// a register that becomes ready late is still backed up; generation starts
// only after the pipeline is empty and all 48 registers are copied; the
// register file, overwritten while the kernel runs, is restored exactly;
// no restore write happens while generated instructions are outstanding;
// the rename map comes back; the seven parameter registers are freed.
// The state order checked follows the described walk-through; the core
// timing (drain length, late register) is this test's own.

module tb_rs_ctrl;
  import rs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic crs_valid, decode_block, crs_done, pipe_empty, vrf_rd_en, vrf_wr_en, rmt_restore_valid;
  logic vfl_release_all, ifl_free_valid, gen_start, gen_done; logic [2:0] state_o;
  ipreg_t crs_src, crs_base, ifl_free_preg; vpreg_t vrf_rd_idx, vrf_wr_idx; vreg_t vrf_rd_data, vrf_wr_data;
  logic [NVPREG-1:0] vrf_ready; logic [NARCH-1:0][VPREG_W-1:0] rmt_map, rmt_restore_map;
  ipreg_t [NPARAM-1:0] param_regs; logic [SEQ_W:0] gen_outstanding;
  vreg_t vrf [NVPREG], orig [NVPREG];
  int checks = 0, failures = 0, nfree, nrel, nstart, wr_early, cyc;
  logic [NPARAM-1:0] freed;

  rs_ctrl dut (.*);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (vrf_rd_en) begin
      vrf_rd_data <= vrf[vrf_rd_idx];
      if (!vrf_ready[vrf_rd_idx]) begin failures++; $display("FAIL read of a register not ready"); end
    end
    if (vrf_wr_en) begin
      vrf[vrf_wr_idx] = vrf_wr_data;
      if (gen_outstanding != 0) wr_early++;
    end
    if (ifl_free_valid) begin
      nfree++;
      for (int p = 0; p < NPARAM; p++) if (param_regs[p] == ifl_free_preg) freed[p] = 1'b1;
    end
    if (vfl_release_all) nrel++;
    if (gen_start) begin
      nstart++;
      if (!pipe_empty) begin failures++; $display("FAIL generation before drain"); end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [NARCH-1:0][VPREG_W-1:0] m0;
    crs_valid = 0; crs_src = '0; pipe_empty = 1; vrf_ready = '1; vrf_rd_data = '0;
    gen_done = 0; gen_outstanding = '0; cyc = 0;
    for (int p = 0; p < NPARAM; p++) param_regs[p] = ipreg_t'(64 + 3*p);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int late, w;
      for (int p = 0; p < NVPREG; p++) begin vrf[p] = {$urandom, $urandom, $urandom, $urandom}; orig[p] = vrf[p]; end
      for (int a = 0; a < NARCH; a++) rmt_map[a] = 6'($urandom_range(0, NVPREG-1));
      m0 = rmt_map;
      late = $urandom_range(0, NVPREG-1);
      nfree = 0; nrel = 0; nstart = 0; wr_early = 0; freed = '0;
      @(negedge clk);
      chk(!decode_block, "decode free before crs");
      crs_valid = 1; crs_src = 7'(t); pipe_empty = 0; vrf_ready[late] = 1'b0;
      @(negedge clk); crs_valid = 0;
      chk(decode_block && crs_base == 7'(t), "decode blocked, base captured");
      for (int a = 0; a < NARCH; a++) rmt_map[a] = '0;     // live map changes meanwhile
      repeat (60) @(negedge clk);
      chk(nstart == 0, "waits for late register and drain");
      vrf[late] = {$urandom, $urandom, $urandom, $urandom}; orig[late] = vrf[late];
      vrf_ready[late] = 1'b1;
      repeat (5) @(negedge clk);
      chk(nstart == 0, "waits for drain");
      pipe_empty = 1;
      w = 0; while (nstart == 0 && w < 100) begin @(negedge clk); w++; end
      chk(nstart == 1 && nrel == 1, "generation started, registers released");
      // the kernel overwrites the register file
      for (int p = 0; p < NVPREG; p++) vrf[p] = ~orig[p];
      gen_outstanding = 9'd12;
      repeat (10) @(negedge clk);
      gen_done = 1; @(negedge clk); gen_done = 0;
      repeat (10) @(negedge clk);
      chk(decode_block, "finishing waits for commits");
      gen_outstanding = '0;
      w = 0; while (!crs_done && w < 200) begin
        @(negedge clk); w++;
        if (rmt_restore_valid) chk(rmt_restore_map == m0, "rename map restored");
      end
      @(negedge clk);
      chk(!decode_block, "decode unblocked");
      chk(wr_early == 0, "no restore before commit");
      for (int p = 0; p < NVPREG; p++) chk(vrf[p] == orig[p], $sformatf("vreg %0d restored", p));
      chk(nfree == NPARAM && freed == '1, "parameter registers freed");
      rmt_map = m0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
