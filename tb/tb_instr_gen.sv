// tb_instr_gen: drives the instruction generator with an ideal core (free
// registers always available, writebacks and commits a few cycles after
// dispatch) and compares every dispatched micro-op (operation, address
// offset, element index, split scalar) in order with a reference stream
// built here from the kernel loop nest. Runs all four kernel/dataflow
// combinations on a 48-input, 32-neuron layer with zero, non-zero and
// overflowing deltas. Checks the generation rate: with no back-pressure
// the basic kernel must average at least 3.5 micro-ops per dispatch cycle
// (4-wide generation), and the reuse kernel must emit exactly one weight
// load per non-zero delta per neuron group. The seven parameter loads
// (one per cycle) are left out of the rate.
// The reference loop nest is written from the kernel listings; the 3.5
// threshold is this test's own margin below the 4-per-cycle width.

module tb_instr_gen;
  import rs_pkg::*;
  localparam int IN = 48, OUT = 32, NC = IN / 16, NG = OUT / 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, disp_ready, ifl_avail, ifl_pop, wb_valid, sq_valid, ev_dwait;
  ipreg_t crs_base, ifl_preg; logic [SEQ_W:0] outstanding;
  logic [3:0] disp_valid; rs_uop_t [3:0] disp_uop;
  logic [6:0] vfl_avail; vpreg_t [9:0] vfl_head; logic [3:0] vfl_pop;
  seq_t wb_seq, sq_seq; vreg_t wb_data; logic [15:0] wb_ovf;
  logic [3:0] cmt_valid; seq_t [3:0] cmt_seq; ipreg_t [NPARAM-1:0] param_regs;
  logic [4:0] ev_skip; logic [2:0] ev_split;

  instr_gen dut (.*);

  typedef struct { rs_op_e op; longint imm; int lane; bit sc; logic [7:0] scalar; } exp_t;
  exp_t exq [$];
  rs_uop_t pend [$]; int pend_t [$];
  logic signed [7:0] cur [IN], prev [IN];
  logic [63:0] pvals [NPARAM];
  int checks = 0, failures = 0, cyc = 0, ndisp_cyc = 0, nuops = 0, nwld = 0, last_prev_c = 0;
  int sub_chunk [int];

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  task automatic push(rs_op_e op, longint imm, int lane = 0, bit sc = 0, logic [7:0] scalar = 0);
    exp_t e; e.op = op; e.imm = imm; e.lane = lane; e.sc = sc; e.scalar = scalar; exq.push_back(e);
  endtask

  task automatic lanes(bit reuse, int c, int g);
    for (int l = 0; l < 16; l++) begin
      int d; d = int'(cur[c*16+l]) - int'(prev[c*16+l]);
      if (!reuse || d != 0) begin
        push(OP_LDB, longint'(((g*NC + c)*16 + l)*16));
        if (reuse && (d > 127 || d < -128)) begin
          while (d != 0) begin
            int p; p = d > 127 ? 127 : (d < -128 ? -128 : d);
            push(OP_MLA8, 0, l, 1, 8'(p)); d -= p;
          end
        end else push(OP_MLA8, 0, l);
      end
    end
  endtask

  task automatic build(bit reuse, bit os);
    exq.delete();
    for (int p = 0; p < NPARAM; p++) push(OP_LDX, p*8);
    if (!os) begin
      for (int c = 0; c < NC; c++) begin
        if (reuse) begin push(OP_LDB, c*16); push(OP_LDB, c*16); push(OP_SUB, 0); end
        else push(OP_LDB, c*16);
        for (int g = 0; g < NG; g++) begin
          for (int k = 0; k < 4; k++) push(OP_LDW, g*64 + k*16);
          lanes(reuse, c, g);
          for (int k = 0; k < 4; k++) push(OP_STW, g*64 + k*16);
        end
      end
    end else begin
      for (int g = 0; g < NG; g++) begin
        for (int k = 0; k < 4; k++) push(OP_LDW, g*64 + k*16);
        for (int c = 0; c < NC; c++) begin
          if (reuse) begin push(OP_LDB, c*16); push(OP_LDB, c*16); push(OP_SUB, 0); end
          else push(OP_LDB, c*16);
          lanes(reuse, c, g);
        end
        for (int k = 0; k < 4; k++) push(OP_STW, g*64 + k*16);
      end
    end
  endtask

  // ideal core
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (disp_ready && |disp_valid && disp_uop[0].op != OP_LDX) ndisp_cyc++;
      if (ifl_pop) ifl_preg <= ifl_preg + 7'd1;
      for (int i = 0; i < 4; i++) if (disp_ready && disp_valid[i]) begin
        rs_uop_t u; exp_t e; u = disp_uop[i]; if (u.op != OP_LDX) nuops++;
        if (exq.size() == 0) chk(0, "unexpected micro-op");
        else begin
          e = exq.pop_front();
          chk(u.op == e.op && u.imm == 64'(e.imm) && (u.op != OP_MLA8 ||
              (int'(u.lane) == e.lane && u.use_scalar == e.sc && (!e.sc || u.scalar == e.scalar))),
              $sformatf("uop seq %0d: got %s imm=%0d lane=%0d sc=%0d/%0d exp %s imm=%0d lane=%0d sc=%0d/%0d",
                        u.seq, u.op.name(), u.imm, u.lane, u.use_scalar, $signed(u.scalar),
                        e.op.name(), e.imm, e.lane, e.sc, $signed(e.scalar)));
        end
        if (u.op == OP_LDB && u.base == param_regs[P_W_ADDR]) nwld++;
        if (u.op == OP_LDB && u.base == param_regs[P_PREV_ADDR]) last_prev_c = int'(u.imm) / 16;
        if (u.op == OP_SUB) sub_chunk[int'(u.seq)] = last_prev_c;
        pend.push_back(u); pend_t.push_back(cyc);
      end
      // writeback of the oldest pending op 2 cycles after dispatch, commit after 3
      wb_valid <= 1'b0;
      cmt_valid <= '0;
      begin
        int nc_; nc_ = 0;
        while (pend.size() > 0 && cyc - pend_t[0] >= 3 && nc_ < 4) begin
          rs_uop_t u; u = pend.pop_front(); void'(pend_t.pop_front());
          cmt_valid[nc_] <= 1'b1; cmt_seq[nc_] <= u.seq; nc_++;
        end
      end
      for (int i = 0; i < pend.size(); i++) if (cyc - pend_t[i] == 2 &&
                                               (pend[i].op == OP_LDX || pend[i].op == OP_SUB)) begin
        rs_uop_t u; u = pend[i];
        wb_valid <= 1'b1; wb_seq <= u.seq; wb_ovf <= '0;
        if (u.op == OP_LDX) wb_data <= vreg_t'(pvals[u.imm / 8]);
        else begin
          int c; c = sub_chunk[int'(u.seq)];
          for (int l = 0; l < 16; l++) begin
            int d; d = int'(cur[c*16+l]) - int'(prev[c*16+l]);
            wb_data[l*8 +: 8] <= 8'(d); wb_ovf[l] <= (d > 127 || d < -128);
          end
        end
      end
    end
  end

  task automatic run(bit reuse, bit os);
    int t0, to, nnz;
    for (int j = 0; j < IN; j++) begin
      prev[j] = 8'($urandom);
      cur[j]  = ($urandom_range(0, 1) != 0) ? prev[j] : 8'($urandom);
    end
    cur[5] = 127; prev[5] = -128; cur[20] = -100; prev[20] = 100; cur[33] = 0; prev[33] = 0;
    nnz = 0; for (int j = 0; j < IN; j++) if (cur[j] != prev[j]) nnz++;
    pvals[P_IN_ADDR] = 64'h1000; pvals[P_W_ADDR] = 64'h2000; pvals[P_OUT_ADDR] = 64'h3000;
    pvals[P_PREV_ADDR] = 64'h4000; pvals[P_IN_SIZE] = IN; pvals[P_OUT_SIZE] = OUT;
    pvals[P_FLAGS] = {62'd0, os, reuse};
    build(reuse, os);
    ndisp_cyc = 0; nuops = 0; nwld = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = cyc; to = 0;
    while (!(done && outstanding == 0) && to < 20000) begin @(negedge clk); to++; end
    chk(done, "generator done");
    chk(exq.size() == 0, $sformatf("all expected micro-ops seen (%0d left)", exq.size()));
    if (!reuse) chk(real'(nuops) / real'(ndisp_cyc) >= 3.5,
                    $sformatf("rate %0d uops in %0d cycles", nuops, ndisp_cyc));
    else chk(nwld == NG * nnz, $sformatf("weight loads %0d exp %0d", nwld, NG*nnz));
    $display("reuse=%0d os=%0d: %0d micro-ops in %0d dispatch cycles", reuse, os, nuops, ndisp_cyc);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; crs_base = 7'd3; disp_ready = 1; ifl_avail = 1; ifl_preg = 7'd70;
    wb_valid = 0; wb_seq = '0; wb_data = '0; wb_ovf = '0; sq_valid = 0; sq_seq = '0;
    cmt_valid = '0; cmt_seq = '0; vfl_avail = 7'd48;
    for (int i = 0; i < 10; i++) vfl_head[i] = vpreg_t'(i + 10);
    repeat (2) @(negedge clk); rst_n = 1;
    run(0, 0); run(1, 0); run(0, 1); run(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
