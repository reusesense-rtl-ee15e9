// tb_reusesense: end-to-end test of the ReuseSense top with every parameter
// at its default.
//
// The testbench contains a small behavioural model of the host core around
// the top: a flat byte memory, integer and vector physical register files,
// the vector rename map and free list, an integer free list, a 128-entry
// reorder buffer that executes the generated micro-ops in order (one per
// cycle; sub and mla8 go through the top's SIMD ports), forwards older
// stores to loads, writes stores at commit and commits up to four per cycle.
// It runs four crs calls on a 64-input, 32-neuron layer:
//   reuse / input stationary, basic / output stationary,
//   reuse / output stationary, basic / input stationary.
// For reuse calls the output memory first holds W*I_prev and must end as
// W*I_cur; the current inputs repeat most previous values, contain deltas
// that overflow a byte (one of them +255) and some zeros. Basic calls start
// from a bias and must end at bias + W*I. After each call the vector
// registers and the rename map must equal their values before the call,
// and the weight loads and mla8 committed must equal the counts implied by
// the non-zero deltas. One squash of a generated weight load is injected
// per reuse call. Each mechanism (skip, split, delta wait, squash
// recovery, dispatch back-pressure, late-ready backup register, 4-wide
// bundle, both kernels and both dataflows) must be seen at least once.
// The layer size and the core model are this test's own; the mechanisms
// counted are the ones the design description names.

module tb_reusesense;
  import rs_pkg::*;

  localparam int IN  = 64;
  localparam int OUT = 32;
  localparam int NC  = IN / 16;
  localparam int NG  = OUT / 16;
  localparam int ROBSZ = 128;
  localparam longint PBASE = 64'h100, IBASE = 64'h1000, PVBASE = 64'h2000,
                     OBASE = 64'h3000, WBASE = 64'h10000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------- DUT ports ----------------
  logic crs_valid; ipreg_t crs_src; logic decode_block, crs_done, pipe_empty;
  logic vrf_rd_en; vpreg_t vrf_rd_idx; vreg_t vrf_rd_data; logic [NVPREG-1:0] vrf_ready;
  logic vrf_wr_en; vpreg_t vrf_wr_idx; vreg_t vrf_wr_data;
  logic [NARCH-1:0][VPREG_W-1:0] rmt_map, rmt_restore_map; logic rmt_restore_valid, vfl_release_all;
  logic [6:0] vfl_avail; vpreg_t [9:0] vfl_head; logic [3:0] vfl_pop;
  logic ifl_avail; ipreg_t ifl_preg; logic ifl_pop, ifl_free_valid; ipreg_t ifl_free_preg;
  logic [3:0] disp_valid; rs_uop_t [3:0] disp_uop; logic disp_ready;
  logic wb_valid; seq_t wb_seq; vreg_t wb_data; logic [15:0] wb_ovf;
  logic [3:0] cmt_valid; seq_t [3:0] cmt_seq; logic sq_valid; seq_t sq_seq;
  logic mla_valid; vreg_t mla_w, mla_x; logic [3:0] mla_k; logic mla_use_scalar; logic [7:0] mla_scalar;
  vreg_t [3:0] mla_acc_in, mla_acc_out; logic mla_out_valid;
  logic sub_valid; vreg_t sub_a, sub_b, sub_d; logic sub_out_valid; logic [15:0] sub_ovf;
  logic [2:0] rs_state; logic [4:0] ev_skip; logic [2:0] ev_split; logic ev_dwait;

  reusesense dut (.*);

  // ---------------- model state ----------------
  logic [7:0]       mem [longint];
  logic [63:0]      iprf [128];
  vreg_t            vprf [NVPREG];
  logic [NVPREG-1:0] vfree;
  logic [127:0]     ifree;
  rs_uop_t          rob [$];
  int               rob_st [$];     // 0 waiting, 1 in unit, 2 done
  vreg_t            rob_sd [$];     // store data
  logic [63:0]      rob_sa [$];     // store address
  vpreg_t           win [10];
  int               unit_busy;      // 0 none, 1 waiting result
  seq_t             unit_seq;
  int               cyc;
  int checks = 0, failures = 0;

  // mechanism and op counters
  int n_skip, n_split, n_dwait, n_squash, n_bp, n_late, n_wide4, n_block;
  int n_basic, n_reuse, n_is, n_os;
  int c_wld, c_mla, c_ldx, c_int_free;
  int squash_armed;
  logic [63:0] wreg_val;

  function automatic logic [63:0] rd64(longint a);
    logic [63:0] v;
    for (int i = 0; i < 8; i++) v[i*8 +: 8] = mem.exists(a+i) ? mem[a+i] : 8'h00;
    return v;
  endfunction
  function automatic vreg_t rd128(longint a);
    vreg_t v;
    for (int i = 0; i < 16; i++) v[i*8 +: 8] = mem.exists(a+i) ? mem[a+i] : 8'h00;
    return v;
  endfunction
  task automatic wr128(longint a, vreg_t v);
    for (int i = 0; i < 16; i++) mem[a+i] = v[i*8 +: 8];
  endtask
  task automatic wr64(longint a, logic [63:0] v);
    for (int i = 0; i < 8; i++) mem[a+i] = v[i*8 +: 8];
  endtask
  task automatic wr32(longint a, logic [31:0] v);
    for (int i = 0; i < 4; i++) mem[a+i] = v[i*8 +: 8];
  endtask
  function automatic logic [31:0] rd32(longint a);
    logic [31:0] v;
    for (int i = 0; i < 4; i++) v[i*8 +: 8] = mem[a+i];
    return v;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // drive the free-list window from the model state
  task automatic drive_fl();
    int k; k = 0;
    for (int i = 0; i < 10; i++) win[i] = '0;
    for (int p = 0; p < NVPREG && k < 10; p++) if (vfree[p]) begin win[k] = vpreg_t'(p); k++; end
    for (int i = 0; i < 10; i++) vfl_head[i] <= win[i];
    vfl_avail <= 7'($countones(vfree));
    ifl_avail <= 1'b1;
    ifl_preg  <= '0;
    for (int p = 127; p >= 64; p--) if (ifree[p]) ifl_preg <= ipreg_t'(p);
  endtask

  int pipe_cnt, late_cnt;

  // ---------------- core model ----------------
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (decode_block) n_block++;
      // accepted dispatch
      if (|disp_valid && !disp_ready) n_bp++;
      if (disp_ready) begin
        if (disp_valid == 4'hf) n_wide4++;
        for (int i = 0; i < 4; i++) if (disp_valid[i]) begin
          rs_uop_t u; u = disp_uop[i];
          rob.push_back(u); rob_st.push_back(0); rob_sd.push_back('0); rob_sa.push_back('0);
          for (int r = 0; r < 4; r++) if (r < int'(u.ndst)) rmt_map[u.dst_arch + 5'(r)] = u.dst[r];
        end
      end
      for (int i = 0; i < int'(vfl_pop); i++) vfree[win[i]] = 1'b0;
      if (ifl_pop) ifree[ifl_preg] = 1'b0;
      if (ifl_free_valid) begin ifree[ifl_free_preg] = 1'b1; c_int_free++; end
      if (vfl_release_all) vfree = '1;
      n_skip  += int'(ev_skip);
      n_split += int'(ev_split);
      if (ev_dwait) n_dwait++;
      // register file port of the backup/restore
      if (vrf_rd_en) vrf_rd_data <= vprf[vrf_rd_idx];
      if (vrf_wr_en) vprf[vrf_wr_idx] = vrf_wr_data;
      if (rmt_restore_valid) begin
        rmt_map = rmt_restore_map;
        vfree = '1;
        for (int a = 0; a < NARCH; a++) vfree[rmt_map[a]] = 1'b0;
      end
      // late-ready register and draining pipeline
      if (!vrf_ready[5] && decode_block) begin
        late_cnt++;
        if (late_cnt == 20) begin vrf_ready[5] <= 1'b1; n_late++; end
      end
      if (decode_block && !pipe_empty) begin
        pipe_cnt++;
        if (pipe_cnt == 30) pipe_empty <= 1'b1;
      end

      // squash injection: a done weight load a few entries from the head
      sq_valid <= 1'b0;
      if (squash_armed && rob.size() > 1) begin
        for (int i = 0; i < rob.size(); i++) begin
          if (rob[i].op == OP_LDB && iprf[rob[i].base] == wreg_val && rob_st[i] == 2) begin
            sq_valid <= 1'b1; sq_seq <= rob[i].seq;
            if (unit_busy != 0) unit_busy = 2;   // result of a squashed op is dropped
            while (rob.size() > i) begin
              rs_uop_t u; u = rob[$];
              for (int r = 0; r < 4; r++) if (r < int'(u.ndst)) vfree[u.dst[r]] = 1'b1;
              if (u.op == OP_LDX) ifree[u.idst] = 1'b1;
              void'(rob.pop_back()); void'(rob_st.pop_back()); void'(rob_sd.pop_back()); void'(rob_sa.pop_back());
            end
            squash_armed = 0; n_squash++;
            break;
          end
        end
      end

      // commit up to four
      cmt_valid <= '0;
      for (int c = 0; c < 4; c++) begin
        if (rob.size() > 0 && rob_st[0] == 2) begin
          rs_uop_t u; u = rob[0];
          cmt_valid[c] <= 1'b1; cmt_seq[c] <= u.seq;
          if (u.op == OP_STW) wr128(rob_sa[0], rob_sd[0]);
          for (int r = 0; r < 4; r++) if (r < int'(u.ndst) && u.old_v[r]) vfree[u.old[r]] = 1'b1;
          if (u.op == OP_MLA8) c_mla++;
          if (u.op == OP_LDB && iprf[u.base] == wreg_val) c_wld++;
          if (u.op == OP_LDX) c_ldx++;
          void'(rob.pop_front()); void'(rob_st.pop_front()); void'(rob_sd.pop_front()); void'(rob_sa.pop_front());
        end
      end

      // execute: one micro-op per cycle, in order
      wb_valid  <= 1'b0;
      mla_valid <= 1'b0;
      sub_valid <= 1'b0;
      if (unit_busy != 0 && (mla_out_valid || sub_out_valid)) begin
        if (unit_busy == 1) begin
          for (int i = 0; i < rob.size(); i++) if (rob[i].seq == unit_seq && rob_st[i] == 1) begin
            if (rob[i].op == OP_MLA8) for (int r = 0; r < 4; r++) vprf[rob[i].dst[r]] = mla_acc_out[r];
            else vprf[rob[i].dst[0]] = sub_d;
            rob_st[i] = 2;
            wb_valid <= 1'b1; wb_seq <= unit_seq; wb_data <= sub_d; wb_ovf <= sub_ovf;
          end
        end
        unit_busy = 0;
      end else if (unit_busy == 0) begin
        int h; h = -1;
        for (int i = 0; i < rob.size(); i++) if (rob_st[i] == 0) begin h = i; break; end
        if (h >= 0) begin
          rs_uop_t u; logic [63:0] a; vreg_t d;
          u = rob[h]; a = iprf[u.base] + u.imm;
          unique case (u.op)
            OP_LDX: begin
              iprf[u.idst] = rd64(a); rob_st[h] = 2;
              wb_valid <= 1'b1; wb_seq <= u.seq; wb_data <= vreg_t'(rd64(a)); wb_ovf <= '0;
            end
            OP_LDB, OP_LDW: begin
              d = rd128(a);
              for (int j = 0; j < h; j++) if (rob[j].op == OP_STW && rob_sa[j] == a) d = rob_sd[j];
              vprf[u.dst[0]] = d; rob_st[h] = 2;
              wb_valid <= 1'b1; wb_seq <= u.seq; wb_data <= d; wb_ovf <= '0;
            end
            OP_STW: begin rob_sd[h] = vprf[u.srca]; rob_sa[h] = a; rob_st[h] = 2; end
            OP_SUB: begin
              sub_valid <= 1'b1; sub_a <= vprf[u.srca]; sub_b <= vprf[u.srcb];
              rob_st[h] = 1; unit_busy = 1; unit_seq = u.seq;
            end
            default: begin
              mla_valid <= 1'b1; mla_w <= vprf[u.srca]; mla_x <= vprf[u.srcb]; mla_k <= u.lane;
              mla_use_scalar <= u.use_scalar; mla_scalar <= u.scalar;
              for (int r = 0; r < 4; r++) mla_acc_in[r] <= vprf[u.acc[r]];
              rob_st[h] = 1; unit_busy = 1; unit_seq = u.seq;
            end
          endcase
        end
      end
      disp_ready <= (rob.size() + 8 <= ROBSZ) && ($urandom_range(0, 7) != 0);  // dispatch sometimes busy
      drive_fl();
    end
  end

  // ---------------- layer data ----------------
  logic signed [7:0] W  [OUT][IN];
  logic signed [7:0] Ip [IN];
  logic signed [7:0] Ic [IN];
  logic signed [31:0] bias [OUT];

  task automatic write_layer(bit reuse, bit os);
    for (int g = 0; g < NG; g++)
      for (int j = 0; j < IN; j++) begin
        vreg_t v;
        for (int r = 0; r < 16; r++) v[r*8 +: 8] = W[g*16 + r][j];
        wr128(WBASE + longint'((g*IN + j)*16), v);
      end
    for (int j = 0; j < IN; j++) begin
      mem[IBASE + j] = Ic[j];
      mem[PVBASE + j] = Ip[j];
    end
    for (int n = 0; n < OUT; n++) begin
      logic signed [31:0] o; o = reuse ? 0 : bias[n];
      if (reuse) for (int j = 0; j < IN; j++) o += 32'(W[n][j]) * 32'(Ip[j]);
      wr32(OBASE + longint'(n*4), o);
    end
    wr64(PBASE + 0,  IBASE);  wr64(PBASE + 8,  WBASE);
    wr64(PBASE + 16, OBASE);  wr64(PBASE + 24, PVBASE);
    wr64(PBASE + 32, IN);     wr64(PBASE + 40, OUT);
    wr64(PBASE + 48, {62'd0, os, reuse});
  endtask

  task automatic run_crs(bit reuse, bit os);
    vreg_t saved_v [NVPREG];
    logic [NARCH-1:0][VPREG_W-1:0] saved_map;
    int nnz, nsplit_extra, t0, t1, to;
    string tag;
    tag = $sformatf("%s/%s", reuse ? "reuse" : "basic", os ? "OS" : "IS");
    if (reuse) n_reuse++; else n_basic++;
    if (os) n_os++; else n_is++;
    // operands
    for (int j = 0; j < IN; j++) begin
      Ip[j] = 8'($urandom_range(0, 255));
      case ($urandom_range(0, 9))
        0, 1, 2: Ic[j] = 8'($urandom_range(0, 255));   // new value
        3:       Ic[j] = 8'sd0;
        default: Ic[j] = Ip[j];                          // repeated
      endcase
      bias[j % OUT] = 32'($urandom_range(0, 2000)) - 1000;
    end
    Ip[3] = -8'sd128; Ic[3] = 8'sd127;     // +255
    Ip[17] = 8'sd100; Ic[17] = -8'sd100;   // -200
    Ip[40] = -8'sd90; Ic[40] = 8'sd90;     // +180
    for (int n = 0; n < OUT; n++) for (int j = 0; j < IN; j++) W[n][j] = 8'($urandom_range(0, 255));
    write_layer(reuse, os);
    nnz = 0; nsplit_extra = 0;
    for (int j = 0; j < IN; j++) begin
      int d; d = int'(Ic[j]) - int'(Ip[j]);
      if (d != 0) nnz++;
      if (d > 254) nsplit_extra += 2;
      else if (d > 127 || d < -128) nsplit_extra += 1;
    end
    // core state before the call
    iprf[9] = PBASE;
    for (int p = 0; p < NVPREG; p++) begin
      vprf[p] = {$urandom, $urandom, $urandom, $urandom};
      saved_v[p] = vprf[p];
    end
    saved_map = rmt_map;
    c_wld = 0; c_mla = 0; c_ldx = 0; c_int_free = 0;
    pipe_cnt = 0; late_cnt = 0;
    squash_armed = reuse;
    wreg_val = WBASE;
    @(negedge clk);
    vrf_ready = '1; vrf_ready[5] = 1'b0;  // still being written by an older op
    pipe_empty = 1'b0;
    crs_valid = 1'b1; crs_src = 7'd9;
    t0 = cyc;
    @(negedge clk);
    crs_valid = 1'b0;
    to = 0;
    while (!crs_done && to < 200000) begin @(negedge clk); to++; end
    t1 = cyc;
    check(crs_done, {tag, " crs finished"});
    @(negedge clk);
    check(!decode_block, {tag, " decode unblocked"});
    // results
    for (int n = 0; n < OUT; n++) begin
      logic signed [31:0] e;
      e = reuse ? 0 : bias[n];
      for (int j = 0; j < IN; j++) e += 32'(W[n][j]) * 32'(Ic[j]);
      check(rd32(OBASE + longint'(n*4)) == e,
            $sformatf("%s output %0d = %0d exp %0d", tag, n, $signed(rd32(OBASE + longint'(n*4))), e));
    end
    for (int p = 0; p < NVPREG; p++) check(vprf[p] == saved_v[p], $sformatf("%s vreg %0d restored", tag, p));
    check(rmt_map == saved_map, {tag, " rename map restored"});
    check(c_ldx == NPARAM, {tag, " parameter loads"});
    check(c_int_free == NPARAM, {tag, " integer registers freed"});
    if (reuse) begin
      check(c_wld == NG * nnz, $sformatf("%s weight loads %0d exp %0d", tag, c_wld, NG*nnz));
      check(c_mla == NG * (nnz + nsplit_extra), $sformatf("%s mla8 %0d exp %0d", tag, c_mla, NG*(nnz+nsplit_extra)));
    end else begin
      check(c_wld == NG * IN, $sformatf("%s weight loads %0d", tag, c_wld));
      check(c_mla == NG * IN, $sformatf("%s mla8 %0d", tag, c_mla));
    end
    $display("%s: %0d cycles, weight loads %0d, mla8 %0d", tag, t1 - t0, c_wld, c_mla);
  endtask

  initial begin
    // watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; unit_busy = 0; squash_armed = 0;
    {n_skip, n_split, n_dwait, n_squash, n_bp, n_late, n_wide4, n_block} = '0;
    {n_basic, n_reuse, n_is, n_os} = '0;
    crs_valid = 0; crs_src = '0; pipe_empty = 1; vrf_ready = '1; vrf_rd_data = '0;
    for (int a = 0; a < NARCH; a++) rmt_map[a] = VPREG_W'(a + 8);
    vfree = '1; for (int a = 0; a < NARCH; a++) vfree[a + 8] = 1'b0;
    ifree = '1; ifree[63:0] = '0;
    for (int i = 0; i < 128; i++) iprf[i] = '0;
    disp_ready = 1; wb_valid = 0; wb_seq = '0; wb_data = '0; wb_ovf = '0;
    cmt_valid = '0; cmt_seq = '0; sq_valid = 0; sq_seq = '0;
    mla_valid = 0; mla_w = '0; mla_x = '0; mla_k = '0; mla_use_scalar = 0; mla_scalar = '0; mla_acc_in = '0;
    sub_valid = 0; sub_a = '0; sub_b = '0;
    vfl_avail = '0; vfl_head = '0; ifl_avail = 0; ifl_preg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    run_crs(1, 0);
    run_crs(0, 1);
    run_crs(1, 1);
    run_crs(0, 0);
    $display("events: skip=%0d split=%0d dwait=%0d squash=%0d backpressure=%0d late_ready=%0d wide4=%0d blocked=%0d",
             n_skip, n_split, n_dwait, n_squash, n_bp, n_late, n_wide4, n_block);
    check(n_skip > 0,   "zero-delta lanes skipped");
    check(n_split > 0,  "overflowed delta split");
    check(n_dwait > 0,  "generator waited for delta");
    check(n_squash == 2, "squash recovered");
    check(n_bp > 0,     "dispatch back-pressure");
    check(n_late == 4,  "late-ready register backed up");
    check(n_wide4 > 0,  "4-wide bundle");
    check(n_block > 0,  "decode blocked");
    check(n_basic == 2 && n_reuse == 2 && n_is == 2 && n_os == 2, "both kernels and dataflows");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
