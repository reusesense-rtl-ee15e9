// instr_gen: ReuseSensor's instruction generation logic.
//
// After 'start' it emits, up to GEN_WIDTH (4) micro-ops per cycle, the
// instruction stream of the kernel chosen by the parameter structure:
//   1. seven scalar loads of the parameter structure (base register = the
//      physical register of the crs source, offsets 0, 8, ..., 48), then
//      waits until all have committed (param_table);
//   2. the loop nest of the basic or reuse kernel. Input stationary order
//      (as in the kernel listings): for each 16-input chunk c: load the
//      inputs (reuse: load current and previous inputs, subtract into z0);
//      for each 16-neuron group g: load four output registers z10..z13,
//      then for each of the 16 lanes whose delta is non-zero (basic: all
//      lanes) load 16 weights into z6 and emit mla8 z10, z6, z0[lane];
//      store z10..z13. Output stationary order swaps the two loops so the
//      outputs are loaded and stored once per group.
// Lanes with a zero delta produce no instruction at all. A lane whose delta
// overflowed a byte gets one weight load and two mla8 that carry the two
// parts of the delta as a scalar operand (three for the single value +255,
// which two signed bytes cannot hold).
// Before the first weight load of a chunk the generator waits until the
// subtract has written back into the delta value register.
//
// Every destination gets a fresh vector physical register from the core's
// free list (a window of VFL_WIN heads, vfl_pop of them are taken); the
// micro-op carries the old mapping so the core frees it at commit, as for
// a renamed instruction. Each micro-op gets the next sequence number; the
// generator state before it is written to the state history table. On a
// squash (sq_valid, sq_seq) the state of entry sq_seq is restored and
// generation resumes there. outstanding = generated but not committed.
//
// Interfaces: dispatch is all-or-nothing, disp_valid is contiguous from
// slot 0 and is taken when disp_ready is high. Writebacks (wb_*) deliver
// parameter values (low 64 bits) and the subtract result with its overflow
// mask; cmt_* name the generated micro-ops committing this cycle, in order.
//
// Weight layout (chosen here, the framework is assumed to arrange it): the
// 16 weights for input j and neuron group g are at weight_addr + (g*IN + j)*16.
// Outputs of group g at output_addr + g*64, inputs of chunk c at +c*16.
module instr_gen
  import rs_pkg::*;
#(
  parameter int W       = GEN_WIDTH,
  parameter int VFL_WIN = 10,
  parameter int SHT_DEPTH = 128
)(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  ipreg_t                  crs_base,
  output logic                    done,
  output logic [SEQ_W:0]          outstanding,
  // dispatch
  output logic [W-1:0]            disp_valid,
  output rs_uop_t [W-1:0]         disp_uop,
  input  logic                    disp_ready,
  // vector free list
  input  logic [6:0]              vfl_avail,
  input  vpreg_t [VFL_WIN-1:0]    vfl_head,
  output logic [$clog2(VFL_WIN+1)-1:0] vfl_pop,
  // integer free list
  input  logic                    ifl_avail,
  input  ipreg_t                  ifl_preg,
  output logic                    ifl_pop,
  // writeback and commit of generated micro-ops
  input  logic                    wb_valid,
  input  seq_t                    wb_seq,
  input  vreg_t                   wb_data,
  input  logic [LANES-1:0]        wb_ovf,
  input  logic [W-1:0]            cmt_valid,
  input  seq_t [W-1:0]            cmt_seq,
  // load-store reordering squash of a generated micro-op
  input  logic                    sq_valid,
  input  seq_t                    sq_seq,
  // parameter registers (freed at the end of the kernel)
  output ipreg_t [NPARAM-1:0]     param_regs,
  // event counts of this cycle
  output logic [4:0]              ev_skip,
  output logic [2:0]              ev_split,
  output logic                    ev_dwait
);

  gen_state_t                st, cur, nxt;
  gen_state_t [W-1:0]        snap;
  logic [W-1:0]              emit;
  rs_uop_t [W-1:0]           uops;
  logic [$clog2(VFL_WIN+1)-1:0] vused;
  logic                      iused;
  logic [2:0]                pa_idx;
  seq_t                      pa_seq;
  logic [4:0]                skip_n;
  logic [2:0]                split_n;
  logic                      dwait;

  // parameter table
  ipreg_t [NPARAM-1:0]           p_reg;
  logic [NPARAM-1:0][XLEN-1:0]   p_val;
  logic [NPARAM-1:0]             p_known;
  logic                          p_all;
  // delta value register
  logic                          d_valid;
  logic [LANES-1:0][7:0]         d_val;
  logic [LANES-1:0]              d_ovf, d_nz;
  logic [LANES-1:0][8:0]         d_true;
  // state history table
  gen_state_t                    sht_rd;
  logic [$clog2(SHT_DEPTH):0]    sht_cnt;
  logic [$clog2(W+1)-1:0]        n_cmt;
  logic                          commit_bundle;
  logic                          sub_emitted;
  seq_t                          committed;

  always_comb begin
    n_cmt = '0;
    for (int i = 0; i < W; i++) n_cmt += ($clog2(W+1))'(cmt_valid[i]);
  end

  param_table u_ptab (
    .clk, .rst_n, .clear(start),
    .alloc(commit_bundle && iused), .alloc_idx(pa_idx), .alloc_reg(ifl_preg), .alloc_seq(pa_seq),
    .wb_valid, .wb_seq, .wb_data(wb_data[XLEN-1:0]),
    .cmt_valid, .cmt_seq,
    .regidx(p_reg), .value(p_val), .known(p_known), .all_known(p_all)
  );

  delta_value_reg u_dvr (
    .clk, .rst_n,
    .cap_valid(wb_valid), .cap_seq(wb_seq), .cap_data(wb_data), .cap_ovf(wb_ovf),
    .want_seq(st.sub_seq), .clear(commit_bundle && sub_emitted),
    .load(sq_valid), .load_valid(sht_rd.dvalid), .load_val(sht_rd.dval), .load_ovf(sht_rd.dovf),
    .valid(d_valid), .val(d_val), .ovf(d_ovf), .nz(d_nz), .dtrue(d_true)
  );

  state_history_table #(.DEPTH(SHT_DEPTH), .WR(W), .T(gen_state_t)) u_sht (
    .clk, .rst_n, .clear(start),
    .wr_valid(commit_bundle ? emit : '0), .wr_state(snap), .wr_seq(st.seq),
    .retire(n_cmt), .sq_valid, .sq_seq, .rd_state(sht_rd), .count(sht_cnt)
  );

  assign param_regs = p_reg;

  // Kernel geometry from the parameter values
  logic [CNT_W-1:0] nc, ng;
  logic             reuse, os;
  assign nc    = CNT_W'(p_val[P_IN_SIZE]  >> 4);
  assign ng    = CNT_W'(p_val[P_OUT_SIZE] >> 4);
  assign reuse = p_val[P_FLAGS][0];
  assign os    = p_val[P_FLAGS][1];

  function automatic logic [3:0] ffs16(logic [LANES-1:0] m);
    ffs16 = '0;
    for (int i = LANES-1; i >= 0; i--) if (m[i]) ffs16 = 4'(i);
  endfunction

  // ---------------------------------------------------------------------
  // Bundle construction: W steps of the kernel state machine
  // ---------------------------------------------------------------------
  always_comb begin
    gen_state_t s;
    logic       stop;
    logic signed [8:0] left;
    int         n;
    cur        = st;
    cur.dvalid = d_valid;
    cur.dval   = d_val;
    cur.dovf   = d_ovf;
    s       = cur;
    left    = '0;
    stop    = 1'b0;
    n       = 0;
    emit    = '0;
    uops    = '0;
    snap    = '0;
    vused   = '0;
    iused   = 1'b0;
    pa_idx  = '0;
    pa_seq  = '0;
    skip_n  = '0;
    split_n = '0;
    dwait   = 1'b0;
    sub_emitted = 1'b0;

    for (int slot = 0; slot < W; slot++) begin
      rs_uop_t u;
      logic    e;
      int      nv;       // vector registers this micro-op needs
      int      m0;       // first map entry written
      logic [3:0] ln;
      u  = '0;
      e  = 1'b0;
      nv = 0;
      m0 = 0;
      ln = ffs16(s.rem);
      if (!stop && sht_cnt + ($clog2(SHT_DEPTH)+1)'(n) >= ($clog2(SHT_DEPTH)+1)'(SHT_DEPTH - 1))
        stop = 1'b1;
      if (!stop) begin
        // decide the micro-op of this step and its register needs
        unique case (s.phase)
          PH_PARAM: begin
            if (iused || !ifl_avail) stop = 1'b1;
            else begin
              e = 1'b1; u.op = OP_LDX; u.idst = ifl_preg; u.base = crs_base;
              u.imm = XLEN'(s.pk) * 8;
            end
          end
          PH_LDIN:   begin e = 1'b1; u.op = OP_LDB; nv = 1; m0 = reuse ? M_Z2 : M_Z0;
                           u.base = p_reg[P_IN_ADDR];   u.imm = XLEN'(s.c) * 16; end
          PH_LDPREV: begin e = 1'b1; u.op = OP_LDB; nv = 1; m0 = M_Z1;
                           u.base = p_reg[P_PREV_ADDR]; u.imm = XLEN'(s.c) * 16; end
          PH_SUB:    begin e = 1'b1; u.op = OP_SUB; nv = 1; m0 = M_Z0;
                           u.srca = s.map[M_Z2]; u.srcb = s.map[M_Z1]; end
          PH_LDOUT:  begin e = 1'b1; u.op = OP_LDW; nv = 1; m0 = M_ACC + int'(s.pk[1:0]);
                           u.base = p_reg[P_OUT_ADDR];
                           u.imm = XLEN'(s.g) * 64 + XLEN'(s.pk[1:0]) * 16; end
          PH_LDWT:   if (s.rem != '0) begin
                           e = 1'b1; u.op = OP_LDB; nv = 1; m0 = M_Z6;
                           u.base = p_reg[P_W_ADDR];
                           u.imm = ((XLEN'(s.g) * XLEN'(nc) + XLEN'(s.c)) * 16 + XLEN'(ln)) * 16;
                         end
          PH_MLA:    begin e = 1'b1; u.op = OP_MLA8; nv = 4; m0 = M_ACC;
                           u.srca = s.map[M_Z6]; u.srcb = s.map[M_Z0]; u.lane = ln;
                           for (int r = 0; r < 4; r++) u.acc[r] = s.map[M_ACC+r];
                           if (s.res_v) begin
                             u.use_scalar = 1'b1;
                             u.scalar = clamp8(signed'(s.res));
                           end
                     end
          PH_ST:     begin e = 1'b1; u.op = OP_STW; u.srca = s.map[M_ACC + int'(s.pk[1:0])];
                           u.base = p_reg[P_OUT_ADDR];
                           u.imm = XLEN'(s.g) * 64 + XLEN'(s.pk[1:0]) * 16; end
          PH_WAITD:  if (reuse && !s.dvalid) begin stop = 1'b1; dwait = 1'b1; end
          PH_PWAIT:  if (!p_all) stop = 1'b1;
          default:   stop = 1'b1;   // idle, done
        endcase
        if (!stop && nv > 0 &&
            (int'(vused) + nv > VFL_WIN || int'(vused) + nv > int'(vfl_avail))) stop = 1'b1;
      end

      if (!stop) begin
        if (e) begin
          snap[n] = s;
          u.seq   = s.seq;
          u.ndst  = 3'(nv);
          u.dst_arch = (m0 >= M_ACC) ? Z_ACC0 + 5'(m0 - M_ACC) :
                       (m0 == M_Z6) ? Z_W : (m0 == M_Z2) ? Z_CUR :
                       (m0 == M_Z1) ? Z_PREV : Z_DELTA;
          for (int r = 0; r < 4; r++) begin
            if (r < nv) begin
              u.dst[r]   = vfl_head[int'(vused) + r];
              u.old[r]   = s.map[m0 + r];
              u.old_v[r] = s.mapv[m0 + r];
              s.map[m0 + r]  = vfl_head[int'(vused) + r];
              s.mapv[m0 + r] = 1'b1;
            end
          end
          vused = vused + ($clog2(VFL_WIN+1))'(nv);
          if (u.op == OP_LDX) begin
            iused = 1'b1; pa_idx = s.pk; pa_seq = s.seq;
          end
          if (u.op == OP_MLA8 && u.use_scalar) split_n = split_n + 3'd1;
          if (u.op == OP_SUB) begin
            sub_emitted = 1'b1; s.sub_seq = s.seq; s.dvalid = 1'b0;
          end
          s.seq     = s.seq + 1'b1;
          uops[n]   = u;
          emit[n]   = 1'b1;
          n         = n + 1;
        end
        // next state
        unique case (s.phase)
          PH_PARAM:  if (s.pk == 3'(NPARAM-1)) s.phase = PH_PWAIT; else s.pk = s.pk + 1'b1;
          PH_PWAIT:  begin
                       s.c = '0; s.g = '0; s.pk = '0;
                       if (nc == '0 || ng == '0) s.phase = PH_DONE;
                       else s.phase = os ? PH_LDOUT : PH_LDIN;
                     end
          PH_LDIN:   s.phase = reuse ? PH_LDPREV : (os ? PH_WAITD : PH_LDOUT);
          PH_LDPREV: s.phase = PH_SUB;
          PH_SUB:    begin s.phase = os ? PH_WAITD : PH_LDOUT; s.pk = '0; end
          PH_LDOUT:  if (s.pk == 3'd3) begin s.pk = '0; s.phase = os ? PH_LDIN : PH_WAITD; end
                     else s.pk = s.pk + 1'b1;
          PH_WAITD:  begin
                       s.rem   = reuse ? d_nz : '1;
                       skip_n  = skip_n + 5'(LANES - $countones(s.rem));
                       s.phase = PH_LDWT;
                     end
          PH_LDWT:   if (s.rem == '0) begin
                       s.pk = '0;
                       if (os && s.c + 1'b1 < nc) begin s.c = s.c + 1'b1; s.phase = PH_LDIN; end
                       else s.phase = PH_ST;
                     end else begin
                       s.phase = PH_MLA;
                       s.res_v = reuse && d_ovf[ln];
                       s.res   = d_true[ln];
                     end
          PH_MLA:    begin
                       left = signed'(s.res) - 9'(signed'(clamp8(signed'(s.res))));
                       if (s.res_v && left != 0) s.res = left;
                       else begin
                         s.res_v = 1'b0;
                         s.rem[ln] = 1'b0;
                         s.phase = PH_LDWT;
                       end
                     end
          PH_ST:     if (s.pk != 3'd3) s.pk = s.pk + 1'b1;
                     else begin
                       s.pk = '0;
                       if (s.g + 1'b1 < ng) begin
                         s.g = s.g + 1'b1;
                         if (os) s.c = '0;
                         s.phase = PH_LDOUT;
                       end else if (!os && s.c + 1'b1 < nc) begin
                         s.g = '0; s.c = s.c + 1'b1; s.phase = PH_LDIN;
                       end else s.phase = PH_DONE;
                     end
          default: ;
        endcase
      end
    end
    nxt = s;
  end

  // ---------------------------------------------------------------------
  // Handshake and state update
  // ---------------------------------------------------------------------
  assign commit_bundle = !sq_valid && !start && (disp_ready || emit == '0);
  assign disp_valid = (sq_valid || start) ? '0 : emit;
  assign disp_uop   = uops;
  assign vfl_pop    = commit_bundle ? vused : '0;
  assign ifl_pop    = commit_bundle && iused;
  assign ev_skip    = commit_bundle ? skip_n : '0;
  assign ev_split   = commit_bundle ? split_n : '0;
  assign ev_dwait   = dwait;
  assign done       = (st.phase == PH_DONE);
  assign outstanding = (SEQ_W+1)'(st.seq - committed);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= '0;
      st.phase  <= PH_IDLE;
      committed <= '0;
    end else begin
      committed <= committed + seq_t'(n_cmt);
      if (start) begin
        st.phase  <= PH_PARAM;
        st.pk     <= '0;
        st.mapv   <= '0;
        st.rem    <= '0;
        st.res_v  <= 1'b0;
        st.c      <= '0;
        st.g      <= '0;
      end else if (sq_valid) begin
        st <= sht_rd;
      end else if (commit_bundle) begin
        st <= nxt;
      end
    end
  end

  // Only generated micro-ops commit through this port: never more than issued
  property p_commit_bounded;
    @(posedge clk) disable iff (!rst_n) outstanding >= (SEQ_W+1)'(n_cmt);
  endproperty
  a_commit_bounded: assert property (p_commit_bounded);

endmodule
