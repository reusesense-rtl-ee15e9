// reusesense: ReuseSense, the hardware added to an out-of-order core so that
// a DNN layer can be evaluated with computation reuse.
//
// It holds ReuseSensor, which sits between decode and dispatch:
//   rs_ctrl    state machine, scratchpad (copy of the vector register file)
//              and rename map backup table;
//   instr_gen  instruction generation logic with the parameter table, the
//              delta value register and the state history table;
// and the two SIMD execution extensions the generated kernel needs:
//   mla8_unit       mla8 (16 int8 products accumulated in four 128-bit
//                   registers of 32-bit lanes);
//   delta_sub_unit  byte subtract with a per-lane overflow flag.
// The core itself (decode, rename, free lists, ROB, issue, register files,
// load/store unit, caches) is outside; its connections are the ports below.
//
// Flow of one crs instruction: decode raises crs_valid and is blocked
// (decode_block) until crs_done. ReuseSensor drains and backs up the vector
// state, emits the kernel's micro-ops on disp_* (up to four per cycle,
// already renamed, with sequence numbers), watches their writebacks (wb_*)
// and commits (cmt_*), recovers from squashes of its micro-ops (sq_*),
// and finally restores the vector state.
// The core executes OP_SUB and OP_MLA8 micro-ops on the sub_* and mla_*
// ports (one-cycle latency each).
//
// The partitioning into these blocks follows the published block diagram of
// the core with ReuseSensor; the port-level interface to the core is this
// design's own, since the core's side is not specified.

module reusesense
  import rs_pkg::*;
#(
  parameter int VFL_WIN   = 10,
  parameter int SHT_DEPTH = 128
)(
  input  logic                      clk,
  input  logic                      rst_n,
  // decode
  input  logic                      crs_valid,
  input  ipreg_t                    crs_src,
  output logic                      decode_block,
  output logic                      crs_done,
  input  logic                      pipe_empty,
  // vector register file
  output logic                      vrf_rd_en,
  output vpreg_t                    vrf_rd_idx,
  input  vreg_t                     vrf_rd_data,
  input  logic [NVPREG-1:0]         vrf_ready,
  output logic                      vrf_wr_en,
  output vpreg_t                    vrf_wr_idx,
  output vreg_t                     vrf_wr_data,
  // rename map, free lists
  input  logic [NARCH-1:0][VPREG_W-1:0] rmt_map,
  output logic                      rmt_restore_valid,
  output logic [NARCH-1:0][VPREG_W-1:0] rmt_restore_map,
  output logic                      vfl_release_all,
  input  logic [6:0]                vfl_avail,
  input  vpreg_t [VFL_WIN-1:0]      vfl_head,
  output logic [$clog2(VFL_WIN+1)-1:0] vfl_pop,
  input  logic                      ifl_avail,
  input  ipreg_t                    ifl_preg,
  output logic                      ifl_pop,
  output logic                      ifl_free_valid,
  output ipreg_t                    ifl_free_preg,
  // dispatch
  output logic [GEN_WIDTH-1:0]      disp_valid,
  output rs_uop_t [GEN_WIDTH-1:0]   disp_uop,
  input  logic                      disp_ready,
  // writeback, commit, squash of generated micro-ops
  input  logic                      wb_valid,
  input  seq_t                      wb_seq,
  input  vreg_t                     wb_data,
  input  logic [LANES-1:0]          wb_ovf,
  input  logic [GEN_WIDTH-1:0]      cmt_valid,
  input  seq_t [GEN_WIDTH-1:0]      cmt_seq,
  input  logic                      sq_valid,
  input  seq_t                      sq_seq,
  // SIMD extension: mla8
  input  logic                      mla_valid,
  input  vreg_t                     mla_w,
  input  vreg_t                     mla_x,
  input  logic [3:0]                mla_k,
  input  logic                      mla_use_scalar,
  input  logic [7:0]                mla_scalar,
  input  vreg_t [3:0]               mla_acc_in,
  output logic                      mla_out_valid,
  output vreg_t [3:0]               mla_acc_out,
  // SIMD extension: delta subtract
  input  logic                      sub_valid,
  input  vreg_t                     sub_a,
  input  vreg_t                     sub_b,
  output logic                      sub_out_valid,
  output vreg_t                     sub_d,
  output logic [LANES-1:0]          sub_ovf,
  // status
  output logic [2:0]                rs_state,
  output logic [4:0]                ev_skip,
  output logic [2:0]                ev_split,
  output logic                      ev_dwait
);

  logic            gen_start, gen_done;
  logic [SEQ_W:0]  gen_outstanding;
  ipreg_t          crs_base;
  ipreg_t [NPARAM-1:0] param_regs;

  rs_ctrl u_ctrl (
    .clk, .rst_n, .crs_valid, .crs_src, .crs_base, .decode_block, .crs_done, .pipe_empty,
    .vrf_rd_en, .vrf_rd_idx, .vrf_rd_data, .vrf_ready, .vrf_wr_en, .vrf_wr_idx, .vrf_wr_data,
    .rmt_map, .rmt_restore_valid, .rmt_restore_map, .vfl_release_all,
    .param_regs, .ifl_free_valid, .ifl_free_preg,
    .gen_start, .gen_done, .gen_outstanding, .state_o(rs_state)
  );

  instr_gen #(.VFL_WIN(VFL_WIN), .SHT_DEPTH(SHT_DEPTH)) u_gen (
    .clk, .rst_n, .start(gen_start), .crs_base, .done(gen_done), .outstanding(gen_outstanding),
    .disp_valid, .disp_uop, .disp_ready,
    .vfl_avail, .vfl_head, .vfl_pop, .ifl_avail, .ifl_preg, .ifl_pop,
    .wb_valid, .wb_seq, .wb_data, .wb_ovf, .cmt_valid, .cmt_seq,
    .sq_valid, .sq_seq, .param_regs, .ev_skip, .ev_split, .ev_dwait
  );

  mla8_unit u_mla8 (
    .clk, .rst_n, .in_valid(mla_valid), .w(mla_w), .x(mla_x), .k(mla_k),
    .use_scalar(mla_use_scalar), .scalar(mla_scalar), .acc_in(mla_acc_in),
    .out_valid(mla_out_valid), .acc_out(mla_acc_out)
  );

  delta_sub_unit u_sub (
    .clk, .rst_n, .in_valid(sub_valid), .a(sub_a), .b(sub_b),
    .out_valid(sub_out_valid), .d(sub_d), .ovf(sub_ovf)
  );

endmodule
