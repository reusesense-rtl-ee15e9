// rs_ctrl: ReuseSensor's controller, with the scratchpad and the rename map
// backup table it drives.
//
// States (the five of the ReuseSensor walk-through, plus Idle):
//   IDLE     waiting for a decoded crs (crs_valid; crs_src is the physical
//            register holding the parameter-structure address).
//   PREP     decode is blocked. The vector rename map is copied into the
//            backup table on entry. Every vector physical register 0..47 is
//            copied to the scratchpad, each one as soon as the core reports
//            it ready (a register still being written is copied once it is
//            written). Leaves when all are copied and the core reports that
//            every instruction older than crs has committed (pipe_empty);
//            then all vector physical registers are handed back to the core's
//            free list (vfl_release_all).
//   GEN      the instruction generator runs (gen_start on entry) through its
//            parameter loads and the kernel; leaves when it is done.
//   FINISH   waits until every generated instruction has committed.
//   RESTORE  writes the scratchpad back into the vector register file, one
//            register per cycle, returns the rename map (rmt_restore_valid),
//            frees the seven integer registers that held parameters, and
//            unblocks decode (crs_done).
// Core register-file port timing: read data arrives one cycle after
// vrf_rd_en (assumed); writes take effect at the clock edge.
//
// The states, the blocking of decode, the drain, the backup of ready
// registers (late ones when they become ready), handing the registers to the
// free list, and freeing the integer registers at the end follow the
// published design. The one-register-per-cycle save and restore, and the
// exact handshakes with the core, are this design's choice.

module rs_ctrl
  import rs_pkg::*;
#(
  parameter int NV = NVPREG
)(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      crs_valid,
  input  ipreg_t                    crs_src,
  output ipreg_t                    crs_base,
  output logic                      decode_block,
  output logic                      crs_done,
  input  logic                      pipe_empty,
  // vector register file
  output logic                      vrf_rd_en,
  output vpreg_t                    vrf_rd_idx,
  input  vreg_t                     vrf_rd_data,
  input  logic [NV-1:0]             vrf_ready,
  output logic                      vrf_wr_en,
  output vpreg_t                    vrf_wr_idx,
  output vreg_t                     vrf_wr_data,
  // vector rename map and free list
  input  logic [NARCH-1:0][VPREG_W-1:0] rmt_map,
  output logic                      rmt_restore_valid,
  output logic [NARCH-1:0][VPREG_W-1:0] rmt_restore_map,
  output logic                      vfl_release_all,
  // integer registers used for parameters
  input  ipreg_t [NPARAM-1:0]       param_regs,
  output logic                      ifl_free_valid,
  output ipreg_t                    ifl_free_preg,
  // generator
  output logic                      gen_start,
  input  logic                      gen_done,
  input  logic [SEQ_W:0]            gen_outstanding,
  output logic [2:0]                state_o
);

  typedef enum logic [2:0] {S_IDLE, S_PREP, S_GEN, S_FINISH, S_RESTORE} rs_state_e;

  rs_state_e  state;
  logic [6:0] idx;          // register being copied
  logic       rd_pend;      // read issued last cycle
  vpreg_t     rd_pend_idx;
  logic [2:0] fidx;         // integer register being freed
  logic       sp_wr_en, sp_rd_en;
  vpreg_t     sp_wr_idx, sp_rd_idx;
  vreg_t      sp_wr_data, sp_rd_data;
  logic       rbt_saved;

  rs_scratchpad #(.ENTRIES(NV), .W(VLEN)) u_sp (
    .clk, .wr_en(sp_wr_en), .wr_idx(sp_wr_idx), .wr_data(sp_wr_data),
    .rd_en(sp_rd_en), .rd_idx(sp_rd_idx), .rd_data(sp_rd_data)
  );

  rename_backup_table u_rbt (
    .clk, .rst_n, .save(state == S_IDLE && crs_valid), .map_in(rmt_map),
    .release_i(crs_done), .map_out(rmt_restore_map), .saved(rbt_saved)
  );

  logic backup_done, restore_done;
  assign backup_done  = (idx == 7'(NV)) && !rd_pend;
  assign restore_done = (idx == 7'(NV)) && !rd_pend && fidx == 3'(NPARAM);

  // backup: core RF -> scratchpad; restore: scratchpad -> core RF
  always_comb begin
    vrf_rd_en   = (state == S_PREP) && idx < 7'(NV) && vrf_ready[idx[VPREG_W-1:0]];
    vrf_rd_idx  = idx[VPREG_W-1:0];
    sp_wr_en    = (state == S_PREP) && rd_pend;
    sp_wr_idx   = rd_pend_idx;
    sp_wr_data  = vrf_rd_data;
    sp_rd_en    = (state == S_RESTORE) && idx < 7'(NV);
    sp_rd_idx   = idx[VPREG_W-1:0];
    vrf_wr_en   = (state == S_RESTORE) && rd_pend;
    vrf_wr_idx  = rd_pend_idx;
    vrf_wr_data = sp_rd_data;
    ifl_free_valid = (state == S_RESTORE) && fidx < 3'(NPARAM);
    ifl_free_preg  = param_regs[fidx < 3'(NPARAM) ? fidx : 3'd0];
  end

  assign decode_block      = (state != S_IDLE);
  assign state_o           = state;
  assign gen_start         = (state == S_PREP) && backup_done && pipe_empty;
  assign vfl_release_all   = gen_start;
  assign rmt_restore_valid = (state == S_RESTORE) && restore_done;
  assign crs_done          = rmt_restore_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      idx         <= '0;
      rd_pend     <= 1'b0;
      rd_pend_idx <= '0;
      fidx        <= '0;
      crs_base    <= '0;
    end else begin
      rd_pend     <= vrf_rd_en || sp_rd_en;
      rd_pend_idx <= idx[VPREG_W-1:0];
      if (vrf_rd_en || sp_rd_en) idx <= idx + 1'b1;
      if (ifl_free_valid) fidx <= fidx + 1'b1;
      unique case (state)
        S_IDLE:    if (crs_valid) begin
                     state <= S_PREP; idx <= '0; crs_base <= crs_src;
                   end
        S_PREP:    if (gen_start) state <= S_GEN;
        S_GEN:     if (gen_done) state <= S_FINISH;
        S_FINISH:  if (gen_outstanding == '0) begin
                     state <= S_RESTORE; idx <= '0; fidx <= '0;
                   end
        S_RESTORE: if (restore_done) state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

  // The backup copy must exist whenever registers are handed back
  a_backup_before_release: assert property (@(posedge clk) disable iff (!rst_n)
    rmt_restore_valid |-> rbt_saved);

endmodule
