// param_table: ReuseSensor's parameter table.
//
// One row per kernel parameter: input, weight, output and previous-input
// addresses, input size, output size (the rows of the parameter table), and
// a flags word (bit 0 kernelMode: 1 = reuse kernel, bit 1 dataflow:
// 1 = output stationary). When the generator emits the load of parameter k
// it records the integer physical register it allocated and the load's
// sequence number (alloc). When a writeback with that sequence number
// arrives the value is kept; it is marked known when that load commits
// (cmt_* inputs). Sequence numbers wrap, so each row takes only the first
// matching writeback and commit after its load was generated.
// Addresses are used by the generated loads through the register index
// (regidx); sizes and flags through their values.
// 'clear' empties the table at the start of a kernel.
//
// Timing: all updates at the clock edge; reads are combinational.
//
// The six address and size rows follow the published parameter table, as
// does the rule that a value becomes known when its load commits. The flags
// row, and holding the value next to the register index, are this design's
// choice.

module param_table
  import rs_pkg::*;
#(
  parameter int NP = NPARAM
)(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      alloc,
  input  logic [2:0]                alloc_idx,
  input  ipreg_t                    alloc_reg,
  input  seq_t                      alloc_seq,
  input  logic                      wb_valid,
  input  seq_t                      wb_seq,
  input  logic [XLEN-1:0]           wb_data,
  input  logic [GEN_WIDTH-1:0]      cmt_valid,
  input  seq_t [GEN_WIDTH-1:0]      cmt_seq,
  output ipreg_t [NP-1:0]           regidx,
  output logic [NP-1:0][XLEN-1:0]   value,
  output logic [NP-1:0]             known,
  output logic                      all_known
);

  logic [NP-1:0]        used, have;
  seq_t [NP-1:0]        seqs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0; have <= '0; known <= '0;
      regidx <= '0; value <= '0; seqs <= '0;
    end else if (clear) begin
      used <= '0; have <= '0; known <= '0;
    end else begin
      if (alloc) begin
        used[alloc_idx]   <= 1'b1;
        regidx[alloc_idx] <= alloc_reg;
        seqs[alloc_idx]   <= alloc_seq;
      end
      for (int p = 0; p < NP; p++) begin
        if (used[p] && !have[p] && wb_valid && wb_seq == seqs[p]) begin
          value[p] <= wb_data;
          have[p]  <= 1'b1;
        end
        for (int c = 0; c < GEN_WIDTH; c++)
          if (used[p] && have[p] && cmt_valid[c] && cmt_seq[c] == seqs[p]) known[p] <= 1'b1;
      end
    end
  end

  assign all_known = &(known & have);

endmodule
