// state_history_table: per generated instruction, the generator state from
// just before that instruction was generated.
//
// Entries are written in sequence-number order, up to WR (4) per cycle, at
// index seq mod DEPTH, and leave in the same order as generated
// instructions commit (up to 4 per cycle). On a squash caused by a
// load-store reordering fault of generated instruction 'sq_seq', the entry of
// that instruction is read out (rd_state, combinational) so the generator can
// return to it, and every entry from sq_seq on is dropped. 'count' is the
// number of live entries; the generator stops when the table is full.
//
// Timing: writes, retirement and truncation take effect at the clock edge.
// Indexing by sequence number, eviction at commit and use for load-store
// reordering recovery follow the published design. The depth (the 128
// reorder-buffer entries of the evaluated core) and storing the complete
// generator state are this design's choice.

module state_history_table
  import rs_pkg::*;
#(
  parameter int DEPTH = 128,
  parameter int WR    = GEN_WIDTH,
  parameter type T    = gen_state_t,
  localparam int AW   = $clog2(DEPTH)
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [WR-1:0]        wr_valid,    // contiguous from bit 0
  input  T     [WR-1:0]        wr_state,
  input  seq_t                 wr_seq,      // seq of entry 0 of this write
  input  logic [$clog2(WR+1)-1:0] retire,   // entries committed this cycle
  input  logic                 sq_valid,
  input  seq_t                 sq_seq,
  output T                     rd_state,
  output logic [AW:0]          count
);

  T             mem [DEPTH];
  seq_t         head;        // seq of the oldest live entry

  assign rd_state = mem[sq_seq[AW-1:0]];

  always_ff @(posedge clk) begin
    for (int i = 0; i < WR; i++)
      if (wr_valid[i] && !sq_valid) mem[AW'(wr_seq + seq_t'(i))] <= wr_state[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head  <= '0;
      count <= '0;
    end else if (clear) begin
      head  <= wr_seq;
      count <= '0;
    end else if (sq_valid) begin
      head  <= head + seq_t'(retire);
      count <= (AW+1)'(sq_seq - head) - (AW+1)'(retire);
    end else begin
      head  <= head + seq_t'(retire);
      count <= count + (AW+1)'($countones(wr_valid)) - (AW+1)'(retire);
    end
  end

endmodule
