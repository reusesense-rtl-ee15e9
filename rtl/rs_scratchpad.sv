// rs_scratchpad: on-chip scratchpad that holds the vector physical register
// file while ReuseSensor owns it (48 entries of 128 bits = 768 bytes, the
// size of the vector register file).
//
// Entry i holds vector physical register i. One synchronous write port and
// one read port with registered data (read data valid one cycle after
// rd_en), so it maps onto a plain single-port-per-direction SRAM.
//
// The size (one entry per vector physical register, 768 bytes) follows the
// published configuration; the port arrangement is this design's choice.

module rs_scratchpad
  import rs_pkg::*;
#(
  parameter int ENTRIES = NVPREG,
  parameter int W       = VLEN,
  localparam int AW     = $clog2(ENTRIES)
)(
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_idx,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_idx,
  output logic [W-1:0]  rd_data
);

  logic [W-1:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= wr_data;
    if (rd_en) rd_data <= mem[rd_idx];
  end

endmodule
