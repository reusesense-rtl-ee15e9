// mla8_unit: execution of the mla8 instruction (multiply-accumulate by an
// indexed element into four 128-bit destination registers).
//
// mla8 zd, zw, zx[k] multiplies each of the 16 signed bytes of zw by the
// signed byte zx[k] and adds product j to 32-bit lane j%4 of destination
// register zd+j/4 (z10..z13 in the kernel). Weight bytes 0..3 therefore go to
// the first destination, 12..15 to the fourth, as in the mla8 description.
// When use_scalar is set, the byte 'scalar' is used instead of zx[k]; the
// generator uses this for the two halves of a delta that overflowed a byte.
// That operand is this design's way of carrying the split value.
//
// Timing: one instruction per cycle, result registered (1-cycle latency),
// out_valid follows in_valid by one cycle.
module mla8_unit
  import rs_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  vreg_t                w,          // zw: 16 x int8 weights
  input  vreg_t                x,          // zx: 16 x int8 inputs/deltas
  input  logic [3:0]           k,          // element index of zx
  input  logic                 use_scalar,
  input  logic [7:0]           scalar,
  input  vreg_t [3:0]          acc_in,     // z10..z13 before
  output logic                 out_valid,
  output vreg_t [3:0]          acc_out     // z10..z13 after
);

  logic signed [7:0]  xs;
  vreg_t [3:0]        sum;

  always_comb begin
    xs = use_scalar ? signed'(scalar) : signed'(x[k*8 +: 8]);
    for (int r = 0; r < 4; r++) begin
      for (int l = 0; l < 4; l++) begin
        logic signed [7:0]  wb;
        logic signed [31:0] a;
        wb = signed'(w[(r*4+l)*8 +: 8]);
        a  = signed'(acc_in[r][l*32 +: 32]);
        sum[r][l*32 +: 32] = a + 32'(wb * xs);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      acc_out   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) acc_out <= sum;
    end
  end

endmodule
