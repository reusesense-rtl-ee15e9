// delta_sub_unit: the byte-wise vector subtract that computes the deltas of
// the reuse kernel (sub z0, z2, z1: current inputs minus previous inputs).
//
// Each of the 16 lanes subtracts two signed bytes. The byte result wraps; a
// lane whose true difference lies outside -128..127 raises its bit in
// 'ovf'. ReuseSensor needs that flag to split such a delta into two parts
// that each fit a byte. The subtract follows the reuse equations; the
// overflow mask as an extra result is this design's choice.
//
// Timing: one operation per cycle, registered result, 1-cycle latency.
module delta_sub_unit
  import rs_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  vreg_t            a,        // current inputs
  input  vreg_t            b,        // previous inputs
  output logic             out_valid,
  output vreg_t            d,        // wrapped deltas
  output logic [LANES-1:0] ovf       // per-lane overflow
);

  vreg_t             dn;
  logic [LANES-1:0]  on;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [8:0] t;
      t = 9'(signed'(a[l*8 +: 8])) - 9'(signed'(b[l*8 +: 8]));
      dn[l*8 +: 8] = t[7:0];
      on[l]        = (t[8] != t[7]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      d         <= '0;
      ovf       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        d   <= dn;
        ovf <= on;
      end
    end
  end

endmodule
