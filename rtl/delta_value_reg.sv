// delta_value_reg: ReuseSensor's 16-byte delta value register.
//
// When the subtract that computes the deltas of an input chunk writes back
// (cap_valid with cap_seq equal to the sequence number the generator is
// waiting for, want_seq), the 16 wrapped delta bytes and their overflow flags
// are stored and 'valid' is set. From the stored bytes the register derives
// each lane's true 9-bit delta and the mask of lanes whose delta is non-zero:
// only those lanes get a weight load and an mla8. A lane that overflowed is
// always non-zero (a wrapped zero with overflow is impossible).
// 'clear' (a new subtract generated) drops valid; 'load' overwrites the whole
// register from a saved generator state after a squash.
//
// Timing: capture and clear take effect at the next clock edge; nz and
// dtrue are combinational from the stored contents.
//
// The 16-byte register, its capture from the subtract and the zero test
// that decides which lanes are skipped follow the published design. Keeping
// an overflow bit per lane, and reloading the register on a squash, are
// this design's own additions needed for the delta split and the recovery.

module delta_value_reg
  import rs_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cap_valid,
  input  seq_t                    cap_seq,
  input  vreg_t                   cap_data,
  input  logic [LANES-1:0]        cap_ovf,
  input  seq_t                    want_seq,
  input  logic                    clear,
  input  logic                    load,
  input  logic                    load_valid,
  input  logic [LANES-1:0][7:0]   load_val,
  input  logic [LANES-1:0]        load_ovf,
  output logic                    valid,
  output logic [LANES-1:0][7:0]   val,
  output logic [LANES-1:0]        ovf,
  output logic [LANES-1:0]        nz,
  output logic [LANES-1:0][8:0]   dtrue
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      val   <= '0;
      ovf   <= '0;
    end else if (load) begin
      valid <= load_valid;
      val   <= load_val;
      ovf   <= load_ovf;
    end else if (cap_valid && cap_seq == want_seq && !valid) begin
      valid <= 1'b1;
      val   <= cap_data;
      ovf   <= cap_ovf;
    end else if (clear) begin
      valid <= 1'b0;
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      dtrue[l] = true_delta(val[l], ovf[l]);
      nz[l]    = (val[l] != 8'd0) || ovf[l];
    end
  end

endmodule
