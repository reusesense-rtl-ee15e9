// rs_pkg: types and constants shared by the ReuseSensor blocks.
//
// The numbers follow the evaluated core: 128-bit vectors holding 16 signed
// bytes (or four 32-bit accumulators), 48 vector physical registers (6-bit
// index), 128 integer physical registers (7-bit index), 4-wide generation.
// The micro-op format (rs_uop_t), the phase encoding of the generator and the
// parameter-structure layout are this design's own choices.
package rs_pkg;

  localparam int VLEN      = 128;
  localparam int LANES     = 16;          // int8 lanes per vector register
  localparam int XLEN      = 64;
  localparam int NVPREG    = 48;
  localparam int VPREG_W   = 6;
  localparam int IPREG_W   = 7;
  localparam int NARCH     = 32;          // architectural z registers
  localparam int SEQ_W     = 8;           // sequence number width
  localparam int CNT_W     = 16;          // chunk / group counters
  localparam int GEN_WIDTH = 4;
  localparam int NPARAM    = 7;

  typedef logic [VPREG_W-1:0] vpreg_t;
  typedef logic [IPREG_W-1:0] ipreg_t;
  typedef logic [SEQ_W-1:0]   seq_t;
  typedef logic [VLEN-1:0]    vreg_t;

  // Parameter-table rows (Fig. 8 rows, plus the flags word)
  typedef enum logic [2:0] {
    P_IN_ADDR = 3'd0, P_W_ADDR = 3'd1, P_OUT_ADDR = 3'd2, P_PREV_ADDR = 3'd3,
    P_IN_SIZE = 3'd4, P_OUT_SIZE = 3'd5, P_FLAGS = 3'd6
  } param_e;

  // Fixed architectural registers used by the generated kernel (Fig. 6)
  localparam logic [4:0] Z_DELTA = 5'd0;   // z0: inputs (basic) / deltas (reuse)
  localparam logic [4:0] Z_PREV  = 5'd1;   // z1: previous inputs
  localparam logic [4:0] Z_CUR   = 5'd2;   // z2: current inputs
  localparam logic [4:0] Z_W     = 5'd6;   // z6: weights
  localparam logic [4:0] Z_ACC0  = 5'd10;  // z10..z13: outputs

  typedef enum logic [2:0] {
    OP_LDX  = 3'd0,   // scalar 64-bit load of a kernel parameter
    OP_LDB  = 3'd1,   // 16-byte vector load (inputs, weights)
    OP_LDW  = 3'd2,   // 16-byte vector load of four 32-bit outputs
    OP_SUB  = 3'd3,   // byte-wise subtract, srca - srcb
    OP_MLA8 = 3'd4,   // mla8 acc[0..3] += srca[j] * srcb[lane]
    OP_STW  = 3'd5    // 16-byte vector store of four outputs
  } rs_op_e;

  // One generated micro-op, as sent to dispatch.
  typedef struct packed {
    seq_t                   seq;
    rs_op_e                 op;
    logic [2:0]             ndst;      // vector destinations (0, 1 or 4)
    logic [4:0]             dst_arch;  // first destination arch register
    logic [3:0][VPREG_W-1:0] dst;      // new physical destinations
    logic [3:0]             old_v;     // previous mapping valid
    logic [3:0][VPREG_W-1:0] old;      // previous mappings, freed at commit
    vpreg_t                 srca;      // sub: z2, mla8: weights, stw: data
    vpreg_t                 srcb;      // sub: z1, mla8: z0
    logic [3:0][VPREG_W-1:0] acc;      // mla8 accumulator sources
    logic [3:0]             lane;      // mla8 element index k of z0[k]
    logic                   use_scalar;// mla8 uses 'scalar' instead of z0[k]
    logic [7:0]             scalar;
    ipreg_t                 base;      // address base register
    logic [XLEN-1:0]        imm;       // address offset
    ipreg_t                 idst;      // OP_LDX destination
  } rs_uop_t;

  typedef enum logic [3:0] {
    PH_IDLE, PH_PARAM, PH_PWAIT, PH_LDIN, PH_LDPREV, PH_SUB, PH_LDOUT,
    PH_WAITD, PH_LDWT, PH_MLA, PH_ST, PH_DONE
  } gen_phase_e;

  // Index of the fixed registers in the generator's private map
  localparam int M_Z0 = 0, M_Z1 = 1, M_Z2 = 2, M_Z6 = 3, M_ACC = 4; // M_ACC..M_ACC+3
  localparam int NMAP = 8;

  // Everything the generator needs to restart at a given micro-op; it is
  // what the state history table keeps per generated instruction.
  typedef struct packed {
    gen_phase_e                phase;
    logic [2:0]                pk;        // param index / output register k
    logic [CNT_W-1:0]          c;         // input chunk (16 inputs)
    logic [CNT_W-1:0]          g;         // neuron group (16 outputs)
    logic [LANES-1:0]          rem;       // lanes still to process
    logic                      res_v;     // residual of a split delta pending
    logic [8:0]                res;       // remaining part of the delta
    logic [NMAP-1:0]           mapv;
    logic [NMAP-1:0][VPREG_W-1:0] map;
    seq_t                      sub_seq;   // sequence number of the last sub
    logic                      dvalid;    // delta register holds this chunk
    logic [LANES-1:0][7:0]     dval;      // delta register contents
    logic [LANES-1:0]          dovf;
    seq_t                      seq;       // next sequence number
  } gen_state_t;

  // True signed delta of one lane from its wrapped byte and overflow flag.
  function automatic logic signed [8:0] true_delta(logic [7:0] w, logic ovf);
    return ovf ? {~w[7], w} : {w[7], w};
  endfunction

  // Largest part of a 9-bit delta that fits a signed byte.
  function automatic logic [7:0] clamp8(logic signed [8:0] d);
    if (d > 9'sd127)       return 8'h7f;
    else if (d < -9'sd128) return 8'h80;
    else                   return d[7:0];
  endfunction

endpackage
