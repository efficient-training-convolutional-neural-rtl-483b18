// eg_pkg: types and constants shared by the training accelerator.
//
// The accelerator moves every operand as a "flit": a data word with a
// position (offset) inside its row, a small routing tag and an end-of-row
// flag. The widths of the reuse operand (4 bit) and of partial sums (16 bit)
// follow the PE scratchpad sizes of the architecture; the 8-bit streamed
// operand, the 8-bit offset and the 4-bit tag are this design's own choices.
package eg_pkg;

  // Streamed operand: input activation (phases 1 and 3) or error gradient
  // (phase 2). Assumed width.
  parameter int unsigned ACT_W  = 8;
  // Reuse operand held in the PE scratchpad (weight, |B| or error gradient).
  parameter int unsigned RW     = 4;
  // Partial sum width.
  parameter int unsigned PSUM_W = 16;
  // Position of an element within a row.
  parameter int unsigned OFF_W  = 8;
  // Routing tag (PE row, activation diagonal or PE column).
  parameter int unsigned TAG_W  = 4;

  // The three phases of one training step.
  typedef enum logic [1:0] {
    PH_FWD   = 2'd0,  // phase 1: a_out  = W   * a_in
    PH_BWD   = 2'd1,  // phase 2: d_in   = FB  * d_out  (FB = sign(W)|B|)
    PH_WGRAD = 2'd2   // phase 3: dW     = a   * d
  } phase_e;

  typedef struct packed {
    logic                     last;  // final element of a row / transfer
    logic [TAG_W-1:0]         tag;   // routing tag
    logic [OFF_W-1:0]         off;   // element position
    logic signed [PSUM_W-1:0] data;  // payload (sign-extended operand)
  } flit_t;

  parameter int unsigned FLIT_W = $bits(flit_t);

  // Router port numbering.
  typedef enum logic [2:0] {
    RP_LOCAL = 3'd0,
    RP_NORTH = 3'd1,
    RP_EAST  = 3'd2,
    RP_SOUTH = 3'd3,
    RP_WEST  = 3'd4,
    RP_NONE  = 3'd7
  } rport_e;

  parameter int unsigned RPORTS = 5;

  // Reuse-load flit payload: data[RW-1:0] is the weight (or, in phase 3,
  // the error gradient) and data[2*RW-1:RW] the feedback magnitude |B|.
  function automatic logic signed [RW-1:0] load_w(logic [PSUM_W-1:0] d);
    return d[RW-1:0];
  endfunction

  function automatic logic [RW-1:0] load_b(logic [PSUM_W-1:0] d);
    return d[2*RW-1:RW];
  endfunction

  // Roles of the three GLB banks and the three routers of a PC.
  parameter int unsigned NCH    = 3;
  parameter int unsigned CH_ACT = 0;  // input activations / error gradients
  parameter int unsigned CH_LD  = 1;  // weights + |B| / error gradients
  parameter int unsigned CH_PS  = 2;  // partial sums (results)

  // Per-PC configuration, held stable during a pass.
  typedef struct packed {
    phase_e                  phase;
    logic [7:0]              psum_len;     // elements per output row
    logic                    prune_en;     // stochastic pruning in phase 2
    logic [PSUM_W-2:0]       tau;          // external threshold
    logic                    use_auto_tau; // use the tau unit's result
    logic [3:0]              p_sel;        // pruning rate P = p_sel/10
    rport_e [NCH-1:0][RPORTS-1:0] rsel;    // router output selections
  } pc_cfg_t;

  // Per-bank stream control of a GLB bank (addresses are truncated to the
  // bank size).
  typedef struct packed {
    logic        rd_start;
    logic [15:0] rd_base;
    logic [15:0] rd_len;
    logic        wr_start;
    logic [15:0] wr_base;
  } glb_ctrl_t;

  // DRAM-side access to one PC's GLB cluster.
  typedef struct packed {
    logic [1:0]  bank;
    logic        we;
    logic [15:0] waddr;
    flit_t       wdata;
    logic [15:0] raddr;
  } glb_ext_t;

endpackage
