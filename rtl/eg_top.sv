// eg_top: the training accelerator: PC_ROWS x PC_COLS processing clusters
// (2 x 3 = 6 by default) whose routers form three meshes, one per data
// channel (activations, reuse rows, results).
//
// Each PC holds 3 x 4 PEs, a GLB cluster and a router cluster (see
// processing_cluster). The routers of a channel connect to the routers of the
// same channel in the PCs to the north, east, south and west; links at the
// edge of the array are tied off (no input, output never accepted). All
// control is by ports: a host writes rows into the GLBs through the DRAM-side
// ports (the DRAM itself is outside this design), sets each PC's
// configuration (training phase, row length, router paths, pruning), starts
// the GLB streams, waits for the results and reads them back.
// PC index p = r*PC_COLS + c for the PC in mesh row r, column c.
module eg_top
  import eg_pkg::*;
#(
  parameter int unsigned PC_ROWS     = 2,
  parameter int unsigned PC_COLS     = 3,
  parameter int unsigned ROWS        = 3,
  parameter int unsigned COLS        = 4,
  parameter int unsigned REUSE_DEPTH = 64,
  parameter int unsigned PSUM_DEPTH  = 64,
  parameter int unsigned GLB_DEPTH   = 512,
  parameter int unsigned TAU_LOG_N   = 10
) (
  input  logic       clk,
  input  logic       rst_n,
  input  pc_cfg_t    cfg          [PC_ROWS*PC_COLS],
  input  logic       tau_start    [PC_ROWS*PC_COLS],
  input  glb_ext_t   ext          [PC_ROWS*PC_COLS],
  output flit_t      ext_rdata    [PC_ROWS*PC_COLS],
  input  glb_ctrl_t  glb_ctrl     [PC_ROWS*PC_COLS][NCH],
  output logic       glb_rd_busy  [PC_ROWS*PC_COLS][NCH],
  output logic [15:0] glb_wr_count[PC_ROWS*PC_COLS][NCH],
  output logic       busy         [PC_ROWS*PC_COLS],
  output logic [31:0] mac_count   [PC_ROWS*PC_COLS],
  output logic [31:0] act_skip_count [PC_ROWS*PC_COLS],
  output logic [31:0] w_skip_count   [PC_ROWS*PC_COLS],
  output logic [31:0] kept_count     [PC_ROWS*PC_COLS],
  output logic [31:0] rounded_count  [PC_ROWS*PC_COLS],
  output logic [31:0] pruned_count   [PC_ROWS*PC_COLS],
  output logic [PSUM_W-2:0] tau_auto [PC_ROWS*PC_COLS],
  output logic       tau_done     [PC_ROWS*PC_COLS]
);
  localparam int unsigned NPC = PC_ROWS * PC_COLS;

  // mesh link arrays, [pc][channel][dir] with dir 0..3 = N, E, S, W
  logic  m_in_valid  [NPC][NCH][4], m_in_ready  [NPC][NCH][4];
  flit_t m_in_data   [NPC][NCH][4];
  logic  m_out_valid [NPC][NCH][4], m_out_ready [NPC][NCH][4];
  flit_t m_out_data  [NPC][NCH][4];

  for (genvar r = 0; r < PC_ROWS; r++) begin : g_r
    for (genvar c = 0; c < PC_COLS; c++) begin : g_c
      localparam int P = r * PC_COLS + c;
      for (genvar ch = 0; ch < NCH; ch++) begin : g_ch
        // north: link with PC (r-1, c), whose south port faces us
        if (r > 0) begin : g_n
          assign m_in_valid[P][ch][0]  = m_out_valid[P-PC_COLS][ch][2];
          assign m_in_data[P][ch][0]   = m_out_data[P-PC_COLS][ch][2];
          assign m_out_ready[P-PC_COLS][ch][2] = m_in_ready[P][ch][0];
        end else begin : g_n_edge
          assign m_in_valid[P][ch][0]  = 1'b0;
          assign m_in_data[P][ch][0]   = '0;
          assign m_out_ready[P][ch][0] = 1'b0;
        end
        // south edge
        if (r == PC_ROWS - 1) begin : g_s_edge
          assign m_in_valid[P][ch][2]  = 1'b0;
          assign m_in_data[P][ch][2]   = '0;
          assign m_out_ready[P][ch][2] = 1'b0;
        end else begin : g_s
          assign m_in_valid[P][ch][2]  = m_out_valid[P+PC_COLS][ch][0];
          assign m_in_data[P][ch][2]   = m_out_data[P+PC_COLS][ch][0];
          assign m_out_ready[P+PC_COLS][ch][0] = m_in_ready[P][ch][2];
        end
        // west: link with PC (r, c-1), whose east port faces us
        if (c > 0) begin : g_w
          assign m_in_valid[P][ch][3]  = m_out_valid[P-1][ch][1];
          assign m_in_data[P][ch][3]   = m_out_data[P-1][ch][1];
          assign m_out_ready[P-1][ch][1] = m_in_ready[P][ch][3];
        end else begin : g_w_edge
          assign m_in_valid[P][ch][3]  = 1'b0;
          assign m_in_data[P][ch][3]   = '0;
          assign m_out_ready[P][ch][3] = 1'b0;
        end
        // east edge
        if (c == PC_COLS - 1) begin : g_e_edge
          assign m_in_valid[P][ch][1]  = 1'b0;
          assign m_in_data[P][ch][1]   = '0;
          assign m_out_ready[P][ch][1] = 1'b0;
        end else begin : g_e
          assign m_in_valid[P][ch][1]  = m_out_valid[P+1][ch][3];
          assign m_in_data[P][ch][1]   = m_out_data[P+1][ch][3];
          assign m_out_ready[P+1][ch][3] = m_in_ready[P][ch][1];
        end
      end

      processing_cluster #(
        .ROWS(ROWS), .COLS(COLS), .REUSE_DEPTH(REUSE_DEPTH),
        .PSUM_DEPTH(PSUM_DEPTH), .GLB_DEPTH(GLB_DEPTH), .TAU_LOG_N(TAU_LOG_N),
        .SEED(16'hACE1 + 16'(P))
      ) u_pc (
        .clk, .rst_n, .cfg(cfg[P]), .tau_start(tau_start[P]),
        .ext(ext[P]), .ext_rdata(ext_rdata[P]),
        .glb_ctrl(glb_ctrl[P]), .glb_rd_busy(glb_rd_busy[P]),
        .glb_wr_count(glb_wr_count[P]),
        .mesh_in_valid(m_in_valid[P]), .mesh_in_ready(m_in_ready[P]),
        .mesh_in_data(m_in_data[P]),
        .mesh_out_valid(m_out_valid[P]), .mesh_out_ready(m_out_ready[P]),
        .mesh_out_data(m_out_data[P]),
        .busy(busy[P]), .mac_count(mac_count[P]),
        .act_skip_count(act_skip_count[P]), .w_skip_count(w_skip_count[P]),
        .kept_count(kept_count[P]), .rounded_count(rounded_count[P]),
        .pruned_count(pruned_count[P]), .tau_auto(tau_auto[P]),
        .tau_done(tau_done[P]));
    end
  end
endmodule
