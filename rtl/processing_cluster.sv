// processing_cluster: one processing cluster (PC) of the accelerator: the
// 3 x 4 PE cluster together with its GLB cluster and router cluster.
//
// Three data channels, each with one GLB bank and one router:
//   CH_ACT (0): GLB bank -> router -> PE cluster streamed-operand port
//               (input activations in phases 1/3, error gradients in phase 2)
//   CH_LD  (1): GLB bank -> router -> PE cluster reuse-load port
//               (weights with |B|, or error gradients in phase 3)
//   CH_PS  (2): PE cluster results -> pruner -> router -> GLB bank
// On each router, LOCAL input/output is the bank or PE-cluster side named
// above; NORTH/EAST/SOUTH/WEST go to the same-channel router of the
// neighbouring PCs (mesh ports of this module, indexed [channel][dir-1]).
// With suitable router settings a PC can therefore feed a neighbour's PEs
// from its own GLB, or store a neighbour's results.
//
// In phase 2 the results are error gradients; with cfg.prune_en they pass
// the stochastic gradient pruner before they are stored, and the tau unit
// estimates the threshold from the same unpruned stream. The threshold used
// is cfg.tau, or the tau unit's result once it is available when
// cfg.use_auto_tau is set.
//
// DRAM side: ext.bank selects the bank for ext.we/waddr/wdata and for
// ext_rdata (the bank's registered read of ext.raddr). Each bank's streams
// are started with glb_ctrl[bank] (see glb_bank). The GLB/router/PE split and
// the per-PC router and GLB clusters follow the architecture; the channel
// assignment of the three banks and routers is this design's choice.
module processing_cluster
  import eg_pkg::*;
#(
  parameter int unsigned ROWS        = 3,
  parameter int unsigned COLS        = 4,
  parameter int unsigned REUSE_DEPTH = 64,
  parameter int unsigned PSUM_DEPTH  = 64,
  parameter int unsigned GLB_DEPTH   = 512,
  parameter int unsigned TAU_LOG_N   = 10,
  parameter logic [15:0] SEED        = 16'hACE1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  pc_cfg_t    cfg,
  input  logic       tau_start,
  // DRAM side of the GLB cluster
  input  glb_ext_t   ext,
  output flit_t      ext_rdata,
  input  glb_ctrl_t  glb_ctrl   [NCH],
  output logic       glb_rd_busy[NCH],
  output logic [15:0] glb_wr_count[NCH],
  // mesh links, [channel][N,E,S,W]
  input  logic       mesh_in_valid  [NCH][4],
  output logic       mesh_in_ready  [NCH][4],
  input  flit_t      mesh_in_data   [NCH][4],
  output logic       mesh_out_valid [NCH][4],
  input  logic       mesh_out_ready [NCH][4],
  output flit_t      mesh_out_data  [NCH][4],
  // status
  output logic       busy,
  output logic [31:0] mac_count,
  output logic [31:0] act_skip_count,
  output logic [31:0] w_skip_count,
  output logic [31:0] kept_count,
  output logic [31:0] rounded_count,
  output logic [31:0] pruned_count,
  output logic [PSUM_W-2:0] tau_auto,
  output logic       tau_done
);
  localparam int unsigned GAW = $clog2(GLB_DEPTH);

  // ---------------------------------------------------------------- GLB
  logic  b_out_valid [NCH], b_out_ready [NCH];
  flit_t b_out_data  [NCH];
  logic  b_in_valid  [NCH], b_in_ready  [NCH];
  flit_t b_in_data   [NCH];
  flit_t b_ext_rdata [NCH];
  logic [GAW:0] b_wr_count [NCH];

  for (genvar b = 0; b < NCH; b++) begin : g_bank
    glb_bank #(.DEPTH(GLB_DEPTH)) u_bank (
      .clk, .rst_n,
      .ext_we(ext.we && ext.bank == 2'(b)), .ext_waddr(GAW'(ext.waddr)),
      .ext_wdata(ext.wdata), .ext_raddr(GAW'(ext.raddr)),
      .ext_rdata(b_ext_rdata[b]),
      .rd_start(glb_ctrl[b].rd_start), .rd_base(GAW'(glb_ctrl[b].rd_base)),
      .rd_len((GAW+1)'(glb_ctrl[b].rd_len)), .rd_busy(glb_rd_busy[b]),
      .out_valid(b_out_valid[b]), .out_ready(b_out_ready[b]),
      .out_data(b_out_data[b]),
      .wr_start(glb_ctrl[b].wr_start), .wr_base(GAW'(glb_ctrl[b].wr_base)),
      .in_valid(b_in_valid[b]), .in_ready(b_in_ready[b]),
      .in_data(b_in_data[b]), .wr_count(b_wr_count[b]));
    assign glb_wr_count[b] = 16'(b_wr_count[b]);
  end

  always_comb begin
    ext_rdata = b_ext_rdata[0];
    for (int b = 0; b < NCH; b++)
      if (ext.bank == 2'(b)) ext_rdata = b_ext_rdata[b];
  end

  // ---------------------------------------------------------------- routers
  logic  r_in_valid  [NCH][RPORTS], r_in_ready  [NCH][RPORTS];
  flit_t r_in_data   [NCH][RPORTS];
  logic  r_out_valid [NCH][RPORTS], r_out_ready [NCH][RPORTS];
  flit_t r_out_data  [NCH][RPORTS];
  rport_e r_sel      [NCH][RPORTS];

  // local side of each channel
  logic  pc_act_valid, pc_act_ready, pc_ld_valid, pc_ld_ready;
  logic  res_valid, res_ready, pr_valid, pr_ready;
  flit_t res_data, pr_data;

  for (genvar c = 0; c < NCH; c++) begin : g_rt
    for (genvar d = 0; d < 4; d++) begin : g_dir
      assign r_in_valid[c][d+1]  = mesh_in_valid[c][d];
      assign r_in_data[c][d+1]   = mesh_in_data[c][d];
      assign mesh_in_ready[c][d] = r_in_ready[c][d+1];
      assign mesh_out_valid[c][d] = r_out_valid[c][d+1];
      assign mesh_out_data[c][d]  = r_out_data[c][d+1];
      assign r_out_ready[c][d+1]  = mesh_out_ready[c][d];
    end
    for (genvar p = 0; p < RPORTS; p++) begin : g_sel
      assign r_sel[c][p] = cfg.rsel[c][p];
    end
    router u_router (
      .clk, .rst_n, .cfg_sel(r_sel[c]),
      .in_valid(r_in_valid[c]), .in_ready(r_in_ready[c]), .in_data(r_in_data[c]),
      .out_valid(r_out_valid[c]), .out_ready(r_out_ready[c]), .out_data(r_out_data[c]));
  end

  // channel ACT and LD: bank -> router -> PE cluster
  for (genvar c = 0; c < 2; c++) begin : g_feed
    assign r_in_valid[c][0] = b_out_valid[c];
    assign r_in_data[c][0]  = b_out_data[c];
    assign b_out_ready[c]   = r_in_ready[c][0];
    assign b_in_valid[c]    = 1'b0;
    assign b_in_data[c]     = '0;
  end
  assign pc_act_valid       = r_out_valid[CH_ACT][0];
  assign r_out_ready[CH_ACT][0] = pc_act_ready;
  assign pc_ld_valid        = r_out_valid[CH_LD][0];
  assign r_out_ready[CH_LD][0]  = pc_ld_ready;

  // channel PS: PE cluster -> pruner -> router -> bank
  assign r_in_valid[CH_PS][0] = pr_valid;
  assign r_in_data[CH_PS][0]  = pr_data;
  assign pr_ready             = r_in_ready[CH_PS][0];
  assign b_in_valid[CH_PS]    = r_out_valid[CH_PS][0];
  assign b_in_data[CH_PS]     = r_out_data[CH_PS][0];
  assign r_out_ready[CH_PS][0] = b_in_ready[CH_PS];
  assign b_out_ready[CH_PS]   = 1'b0;

  // ---------------------------------------------------------------- PEs
  pe_cluster #(.ROWS(ROWS), .COLS(COLS), .REUSE_DEPTH(REUSE_DEPTH),
               .PSUM_DEPTH(PSUM_DEPTH)) u_pes (
    .clk, .rst_n,
    .cfg_phase(cfg.phase),
    .cfg_psum_len(($clog2(PSUM_DEPTH)+1)'(cfg.psum_len)),
    .act_valid(pc_act_valid), .act_ready(pc_act_ready),
    .act_data(r_out_data[CH_ACT][0]),
    .ld_valid(pc_ld_valid), .ld_ready(pc_ld_ready),
    .ld_data(r_out_data[CH_LD][0]),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data),
    .busy, .mac_count, .act_skip_count, .w_skip_count);

  // ---------------------------------------------------------------- pruning
  wire prune_active = cfg.prune_en && (cfg.phase == PH_BWD);

  tau_unit #(.LOG_N(TAU_LOG_N)) u_tau (
    .clk, .rst_n, .start(tau_start), .p_sel(cfg.p_sel),
    .sample_en(res_valid && res_ready && cfg.phase == PH_BWD),
    .sample(res_data.data), .tau(tau_auto), .sigma(), .done(tau_done));

  grad_pruner #(.SEED(SEED)) u_prune (
    .clk, .rst_n, .en(prune_active),
    .tau((cfg.use_auto_tau && tau_done) ? tau_auto : cfg.tau),
    .in_valid(res_valid), .in_ready(res_ready), .in_data(res_data),
    .out_valid(pr_valid), .out_ready(pr_ready), .out_data(pr_data),
    .kept_count, .rounded_count, .pruned_count);
endmodule
