// tb_processing_cluster: end-to-end test of one processing cluster.
// The testbench acts as host and DRAM: it writes the reuse-load and
// activation streams of a job into the GLB banks through the DRAM-side port,
// sets the routers, starts the bank streams, waits for the results in the
// partial-sum bank and reads them back. Runs cover phase 1, phase 2 with
// stochastic pruning (external and automatically computed tau), phase 3,
// and a phase-1 job whose activations enter from the west mesh link and
// whose results leave through the east mesh link.
module tb_processing_cluster;
  import eg_pkg::*;
  import eg_tb_pkg::*;
  localparam int TLOG = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pc_cfg_t   cfg;
  logic      tau_start = 0;
  glb_ext_t  ext;
  flit_t     ext_rdata;
  glb_ctrl_t glb_ctrl [NCH];
  logic      glb_rd_busy [NCH];
  logic [15:0] glb_wr_count [NCH];
  logic  mesh_in_valid [NCH][4], mesh_in_ready [NCH][4];
  flit_t mesh_in_data [NCH][4];
  logic  mesh_out_valid [NCH][4], mesh_out_ready [NCH][4];
  flit_t mesh_out_data [NCH][4];
  logic busy, tau_done;
  logic [31:0] mac_count, act_skip_count, w_skip_count, kept_count, rounded_count, pruned_count;
  logic [PSUM_W-2:0] tau_auto;

  processing_cluster #(.GLB_DEPTH(256), .TAU_LOG_N(TLOG)) dut (.*);

  int checks = 0, failures = 0;
  real phinv [10] = '{0.0, 0.125661, 0.253347, 0.385320, 0.524401,
                      0.674490, 0.841621, 1.036433, 1.281552, 1.644854};

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic glb_write(input int bank, input int addr, input flit_t f);
    ext.bank = 2'(bank); ext.we = 1; ext.waddr = 16'(addr); ext.wdata = f;
    @(negedge clk);
    ext.we = 0;
  endtask

  task automatic glb_read(input int bank, input int addr, output flit_t f);
    ext.bank = 2'(bank); ext.raddr = 16'(addr);
    @(negedge clk);
    f = ext_rdata;
  endtask

  function automatic void route_local();
    for (int c = 0; c < NCH; c++)
      for (int p = 0; p < RPORTS; p++) cfg.rsel[c][p] = RP_NONE;
    cfg.rsel[CH_ACT][RP_LOCAL] = RP_LOCAL;
    cfg.rsel[CH_LD][RP_LOCAL]  = RP_LOCAL;
    cfg.rsel[CH_PS][RP_LOCAL]  = RP_LOCAL;
  endfunction

  // mesh-side driver and collector
  flit_t mesh_q [$];
  flit_t east_got [$];
  always begin
    @(negedge clk);
    if (mesh_q.size() > 0) begin
      mesh_in_valid[CH_ACT][3] = 1; mesh_in_data[CH_ACT][3] = mesh_q[0];
      #1;
      if (mesh_in_ready[CH_ACT][3]) begin
        @(negedge clk); void'(mesh_q.pop_front());
        mesh_in_valid[CH_ACT][3] = 0;
      end
    end else begin
      mesh_in_valid[CH_ACT][3] = 0;
      #1;
    end
  end
  always begin
    @(negedge clk); #2;
    if (mesh_out_valid[CH_PS][1] && mesh_out_ready[CH_PS][1]) east_got.push_back(mesh_out_data[CH_PS][1]);
  end

  task automatic run(input phase_e ph, input int L, input int S, input bit prune,
                     input int tau_in, input bit via_mesh, input bit check_tau);
    conv_job j;
    flit_t aq [$], lq [$];
    int n_out, t, tau;
    // with use_auto_tau the threshold computed in an earlier phase-2 run applies
    tau = cfg.use_auto_tau ? int'(tau_auto) : tau_in;
    j = new(ph, L, S);
    j.act_stream(aq); j.ld_stream(lq);
    n_out = COLS * j.plen;
    route_local();
    if (via_mesh) begin
      cfg.rsel[CH_ACT][RP_LOCAL] = RP_WEST;
      cfg.rsel[CH_PS][RP_LOCAL]  = RP_NONE;
      cfg.rsel[CH_PS][RP_EAST]   = RP_LOCAL;
    end
    cfg.phase = ph; cfg.psum_len = 8'(j.plen); cfg.prune_en = prune;
    cfg.tau = 15'(tau_in);
    foreach (lq[k]) glb_write(CH_LD, k, lq[k]);
    if (!via_mesh) foreach (aq[k]) glb_write(CH_ACT, 100 + k, aq[k]);
    glb_ctrl[CH_PS].wr_start = 1; glb_ctrl[CH_PS].wr_base = 0;
    @(negedge clk);
    glb_ctrl[CH_PS].wr_start = 0;
    glb_ctrl[CH_LD].rd_start = 1; glb_ctrl[CH_LD].rd_base = 0; glb_ctrl[CH_LD].rd_len = 16'(lq.size());
    @(negedge clk);
    glb_ctrl[CH_LD].rd_start = 0;
    // reuse rows first, then the streamed rows
    t = 0;
    while (glb_rd_busy[CH_LD] && t < 1000) begin @(negedge clk); t++; end
    if (via_mesh) begin
      east_got.delete();
      foreach (aq[k]) mesh_q.push_back(aq[k]);
    end else begin
      glb_ctrl[CH_ACT].rd_start = 1; glb_ctrl[CH_ACT].rd_base = 100; glb_ctrl[CH_ACT].rd_len = 16'(aq.size());
      @(negedge clk);
      glb_ctrl[CH_ACT].rd_start = 0;
    end
    t = 0;
    while (t < 20000 && (via_mesh ? east_got.size() < n_out : int'(glb_wr_count[CH_PS]) < n_out)) begin
      @(negedge clk); t++;
    end
    repeat (3) @(negedge clk);
    for (int k = 0; k < n_out; k++) begin
      flit_t f;
      int e, c, expv, m;
      c = k / j.plen; e = k % j.plen;
      if (via_mesh) f = (k < east_got.size()) ? east_got[k] : '0;
      else glb_read(CH_PS, k, f);
      expv = j.expected(c, e);
      checks++;
      if (!(prune && ph == PH_BWD)) begin
        if (int'(f.data) != expv || int'(f.tag) != c || int'(f.off) != e) begin
          failures++; $display("FAIL ph=%0d k=%0d got %0d exp %0d", ph, k, f.data, expv);
        end
      end else begin
        m = (expv < 0) ? -expv : expv;
        if (m > tau ? (int'(f.data) != expv)
                    : !(int'(f.data) == 0 || int'(f.data) == ((expv < 0) ? -tau : tau))) begin
          failures++; $display("FAIL pruned k=%0d got %0d ref %0d tau %0d", k, f.data, expv, tau);
        end
      end
    end
    // automatic tau from the first 2^TLOG unpruned phase-2 results
    if (ph == PH_BWD && check_tau) begin
      longint sq = 0;
      real sig, tref;
      for (int k = 0; k < (1 << TLOG); k++) begin
        int v;
        v = j.expected(k / j.plen, k % j.plen);
        sq += longint'(v) * v;
      end
      sig = $floor($sqrt(real'(sq >> TLOG)));
      tref = sig * phinv[cfg.p_sel];
      checks++;
      if (!tau_done || real'(tau_auto) > tref + 1.0 || real'(tau_auto) < tref - 1.5) begin
        failures++; $display("FAIL auto tau %0d (done %0d) exp %0f", tau_auto, tau_done, tref);
      end
    end
  endtask

  initial begin
    cfg = '0; ext = '0;
    for (int c = 0; c < NCH; c++) begin
      glb_ctrl[c] = '0;
      for (int d = 0; d < 4; d++) begin
        mesh_in_valid[c][d] = 0; mesh_in_data[c][d] = '0; mesh_out_ready[c][d] = 1;
      end
    end
    cfg.p_sel = 4'd7;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    run(PH_FWD, 12, 3, 0, 0, 0, 0);
    tau_start = 1; @(negedge clk); tau_start = 0;
    run(PH_BWD, 10, 3, 1, 300, 0, 1);
    run(PH_WGRAD, 12, 5, 0, 0, 0, 0);
    run(PH_FWD, 10, 3, 0, 0, 1, 0);
    // the threshold computed during the first phase-2 run now drives the pruner
    cfg.use_auto_tau = 1;
    run(PH_BWD, 10, 3, 1, 0, 0, 0);
    checks++;
    if (kept_count == 0 || rounded_count == 0 || pruned_count == 0) begin
      failures++; $display("FAIL pruning cases kept %0d rounded %0d pruned %0d", kept_count, rounded_count, pruned_count);
    end
    checks++;
    if (act_skip_count == 0 || w_skip_count == 0) begin failures++; $display("FAIL no zero skipping"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
