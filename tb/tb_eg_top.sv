// tb_eg_top: end-to-end test of the whole accelerator at its default size
// (2 x 3 processing clusters of 3 x 4 PEs, 512-flit GLB banks).
//
// The testbench plays host and DRAM. It
//  A) runs a different phase-1 job on each of the six PCs at the same time;
//  B) runs a job on PC1 whose activations come from PC0's GLB over the mesh
//     (east link) and whose results go over the mesh (south link) into
//     PC4's GLB;
//  C) runs phase 2 with stochastic pruning on PC3 (four rows, enough samples
//     for the tau unit's 2^10-sample estimate, which is then checked), phase 3
//     on PC5 and unpruned phase 2 on PC2.
// Every result is compared with a direct 2-D reference (eg_tb_pkg). The
// mechanisms of the design are counted and each must occur: zero skipping
// of activations and of weights, back-pressure stalls on a GLB stream, mesh
// transfers, each training phase, each pruning outcome (kept, rounded to
// tau, pruned) and a completed tau estimate.
module tb_eg_top;
  import eg_pkg::*;
  import eg_tb_pkg::*;
  localparam int NPC = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pc_cfg_t   cfg [NPC];
  logic      tau_start [NPC];
  glb_ext_t  ext [NPC];
  flit_t     ext_rdata [NPC];
  glb_ctrl_t glb_ctrl [NPC][NCH];
  logic      glb_rd_busy [NPC][NCH];
  logic [15:0] glb_wr_count [NPC][NCH];
  logic      busy [NPC];
  logic [31:0] mac_count [NPC], act_skip_count [NPC], w_skip_count [NPC];
  logic [31:0] kept_count [NPC], rounded_count [NPC], pruned_count [NPC];
  logic [PSUM_W-2:0] tau_auto [NPC];
  logic      tau_done [NPC];

  eg_top dut (.*);

  int checks = 0, failures = 0;
  int n_fwd = 0, n_bwd = 0, n_wgrad = 0, n_mesh_flits = 0, n_stall = 0;
  real phinv [10] = '{0.0, 0.125661, 0.253347, 0.385320, 0.524401,
                      0.674490, 0.841621, 1.036433, 1.281552, 1.644854};

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism monitors (observed inside the design)
  always @(posedge clk) begin
    if (dut.g_r[0].g_c[1].u_pc.mesh_in_valid[CH_ACT][3] && dut.g_r[0].g_c[1].u_pc.mesh_in_ready[CH_ACT][3])
      n_mesh_flits++;
    for (int p = 0; p < 1; p++)
      if (dut.g_r[0].g_c[0].u_pc.b_out_valid[CH_ACT] && !dut.g_r[0].g_c[0].u_pc.b_out_ready[CH_ACT])
        n_stall++;
  end

  task automatic glb_write(input int p, input int bank, input int addr, input flit_t f);
    ext[p].bank = 2'(bank); ext[p].we = 1; ext[p].waddr = 16'(addr); ext[p].wdata = f;
    @(negedge clk);
    ext[p].we = 0;
  endtask

  task automatic glb_read(input int p, input int bank, input int addr, output flit_t f);
    ext[p].bank = 2'(bank); ext[p].raddr = 16'(addr);
    @(negedge clk);
    f = ext_rdata[p];
  endtask

  task automatic pulse_rd(input int p, input int bank, input int base, input int len);
    glb_ctrl[p][bank].rd_start = 1; glb_ctrl[p][bank].rd_base = 16'(base);
    glb_ctrl[p][bank].rd_len = 16'(len);
    @(negedge clk);
    glb_ctrl[p][bank].rd_start = 0;
  endtask

  task automatic pulse_wr(input int p, input int bank, input int base);
    glb_ctrl[p][bank].wr_start = 1; glb_ctrl[p][bank].wr_base = 16'(base);
    @(negedge clk);
    glb_ctrl[p][bank].wr_start = 0;
  endtask

  function automatic void route_local(input int p);
    for (int c = 0; c < NCH; c++)
      for (int q = 0; q < RPORTS; q++) cfg[p].rsel[c][q] = RP_NONE;
    cfg[p].rsel[CH_ACT][RP_LOCAL] = RP_LOCAL;
    cfg[p].rsel[CH_LD][RP_LOCAL]  = RP_LOCAL;
    cfg[p].rsel[CH_PS][RP_LOCAL]  = RP_LOCAL;
  endfunction

  // check the results stored in bank CH_PS of PC p starting at base
  task automatic check_results(input int p, input conv_job j, input int base,
                               input bit pruned, input int tau, input string what);
    for (int k = 0; k < COLS * j.plen; k++) begin
      flit_t f;
      int expv, m;
      glb_read(p, CH_PS, base + k, f);
      expv = j.expected(k / j.plen, k % j.plen);
      m = (expv < 0) ? -expv : expv;
      checks++;
      if (!pruned ? (int'(f.data) != expv)
                  : (m > tau ? int'(f.data) != expv
                             : !(int'(f.data) == 0 || int'(f.data) == ((expv < 0) ? -tau : tau)))) begin
        failures++;
        $display("FAIL %s PC%0d k=%0d got %0d exp %0d", what, p, k, f.data, expv);
      end
    end
  endtask

  // one local job on PC p: load both streams, run, wait for the results
  task automatic local_job(input int p, input conv_job j, input int res_base);
    flit_t aq [$], lq [$];
    int t, n0;
    j.act_stream(aq); j.ld_stream(lq);
    foreach (lq[k]) glb_write(p, CH_LD, k, lq[k]);
    foreach (aq[k]) glb_write(p, CH_ACT, 16 + k, aq[k]);
    pulse_wr(p, CH_PS, res_base);
    pulse_rd(p, CH_LD, 0, lq.size());
    t = 0;
    while (glb_rd_busy[p][CH_LD] && t < 1000) begin @(negedge clk); t++; end
    pulse_rd(p, CH_ACT, 16, aq.size());
    t = 0;
    while (int'(glb_wr_count[p][CH_PS]) < COLS * j.plen && t < 200000) begin @(negedge clk); t++; end
    repeat (2) @(negedge clk);
  endtask

  initial begin
    conv_job jobs [NPC];
    for (int p = 0; p < NPC; p++) begin
      cfg[p] = '0; ext[p] = '0; tau_start[p] = 0;
      for (int c = 0; c < NCH; c++) glb_ctrl[p][c] = '0;
      cfg[p].p_sel = 4'd8;
    end
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    // ---------------------------------------------------------------- A
    for (int p = 0; p < NPC; p++) begin
      jobs[p] = new(PH_FWD, 20 + 4 * p, 3);
      route_local(p);
      cfg[p].phase = PH_FWD; cfg[p].psum_len = 8'(jobs[p].plen);
    end
    for (int p = 0; p < NPC; p++) begin
      fork
        automatic int q = p;
        local_job(q, jobs[q], 0);
      join_none
    end
    wait fork;
    for (int p = 0; p < NPC; p++) check_results(p, jobs[p], 0, 0, 0, "A");
    n_fwd += NPC;

    // ---------------------------------------------------------------- B
    begin
      conv_job j;
      flit_t aq [$], lq [$];
      int t;
      j = new(PH_FWD, 30, 3);
      j.act_stream(aq); j.ld_stream(lq);
      for (int p = 0; p < NPC; p++) route_local(p);
      cfg[0].rsel[CH_ACT][RP_LOCAL] = RP_NONE;
      cfg[0].rsel[CH_ACT][RP_EAST]  = RP_LOCAL;   // PC0 GLB -> east
      cfg[1].rsel[CH_ACT][RP_LOCAL] = RP_WEST;    // PC1 PEs <- west
      cfg[1].rsel[CH_PS][RP_LOCAL]  = RP_NONE;
      cfg[1].rsel[CH_PS][RP_SOUTH]  = RP_LOCAL;   // PC1 results -> south
      cfg[4].rsel[CH_PS][RP_LOCAL]  = RP_NORTH;   // PC4 GLB <- north
      cfg[1].phase = PH_FWD; cfg[1].psum_len = 8'(j.plen);
      foreach (lq[k]) glb_write(1, CH_LD, k, lq[k]);
      foreach (aq[k]) glb_write(0, CH_ACT, 16 + k, aq[k]);
      pulse_wr(4, CH_PS, 200);
      pulse_rd(1, CH_LD, 0, lq.size());
      repeat (20) @(negedge clk);
      pulse_rd(0, CH_ACT, 16, aq.size());
      t = 0;
      while (int'(glb_wr_count[4][CH_PS]) < COLS * j.plen && t < 200000) begin @(negedge clk); t++; end
      repeat (2) @(negedge clk);
      check_results(4, j, 200, 0, 0, "B");
      n_fwd++;
      checks++;
      if (n_mesh_flits != aq.size()) begin
        failures++; $display("FAIL mesh carried %0d flits, expected %0d", n_mesh_flits, aq.size());
      end
    end

    // ---------------------------------------------------------------- C
    begin
      conv_job jb [4];
      conv_job jw, j2;
      longint sq;
      int ns;
      for (int p = 0; p < NPC; p++) route_local(p);
      cfg[3].phase = PH_BWD; cfg[3].prune_en = 1; cfg[3].tau = 15'd250;
      cfg[5].phase = PH_WGRAD;
      cfg[2].phase = PH_BWD; cfg[2].prune_en = 0;
      tau_start[3] = 1; @(negedge clk); tau_start[3] = 0;
      jw = new(PH_WGRAD, 40, 7);
      j2 = new(PH_BWD, 30, 3);
      cfg[5].psum_len = 8'(jw.plen);
      cfg[2].psum_len = 8'(j2.plen);
      fork
        begin
          for (int r = 0; r < 4; r++) begin
            jb[r] = new(PH_BWD, 62, 3);
            cfg[3].psum_len = 8'(jb[r].plen);
            local_job(3, jb[r], 0);
            check_results(3, jb[r], 0, 1, 250, "C-bwd-pruned");
            n_bwd++;
          end
        end
        begin local_job(5, jw, 0); check_results(5, jw, 0, 0, 0, "C-wgrad"); n_wgrad++; end
        begin local_job(2, j2, 0); check_results(2, j2, 0, 0, 0, "C-bwd"); n_bwd++; end
      join
      // tau estimate over the first 1024 unpruned phase-2 results of PC3
      sq = 0; ns = 0;
      for (int r = 0; r < 4 && ns < 1024; r++)
        for (int k = 0; k < COLS * jb[r].plen && ns < 1024; k++) begin
          int v;
          v = jb[r].expected(k / jb[r].plen, k % jb[r].plen);
          sq += longint'(v) * v; ns++;
        end
      begin
        real sig, tref;
        sig = $floor($sqrt(real'(sq >> 10)));
        tref = sig * phinv[8];
        checks++;
        if (!tau_done[3] || real'(tau_auto[3]) > tref + 1.0 || real'(tau_auto[3]) < tref - 1.5) begin
          failures++; $display("FAIL tau %0d (done %0d) exp %0f over %0d samples", tau_auto[3], tau_done[3], tref, ns);
        end
      end
    end

    // ---------------------------------------------------------------- mechanisms
    begin
      int askip = 0, wskip = 0;
      for (int p = 0; p < NPC; p++) begin askip += int'(act_skip_count[p]); wskip += int'(w_skip_count[p]); end
      $display("mechanisms: fwd=%0d bwd=%0d wgrad=%0d act_skip=%0d w_skip=%0d stall=%0d mesh=%0d kept=%0d rounded=%0d pruned=%0d tau_done=%0d",
               n_fwd, n_bwd, n_wgrad, askip, wskip, n_stall, n_mesh_flits,
               kept_count[3], rounded_count[3], pruned_count[3], tau_done[3]);
      checks++; if (n_fwd == 0)   begin failures++; $display("FAIL no phase 1"); end
      checks++; if (n_bwd == 0)   begin failures++; $display("FAIL no phase 2"); end
      checks++; if (n_wgrad == 0) begin failures++; $display("FAIL no phase 3"); end
      checks++; if (askip == 0)   begin failures++; $display("FAIL no activation skip"); end
      checks++; if (wskip == 0)   begin failures++; $display("FAIL no weight skip"); end
      checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
      checks++; if (n_mesh_flits == 0) begin failures++; $display("FAIL no mesh transfer"); end
      checks++; if (kept_count[3] == 0)    begin failures++; $display("FAIL no kept gradient"); end
      checks++; if (rounded_count[3] == 0) begin failures++; $display("FAIL no rounded gradient"); end
      checks++; if (pruned_count[3] == 0)  begin failures++; $display("FAIL no pruned gradient"); end
      checks++; if (!tau_done[3])          begin failures++; $display("FAIL no tau estimate"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
