// tb_resnet_fc: the final fully-connected layer of ResNet-18 / CIFAR-10
// (512 inputs, 10 outputs) run through all three training phases on the
// default-size accelerator, the six processing clusters working in parallel.
//
// A fully-connected layer is a 1 x 1 "convolution" whose rows are long dot
// products, so the host maps it onto the 3 x 4 PE cluster as follows:
//  Phase 1: PE row r holds the 64-weight segment 3g+r of output neuron o,
//           diagonal r carries the matching activation segment; column 0
//           (psum_len 1) sums the three segment products. Three passes per
//           neuron cover the 8 segments; the host adds the partial sums.
//  Phase 2: PE row r holds column i_r of the 10 x 512 weight matrix (with its
//           |B| column) and only diagonal 2 carries the 10 output errors, in
//           reverse order so that every product lands on element 9. Columns
//           0..2 then deliver delta_in for i_2, i_1, i_0: three inputs per pass.
//  Phase 3: PE row 0 holds one output error delta[o], diagonal j carries
//           activation segment j; column j returns delta[o] * a for that
//           segment, so two passes give one row of the weight gradient.
// Every result is compared with a direct computation (16-bit wrap, as the
// partial sums), and every PC's MAC count with the non-zero operand pairs.
module tb_resnet_fc;
  import eg_pkg::*;
  localparam int NPC  = 6;
  localparam int NIN  = 512;
  localparam int NOUT = 10;
  localparam int SEG  = 64;
  localparam int NSEG = NIN / SEG;
  localparam int ROWS = 3, COLS = 4, NDIAG = ROWS + COLS - 1;
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
  int A  [NIN];          // activations entering the layer
  int W  [NOUT][NIN];    // weights
  int Bm [NOUT][NIN];    // feedback magnitudes
  int D  [NOUT];         // error gradients at the layer output
  int Y  [NOUT];         // phase-1 result, summed over passes
  int GI [NIN];          // phase-2 result
  int DW [NOUT][NIN];    // phase-3 result
  longint exp_macs [NPC];

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic flit_t mk(input int tag, input int off, input int data, input bit last);
    flit_t f;
    f = '0;
    f.tag = 4'(tag); f.off = 8'(off); f.data = 16'(data); f.last = last;
    return f;
  endfunction

  function automatic int ld_data(input int w, input int b);
    return int'({b[3:0], w[3:0]});
  endfunction

  function automatic int wrap16(input longint v);
    return int'(signed'(16'(v)));
  endfunction

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

  // expected MACs of one pass: for PE(r,j), non-zero reuse entries times
  // non-zero streamed elements of diagonal r+j whose address is in range
  function automatic longint pass_macs(input phase_e ph, input int plen,
                                       input flit_t lq [$], input flit_t aq [$]);
    longint n;
    n = 0;
    foreach (lq[a])
      if (lq[a].data[3:0] != 0)
        foreach (aq[b])
          if (aq[b].data != 0)
            for (int j = 0; j < COLS; j++)
              if (int'(aq[b].tag) == int'(lq[a].tag) + j) begin
                int adr;
                adr = (ph == PH_BWD) ? int'(aq[b].off) + int'(lq[a].off)
                                     : int'(aq[b].off) - int'(lq[a].off);
                if (adr >= 0 && adr < plen) n++;
              end
    return n;
  endfunction

  // one pass on PC p; res[col*plen + e]
  task automatic run_pass(input int p, input phase_e ph, input int plen,
                          input flit_t lq [$], input flit_t aq [$], output int res [$]);
    int t;
    exp_macs[p] += pass_macs(ph, plen, lq, aq);
    cfg[p].phase = ph; cfg[p].psum_len = 8'(plen);
    foreach (lq[k]) glb_write(p, CH_LD, k, lq[k]);
    foreach (aq[k]) glb_write(p, CH_ACT, 100 + k, aq[k]);
    pulse_wr(p, CH_PS, 0);
    pulse_rd(p, CH_LD, 0, lq.size());
    t = 0;
    while (glb_rd_busy[p][CH_LD] && t < 1000) begin @(negedge clk); t++; end
    pulse_rd(p, CH_ACT, 100, aq.size());
    t = 0;
    while (int'(glb_wr_count[p][CH_PS]) < COLS * plen && t < 100000) begin @(negedge clk); t++; end
    if (t >= 100000) begin failures++; $display("FAIL PC%0d pass timed out", p); end
    repeat (2) @(negedge clk);
    res = {};
    for (int k = 0; k < COLS * plen; k++) begin
      flit_t f;
      glb_read(p, CH_PS, k, f);
      res.push_back(int'(f.data));
    end
  endtask

  // ------------------------------------------------------------ the passes
  // phase 1: neuron o, segments 3g .. 3g+2
  task automatic fwd_pass(input int p, input int o, input int g);
    flit_t lq [$], aq [$];
    int res [$];
    for (int r = 0; r < ROWS; r++) begin
      int s;
      s = 3*g + r;
      if (s < NSEG)
        for (int k = 0; k < SEG; k++) lq.push_back(mk(r, k, ld_data(W[o][SEG*s + k], 0), k == SEG-1));
      else
        lq.push_back(mk(r, 0, 0, 1));
    end
    for (int d = 0; d < NDIAG; d++) begin
      int s;
      s = 3*g + d;
      if (d < ROWS && s < NSEG)
        for (int x = 0; x < SEG; x++) aq.push_back(mk(d, x, A[SEG*s + x], x == SEG-1));
      else
        aq.push_back(mk(d, 0, 0, 1));
    end
    run_pass(p, PH_FWD, 1, lq, aq, res);
    Y[o] += res[0];
  endtask

  // phase 2: inputs i0, i0+1, i0+2 (those below NIN)
  task automatic bwd_pass(input int p, input int i0);
    flit_t lq [$], aq [$];
    int res [$];
    for (int r = 0; r < ROWS; r++) begin
      if (i0 + r < NIN)
        for (int k = 0; k < NOUT; k++)
          lq.push_back(mk(r, k, ld_data(W[k][i0+r], Bm[k][i0+r]), k == NOUT-1));
      else
        lq.push_back(mk(r, 0, 0, 1));
    end
    for (int d = 0; d < NDIAG; d++)
      if (d == ROWS - 1)
        for (int x = 0; x < NOUT; x++) aq.push_back(mk(d, x, D[NOUT-1-x], x == NOUT-1));
      else
        aq.push_back(mk(d, 0, 0, 1));
    run_pass(p, PH_BWD, NOUT, lq, aq, res);
    for (int j = 0; j < ROWS; j++)
      if (i0 + ROWS - 1 - j < NIN) GI[i0 + ROWS - 1 - j] = res[j * NOUT + NOUT - 1];
  endtask

  // phase 3: output o, segments 4h .. 4h+3
  task automatic wgrad_pass(input int p, input int o, input int h);
    flit_t lq [$], aq [$];
    int res [$];
    lq.push_back(mk(0, 0, ld_data(D[o], 0), 1));
    lq.push_back(mk(1, 0, 0, 1));
    lq.push_back(mk(2, 0, 0, 1));
    for (int d = 0; d < NDIAG; d++)
      if (d < COLS)
        for (int x = 0; x < SEG; x++) aq.push_back(mk(d, x, A[SEG*(4*h + d) + x], x == SEG-1));
      else
        aq.push_back(mk(d, 0, 0, 1));
    run_pass(p, PH_WGRAD, SEG, lq, aq, res);
    for (int j = 0; j < COLS; j++)
      for (int e = 0; e < SEG; e++) DW[o][SEG*(4*h + j) + e] = res[j * SEG + e];
  endtask

  task automatic check(input int got, input longint expv, input string what, input int a, input int b);
    checks++;
    if (wrap16(longint'(got)) != wrap16(expv)) begin
      failures++;
      if (failures < 20) $display("FAIL %s [%0d][%0d] got %0d exp %0d", what, a, b, got, wrap16(expv));
    end
  endtask

  task automatic check_macs(input string what, input longint base [NPC]);
    for (int p = 0; p < NPC; p++) begin
      checks++;
      if (longint'(mac_count[p]) - base[p] != exp_macs[p]) begin
        failures++;
        $display("FAIL %s PC%0d MACs %0d exp %0d", what, p, longint'(mac_count[p]) - base[p], exp_macs[p]);
      end
    end
  endtask

  initial begin
    longint base [NPC];
    longint cyc0;
    int jobs, started, finished;
    for (int p = 0; p < NPC; p++) begin
      cfg[p] = '0; ext[p] = '0; tau_start[p] = 0;
      for (int c = 0; c < NCH; c++) glb_ctrl[p][c] = '0;
      for (int c = 0; c < NCH; c++)
        for (int q = 0; q < RPORTS; q++) cfg[p].rsel[c][q] = RP_NONE;
      cfg[p].rsel[CH_ACT][RP_LOCAL] = RP_LOCAL;
      cfg[p].rsel[CH_LD][RP_LOCAL]  = RP_LOCAL;
      cfg[p].rsel[CH_PS][RP_LOCAL]  = RP_LOCAL;
    end
    for (int i = 0; i < NIN; i++)
      A[i] = ($urandom_range(0, 1) == 0) ? 0 : int'($urandom_range(1, 127));
    for (int o = 0; o < NOUT; o++) begin
      D[o] = int'($urandom_range(0, 15)) - 8;
      Y[o] = 0;
      for (int i = 0; i < NIN; i++) begin
        W[o][i]  = int'($urandom_range(0, 15)) - 8;
        Bm[o][i] = int'($urandom_range(0, 7));
      end
    end
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    // ------------------------------------------------------------ phase 1
    for (int p = 0; p < NPC; p++) begin base[p] = longint'(mac_count[p]); exp_macs[p] = 0; end
    cyc0 = longint'($time / 10);
    jobs = NOUT * 3;
    for (int b = 0; b < jobs; b += NPC) begin
      started = 0; finished = 0;
      for (int p = 0; p < NPC; p++)
        if (b + p < jobs) begin
          automatic int pp = p, o = (b + p) / 3, g = (b + p) % 3;
          started++;
          fork begin fwd_pass(pp, o, g); finished++; end join_none
        end
      wait (finished == started);
    end
    $display("phase 1: %0d cycles", longint'($time / 10) - cyc0);
    for (int o = 0; o < NOUT; o++) begin
      longint acc;
      acc = 0;
      for (int i = 0; i < NIN; i++) acc += longint'(W[o][i] * A[i]);
      check(Y[o], acc, "fwd", o, 0);
    end
    check_macs("fwd", base);

    // ------------------------------------------------------------ phase 2
    for (int p = 0; p < NPC; p++) begin base[p] = longint'(mac_count[p]); exp_macs[p] = 0; end
    cyc0 = longint'($time / 10);
    jobs = (NIN + ROWS - 1) / ROWS;
    for (int b = 0; b < jobs; b += NPC) begin
      started = 0; finished = 0;
      for (int p = 0; p < NPC; p++)
        if (b + p < jobs) begin
          automatic int pp = p, i0 = ROWS * (b + p);
          started++;
          fork begin bwd_pass(pp, i0); finished++; end join_none
        end
      wait (finished == started);
    end
    $display("phase 2: %0d cycles", longint'($time / 10) - cyc0);
    for (int i = 0; i < NIN; i++) begin
      longint acc;
      acc = 0;
      for (int o = 0; o < NOUT; o++)
        if (W[o][i] != 0) acc += longint'((W[o][i] < 0 ? -Bm[o][i] : Bm[o][i]) * D[o]);
      check(GI[i], acc, "bwd", i, 0);
    end
    check_macs("bwd", base);

    // ------------------------------------------------------------ phase 3
    for (int p = 0; p < NPC; p++) begin base[p] = longint'(mac_count[p]); exp_macs[p] = 0; end
    cyc0 = longint'($time / 10);
    jobs = NOUT * 2;
    for (int b = 0; b < jobs; b += NPC) begin
      started = 0; finished = 0;
      for (int p = 0; p < NPC; p++)
        if (b + p < jobs) begin
          automatic int pp = p, o = (b + p) / 2, h = (b + p) % 2;
          started++;
          fork begin wgrad_pass(pp, o, h); finished++; end join_none
        end
      wait (finished == started);
    end
    $display("phase 3: %0d cycles", longint'($time / 10) - cyc0);
    for (int o = 0; o < NOUT; o++)
      for (int i = 0; i < NIN; i++) check(DW[o][i], longint'(D[o] * A[i]), "wgrad", o, i);
    check_macs("wgrad", base);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
