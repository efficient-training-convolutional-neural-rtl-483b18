// tb_resnet_layer: one whole feature-map plane of a ResNet-18 / CIFAR-10
// 3x3 stride-1 convolution layer (32 x 32 output, padding 1, so a 34 x 34
// padded input), run through all three training phases on the default-size
// accelerator, with the six processing clusters working in parallel.
//
//  Phase 1: output rows are computed four at a time (one per PE column); the
//           eight 4-row tiles are spread over the six PCs.
//  Phase 2: the 32 x 32 error plane is propagated through sign(W)|B| to the
//           34 x 34 gradient of the padded input, nine 4-row tiles.
//  Phase 3: the 3 x 3 weight gradient is accumulated over eleven passes of
//           three error rows each; the host adds the passes together.
//
// The testbench plays host and DRAM: it cuts the planes into row streams,
// starts the GLB streams, reads the results back and assembles the planes.
// Each assembled plane is compared with a direct 2-D computation over the
// whole plane (16-bit wrap, as the partial sums). Activations are ReLU-like
// (about half zero), weights and error gradients are 4-bit values with many
// zeros. The MAC count of every PC is compared with the number of non-zero
// operand pairs that land inside the output row, which checks the zero
// skipping, and the cycles of each phase are printed.
module tb_resnet_layer;
  import eg_pkg::*;
  import eg_tb_pkg::*;
  localparam int NPC = 6;
  localparam int H   = 32;        // output plane
  localparam int HP  = H + 2;     // padded input plane
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
  int A  [HP][HP];   // padded input activations
  int W  [3][3];     // weights
  int Bm [3][3];     // feedback magnitudes
  int D  [H][H];     // error gradients at the layer output
  int Y  [H][H];     // phase-1 result from the accelerator
  int G  [HP+2][HP]; // phase-2 result (rows past HP are spare)
  int DW [3][3];     // phase-3 result, summed over passes
  longint exp_macs [NPC];

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
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

  // MACs PE(i,j) must issue: non-zero pairs whose address is in range
  function automatic longint pass_macs(input conv_job j);
    longint n = 0;
    for (int i = 0; i < ROWS; i++)
      for (int c = 0; c < COLS; c++)
        for (int x = 0; x < j.L; x++)
          if (j.X[i+c][x] != 0)
            for (int k = 0; k < j.S; k++) begin
              int r, a;
              r = (j.ph == PH_BWD) ? ROWS - 1 - i : i;
              a = (j.ph == PH_BWD) ? x + k : x - k;
              if (j.R[r][k] != 0 && a >= 0 && a < j.plen) n++;
            end
    return n;
  endfunction

  // run one pass on PC p and return column-major results res[col*plen + e]
  task automatic run_pass(input int p, input conv_job j, output int res [$]);
    flit_t aq [$], lq [$];
    int t;
    j.act_stream(aq); j.ld_stream(lq);
    exp_macs[p] += pass_macs(j);
    cfg[p].phase = j.ph; cfg[p].psum_len = 8'(j.plen);
    foreach (lq[k]) glb_write(p, CH_LD, k, lq[k]);
    foreach (aq[k]) glb_write(p, CH_ACT, 100 + k, aq[k]);
    pulse_wr(p, CH_PS, 0);
    pulse_rd(p, CH_LD, 0, lq.size());
    t = 0;
    while (glb_rd_busy[p][CH_LD] && t < 1000) begin @(negedge clk); t++; end
    pulse_rd(p, CH_ACT, 100, aq.size());
    t = 0;
    while (int'(glb_wr_count[p][CH_PS]) < COLS * j.plen && t < 400000) begin @(negedge clk); t++; end
    if (t >= 400000) begin failures++; $display("FAIL PC%0d pass timed out", p); end
    repeat (2) @(negedge clk);
    res = {};
    for (int k = 0; k < COLS * j.plen; k++) begin
      flit_t f;
      glb_read(p, CH_PS, k, f);
      res.push_back(int'(f.data));
    end
  endtask

  function automatic int wrap16(input longint v);
    return int'(signed'(16'(v)));
  endfunction

  // ------------------------------------------------------------ the passes
  task automatic fwd_tile(input int p, input int t);
    conv_job j;
    int res [$];
    j = new(PH_FWD, HP, 3);
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < 3; k++) begin j.R[r][k] = W[r][k]; j.Bm[r][k] = Bm[r][k]; end
    for (int d = 0; d < NDIAG; d++)
      for (int x = 0; x < HP; x++) j.X[d][x] = A[4*t + d][x];
    run_pass(p, j, res);
    for (int c = 0; c < COLS; c++)
      for (int e = 0; e < H; e++) Y[4*t + c][e] = res[c * j.plen + e];
  endtask

  task automatic bwd_tile(input int p, input int t);
    conv_job j;
    int res [$];
    j = new(PH_BWD, H, 3);
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < 3; k++) begin j.R[r][k] = W[r][k]; j.Bm[r][k] = Bm[r][k]; end
    for (int d = 0; d < NDIAG; d++)
      for (int x = 0; x < H; x++) begin
        int y;
        y = 4*t + d - (ROWS - 1);
        j.X[d][x] = (y >= 0 && y < H) ? D[y][x] : 0;
      end
    run_pass(p, j, res);
    for (int c = 0; c < COLS; c++)
      for (int e = 0; e < HP; e++) G[4*t + c][e] = res[c * j.plen + e];
  endtask

  task automatic wgrad_group(input int p, input int g, output int part [3][3]);
    conv_job j;
    int res [$];
    j = new(PH_WGRAD, HP, H);
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < H; k++) begin
        j.R[r][k] = (3*g + r < H) ? D[3*g + r][k] : 0;
        j.Bm[r][k] = 0;
      end
    for (int d = 0; d < NDIAG; d++)
      for (int x = 0; x < HP; x++) j.X[d][x] = (3*g + d < HP) ? A[3*g + d][x] : 0;
    run_pass(p, j, res);
    for (int c = 0; c < 3; c++)
      for (int e = 0; e < 3; e++) part[c][e] = res[c * j.plen + e];
  endtask

  task automatic check(input int got, input longint expv, input string what, input int a, input int b);
    checks++;
    if (got != wrap16(expv)) begin
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
    longint cyc0, cyc;
    longint tot_macs;
    int parts [11][3][3];
    int started, finished;
    for (int p = 0; p < NPC; p++) begin
      cfg[p] = '0; ext[p] = '0; tau_start[p] = 0;
      for (int c = 0; c < NCH; c++) glb_ctrl[p][c] = '0;
      for (int c = 0; c < NCH; c++)
        for (int q = 0; q < RPORTS; q++) cfg[p].rsel[c][q] = RP_NONE;
      cfg[p].rsel[CH_ACT][RP_LOCAL] = RP_LOCAL;
      cfg[p].rsel[CH_LD][RP_LOCAL]  = RP_LOCAL;
      cfg[p].rsel[CH_PS][RP_LOCAL]  = RP_LOCAL;
    end
    for (int y = 0; y < HP; y++)
      for (int x = 0; x < HP; x++)
        A[y][x] = (y == 0 || x == 0 || y == HP-1 || x == HP-1 || $urandom_range(0, 1) == 0)
                  ? 0 : int'($urandom_range(1, 127));
    for (int r = 0; r < 3; r++)
      for (int k = 0; k < 3; k++) begin
        W[r][k]  = int'($urandom_range(0, 15)) - 8;
        Bm[r][k] = int'($urandom_range(0, 7));
      end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < H; x++)
        D[y][x] = ($urandom_range(0, 2) == 0) ? int'($urandom_range(0, 15)) - 8 : 0;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    // ------------------------------------------------------------ phase 1
    for (int p = 0; p < NPC; p++) begin base[p] = longint'(mac_count[p]); exp_macs[p] = 0; end
    cyc0 = longint'($time / 10);
    started = 0; finished = 0;
    for (int round = 0; round < 2; round++) begin
      for (int p = 0; p < NPC; p++) begin
        automatic int pp = p;
        automatic int t = round * NPC + p;
        if (t < H / COLS) begin
          started++;
          fork begin fwd_tile(pp, t); finished++; end join_none
        end
      end
      wait (finished == started);
    end
    cyc = longint'($time / 10) - cyc0;
    tot_macs = 0;
    for (int p = 0; p < NPC; p++) tot_macs += exp_macs[p];
    $display("phase 1: %0d cycles, %0d MACs (dense %0d)", cyc, tot_macs, H * H * 9);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < H; x++) begin
        longint acc;
        acc = 0;
        for (int r = 0; r < 3; r++)
          for (int k = 0; k < 3; k++) acc += longint'(W[r][k] * A[y + r][x + k]);
        check(Y[y][x], acc, "fwd", y, x);
      end
    check_macs("fwd", base);

    // ------------------------------------------------------------ phase 2
    for (int p = 0; p < NPC; p++) begin base[p] = longint'(mac_count[p]); exp_macs[p] = 0; end
    cyc0 = longint'($time / 10);
    started = 0; finished = 0;
    for (int round = 0; round < 2; round++) begin
      for (int p = 0; p < NPC; p++) begin
        automatic int pp = p;
        automatic int t = round * NPC + p;
        if (t < (HP + COLS - 1) / COLS) begin
          started++;
          fork begin bwd_tile(pp, t); finished++; end join_none
        end
      end
      wait (finished == started);
    end
    cyc = longint'($time / 10) - cyc0;
    tot_macs = 0;
    for (int p = 0; p < NPC; p++) tot_macs += exp_macs[p];
    $display("phase 2: %0d cycles, %0d MACs (dense %0d)", cyc, tot_macs, H * H * 9);
    for (int y = 0; y < HP; y++)
      for (int x = 0; x < HP; x++) begin
        longint acc;
        acc = 0;
        for (int r = 0; r < 3; r++)
          for (int k = 0; k < 3; k++)
            if (y - r >= 0 && y - r < H && x - k >= 0 && x - k < H && W[r][k] != 0)
              acc += longint'((W[r][k] < 0 ? -Bm[r][k] : Bm[r][k]) * D[y - r][x - k]);
        check(G[y][x], acc, "bwd", y, x);
      end
    check_macs("bwd", base);

    // ------------------------------------------------------------ phase 3
    for (int p = 0; p < NPC; p++) begin base[p] = longint'(mac_count[p]); exp_macs[p] = 0; end
    cyc0 = longint'($time / 10);
    started = 0; finished = 0;
    for (int round = 0; round < 2; round++) begin
      for (int p = 0; p < NPC; p++) begin
        automatic int pp = p;
        automatic int g = round * NPC + p;
        if (g < 11) begin
          started++;
          fork begin wgrad_group(pp, g, parts[g]); finished++; end join_none
        end
      end
      wait (finished == started);
    end
    cyc = longint'($time / 10) - cyc0;
    tot_macs = 0;
    for (int p = 0; p < NPC; p++) tot_macs += exp_macs[p];
    $display("phase 3: %0d cycles, %0d MACs (dense %0d)", cyc, tot_macs, H * H * 9);
    for (int r = 0; r < 3; r++)
      for (int k = 0; k < 3; k++) begin
        longint acc;
        acc = 0;
        DW[r][k] = 0;
        for (int g = 0; g < 11; g++) DW[r][k] += parts[g][r][k];
        for (int y = 0; y < H; y++)
          for (int x = 0; x < H; x++) acc += longint'(D[y][x] * A[y + r][x + k]);
        check(wrap16(longint'(DW[r][k])), acc, "wgrad", r, k);
      end
    check_macs("wgrad", base);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
