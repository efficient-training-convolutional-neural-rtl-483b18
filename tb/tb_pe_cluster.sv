// tb_pe_cluster: runs small 2-D problems through the 3 x 4 PE cluster with
// the row-stationary mapping and compares every output row with a 2-D
// reference computed here:
//   phase 1: O[j][e] = sum_r sum_s W[r][s] * A[j+r][e+s]        (3x3 kernel)
//   phase 2: G[j][x] = sum_r sum_s FB[r][s] * D[j-r][x-s]       (full conv.)
//            FB = sign(W)*|B|; filter rows are loaded in reverse order and
//            error row y is placed on diagonal y + 2
//   phase 3: dW[j][s] = sum_i sum_e D[i][e] * A[i+j][s+e]
// Outputs arrive column by column (tag = column = output row). The MAC
// counter is compared with the number of non-zero products inside the rows,
// and back-pressure is applied on the output in some runs.
module tb_pe_cluster;
  import eg_pkg::*;
  localparam int ROWS = 3, COLS = 4, PD = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  phase_e cfg_phase;
  logic [$clog2(PD):0] cfg_psum_len;
  logic act_valid = 0, act_ready, ld_valid = 0, ld_ready, out_valid, out_ready = 1, busy;
  flit_t act_data, ld_data, out_data;
  logic [31:0] mac_count, act_skip_count, w_skip_count;

  pe_cluster #(.ROWS(ROWS), .COLS(COLS), .REUSE_DEPTH(64), .PSUM_DEPTH(PD)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put_act(input int tag, input int v, input int o, input bit last);
    act_valid = 1; act_data = '0;
    act_data.tag = 4'(tag); act_data.data = 16'(v); act_data.off = 8'(o); act_data.last = last;
    #1;
    while (!act_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    act_valid = 0;
  endtask

  task automatic put_ld(input int tag, input int w, input int b, input int idx, input bit last);
    ld_valid = 1; ld_data = '0;
    ld_data.tag = 4'(tag); ld_data.data = 16'({b[3:0], w[3:0]}); ld_data.off = 8'(idx); ld_data.last = last;
    #1;
    while (!ld_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    ld_valid = 0;
  endtask

  flit_t got [$];
  bit bp = 0;
  always begin
    @(negedge clk);
    out_ready = bp ? 1'($urandom_range(0, 1)) : 1'b1;
    #1;
    if (out_valid && out_ready) got.push_back(out_data);
  end

  function automatic int rnd_act();
    return ($urandom_range(0, 2) == 0) ? 0 : int'($urandom_range(0, 255)) - 128;
  endfunction
  function automatic int rnd_w();
    return ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(0, 15)) - 8;
  endfunction

  task automatic run(input phase_e ph, input int L, input bit backp);
    // reuse rows R[i][s] (length S), |B| rows, stream rows X[d][x] (length L)
    int S, plen, nrow;
    int R [ROWS][64], Bm [ROWS][64], X [ROWS+COLS-1][64];
    int expv [COLS][64];
    int exp_macs;
    S = (ph == PH_WGRAD) ? 5 : 3;
    plen = (ph == PH_BWD) ? L + S - 1 : L - S + 1;
    for (int i = 0; i < ROWS; i++)
      for (int s = 0; s < S; s++) begin R[i][s] = rnd_w(); Bm[i][s] = $urandom_range(0, 15); end
    for (int d = 0; d < ROWS + COLS - 1; d++)
      for (int x = 0; x < L; x++) X[d][x] = rnd_act();
    // in phase 2 the first ROWS-1 diagonals carry no error row (rows above the top)
    if (ph == PH_BWD)
      for (int d = 0; d < ROWS - 1; d++) for (int x = 0; x < L; x++) X[d][x] = 0;

    // reference, written in the 2-D form of each phase
    exp_macs = 0;
    for (int j = 0; j < COLS; j++)
      for (int e = 0; e < plen; e++) begin
        longint acc = 0;
        for (int r = 0; r < ROWS; r++)
          for (int s = 0; s < S; s++) begin
            int pr, px, rv, xv;
            if (ph == PH_FWD) begin
              rv = R[r][s]; pr = j + r; px = e + s;              // W[r] on PE row r
            end else if (ph == PH_BWD) begin
              // filter row r sits on PE row ROWS-1-r; error row j-r on diagonal j-r+ROWS-1
              rv = (R[r][s] == 0) ? 0 : (R[r][s] < 0 ? -Bm[r][s] : Bm[r][s]);
              pr = j - r + ROWS - 1; px = e - s;
            end else begin
              rv = R[r][s]; pr = r + j; px = s + e;              // gradient row r, dW[j][e]
            end
            if (px >= 0 && px < L) begin
              xv = X[pr][px];
              acc += longint'(rv * xv);
              if (xv != 0 && R[r][s] != 0) exp_macs++;
            end
          end
        expv[j][e] = int'(signed'(16'(acc)));
      end
    if (ph == PH_WGRAD) begin
      // weight gradient: the output element is the kernel column index,
      // i.e. dW[j][c] = sum_r sum_s D[r][s] * A[r+j][c+s]; recompute with c
      exp_macs = 0;
      for (int j = 0; j < COLS; j++)
        for (int c = 0; c < plen; c++) begin
          longint acc = 0;
          for (int r = 0; r < ROWS; r++)
            for (int s = 0; s < S; s++)
              if (c + s < L) begin
                acc += longint'(R[r][s] * X[r+j][c+s]);
                if (R[r][s] != 0 && X[r+j][c+s] != 0) exp_macs++;
              end
          expv[j][c] = int'(signed'(16'(acc)));
        end
    end

    cfg_phase = ph; cfg_psum_len = 7'(plen);
    got.delete(); bp = backp;
    begin
      int mac0;
      mac0 = int'(mac_count);
      for (int i = 0; i < ROWS; i++) begin
        int r;
        r = (ph == PH_BWD) ? ROWS - 1 - i : i;
        for (int s = 0; s < S; s++) put_ld(i, R[r][s], Bm[r][s], s, s == S - 1);
      end
      for (int d = 0; d < ROWS + COLS - 1; d++)
        for (int x = 0; x < L; x++) put_act(d, X[d][x], x, x == L - 1);
      while (got.size() < COLS * plen) @(negedge clk);
      repeat (4) @(negedge clk);
      checks++;
      if (got.size() != COLS * plen) begin failures++; $display("FAIL count %0d", got.size()); end
      for (int k = 0; k < got.size() && k < COLS * plen; k++) begin
        int j, e;
        j = k / plen; e = k % plen;
        checks++;
        if (int'(got[k].tag) != j || int'(got[k].off) != e || int'(got[k].data) != expv[j][e] ||
            got[k].last != (k == COLS * plen - 1)) begin
          failures++;
          $display("FAIL ph=%0d col %0d e %0d: got tag %0d off %0d val %0d last %0d, exp %0d",
                   ph, j, e, got[k].tag, got[k].off, got[k].data, got[k].last, expv[j][e]);
        end
      end
      checks++;
      if (int'(mac_count) - mac0 != exp_macs) begin
        failures++; $display("FAIL ph=%0d macs %0d exp %0d", ph, int'(mac_count) - mac0, exp_macs);
      end
    end
  endtask

  initial begin
    act_data = '0; ld_data = '0; cfg_phase = PH_FWD; cfg_psum_len = 8;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int it = 0; it < 3; it++) begin
      run(PH_FWD, 10, it == 1);
      run(PH_BWD, 8, it == 2);
      run(PH_WGRAD, 9, it == 0);
    end
    checks++;
    if (busy) begin failures++; $display("FAIL busy at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
