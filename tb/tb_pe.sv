// tb_pe: self-checking testbench of the processing element.
//
// Random rows are run through the PE in all three training phases and the
// drained partial sums are compared with a direct (gather-form) convolution
// computed here:
//   phase 1: out[e] = sum_s W[s] * a[e+s]
//   phase 2: out[x] = sum_s sign(W[s])*|B[s]| * d[x-s]
//   phase 3: out[s] = sum_e g[e] * a[s+e]     (g = gradient row as reuse row)
// plus the merge of an incoming partial-sum stream. The MAC counter must equal
// the number of non-zero products that land inside the output row, and the
// compute time must be within a few cycles of one MAC per cycle.
// Stimulus is applied at the falling clock edge.
module tb_pe;
  import eg_pkg::*;

  localparam int RD = 64, PD = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  phase_e                   cfg_phase;
  logic [$clog2(PD):0]      cfg_psum_len;
  logic                     cfg_use_psum_in;
  logic act_valid = 0, act_ready, act_last;
  logic signed [ACT_W-1:0]  act_data;
  logic off_valid = 0, off_ready;
  logic [OFF_W-1:0]         off_data;
  logic ld_valid = 0, ld_ready;
  flit_t                    ld_data;
  logic psi_valid = 0, psi_ready;
  logic signed [PSUM_W-1:0] psi_data;
  logic pso_valid, pso_ready, pso_last, busy;
  logic signed [PSUM_W-1:0] pso_data;
  logic [31:0] mac_count;
  logic [15:0] act_skip_count, w_skip_count;

  pe #(.REUSE_DEPTH(RD), .PSUM_DEPTH(PD)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------------- drivers
  task automatic put_act(input int v, input int o, input bit last);
    act_valid = 1; off_valid = 1;
    act_data = ACT_W'(v); off_data = OFF_W'(o); act_last = last;
    #1;
    while (!(act_ready && off_ready)) begin @(negedge clk); #1; end
    @(negedge clk);
    act_valid = 0; off_valid = 0;
  endtask

  task automatic put_ld(input int w, input int b, input int idx, input bit last);
    ld_valid = 1;
    ld_data = '0;
    ld_data.data = PSUM_W'({b[3:0], w[3:0]});
    ld_data.off  = OFF_W'(idx);
    ld_data.last = last;
    #1;
    while (!ld_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    ld_valid = 0;
  endtask

  // collected outputs
  int got [$];
  int got_last_pos;
  always begin
    @(negedge clk); #1;
    if (pso_valid && pso_ready) begin
      got.push_back(int'(pso_data));
      if (pso_last) got_last_pos = got.size();
    end
  end

  // psum input driver
  int psi_q [$];
  always begin
    @(negedge clk);
    if (psi_q.size() > 0) begin
      psi_valid = 1; psi_data = PSUM_W'(psi_q[0]);
      #1;
      if (psi_ready) begin @(negedge clk); void'(psi_q.pop_front()); psi_valid = 0; end
      else psi_valid = 1;
    end else psi_valid = 0;
  end

  function automatic int wrap16(input longint v);
    return int'(signed'(16'(v)));
  endfunction

  // --------------------------------------------------------------- one run
  task automatic run(input phase_e ph, input int S, input int L, input int plen,
                     input bit use_in, input bit backpressure);
    int w[], b[], a[], pin[], exp_out[];
    int nz_w, exp_macs;
    int mac0, t0, t1;
    w = new[S]; b = new[S]; a = new[L]; pin = new[plen]; exp_out = new[plen];
    for (int s = 0; s < S; s++) begin
      w[s] = ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(0, 15)) - 8;
      b[s] = $urandom_range(0, 15);
    end
    for (int x = 0; x < L; x++)
      a[x] = ($urandom_range(0, 2) == 0) ? 0 : int'($urandom_range(0, 255)) - 128;
    for (int e = 0; e < plen; e++) pin[e] = int'($urandom_range(0, 2000)) - 1000;

    // reference
    exp_macs = 0;
    for (int e = 0; e < plen; e++) begin
      longint acc = 0;
      for (int s = 0; s < S; s++) begin
        if (ph == PH_BWD) begin
          int fb = (w[s] == 0) ? 0 : (w[s] < 0 ? -b[s] : b[s]);
          if (e - s >= 0 && e - s < L) begin
            acc += longint'(fb * a[e-s]);
            if (w[s] != 0 && a[e-s] != 0) exp_macs++;
          end
        end else begin
          if (e + s < L) begin
            acc += longint'(w[s] * a[e+s]);
            if (w[s] != 0 && a[e+s] != 0) exp_macs++;
          end
        end
      end
      if (use_in) acc += longint'(pin[e]);
      exp_out[e] = wrap16(acc);
    end

    cfg_phase = ph; cfg_psum_len = ($clog2(PD)+1)'(plen); cfg_use_psum_in = use_in;
    got.delete(); got_last_pos = -1;
    pso_ready = !backpressure;
    mac0 = int'(mac_count);
    nz_w = 0;
    for (int s = 0; s < S; s++) begin
      put_ld(w[s], b[s], s, s == S-1);
      if (w[s] != 0) nz_w++;
    end
    if (use_in) for (int e = 0; e < plen; e++) psi_q.push_back(pin[e]);
    t0 = cyc;
    for (int x = 0; x < L; x++) put_act(a[x], x, x == L-1);
    // wait for drain
    fork
      begin
        while (got.size() < plen) begin
          @(negedge clk);
          if (backpressure) pso_ready = ($urandom_range(0, 1) == 1);
        end
      end
    join
    t1 = cyc;
    pso_ready = 1;
    repeat (3) @(negedge clk);

    checks++;
    if (got.size() != plen) begin
      failures++; $display("FAIL ph=%0d: %0d outputs, expected %0d", ph, got.size(), plen);
    end
    for (int e = 0; e < plen && e < got.size(); e++) begin
      checks++;
      if (got[e] != exp_out[e]) begin
        failures++;
        $display("FAIL ph=%0d e=%0d got %0d exp %0d", ph, e, got[e], exp_out[e]);
      end
    end
    checks++;
    if (got_last_pos != plen) begin
      failures++; $display("FAIL last flag at %0d", got_last_pos);
    end
    checks++;
    if (int'(mac_count) - mac0 != exp_macs) begin
      failures++; $display("FAIL ph=%0d macs %0d exp %0d", ph, int'(mac_count) - mac0, exp_macs);
    end
    // timing: one MAC slot per stored weight and non-zero streamed element
    if (!backpressure) begin
      int nz_a = 0, slots;
      for (int x = 0; x < L; x++) if (a[x] != 0) nz_a++;
      slots = nz_a * nz_w;
      checks++;
      if ((t1 - t0) > slots + L + plen + 8) begin
        failures++;
        $display("FAIL ph=%0d took %0d cycles for %0d MAC slots", ph, t1 - t0, slots);
      end
    end
  endtask

  initial begin
    cfg_phase = PH_FWD; cfg_psum_len = 8; cfg_use_psum_in = 0; pso_ready = 1;
    act_data = 0; off_data = 0; act_last = 0; ld_data = '0; psi_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int it = 0; it < 6; it++) begin
      run(PH_FWD,   3, 12, 10, 0, it[0]);
      run(PH_BWD,   3, 10, 12, 0, it[0]);
      run(PH_WGRAD, 10, 12, 3, 0, it[0]);
      run(PH_FWD,   5, 20, 16, 1, it[0]);
    end
    checks++;
    if (act_skip_count == 0 || w_skip_count == 0) begin
      failures++; $display("FAIL zero skipping never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
