// tb_router: for several random router settings (including multicast of one
// input to several outputs and unused ports) every input sends numbered
// flits with random gaps while every output applies random back-pressure.
// Each output must deliver exactly the flits of the input it selects, in
// order, and an unselected input must never be accepted.
module tb_router;
  import eg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  rport_e cfg_sel [RPORTS];
  logic   in_valid [RPORTS], in_ready [RPORTS];
  flit_t  in_data  [RPORTS];
  logic   out_valid [RPORTS], out_ready [RPORTS];
  flit_t  out_data  [RPORTS];

  router dut (.*);

  int checks = 0, failures = 0;
  int sent [RPORTS];      // flits accepted per input
  int recv [RPORTS];      // flits delivered per output
  bit running = 0;
  int NPER = 60;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar p = 0; p < RPORTS; p++) begin : g_p
    // input driver: flit payload = input number * 1000 + sequence number
    always begin
      @(negedge clk);
      if (running && sent[p] < NPER && $urandom_range(0, 3) != 0) begin
        in_valid[p] = 1;
        in_data[p] = '0;
        in_data[p].data = 16'(p * 1000 + sent[p]);
        in_data[p].tag  = 4'(p);
      end else in_valid[p] = 0;
      out_ready[p] = ($urandom_range(0, 2) != 0);
      #1;
      if (in_valid[p] && in_ready[p]) sent[p]++;
      if (out_valid[p] && out_ready[p]) begin
        int src;
        src = int'(cfg_sel[p]);
        checks++;
        if (src > 4 || int'(out_data[p].data) != src * 1000 + recv[p]) begin
          failures++;
          $display("FAIL out %0d got %0d expected %0d", p, out_data[p].data, src * 1000 + recv[p]);
        end
        recv[p]++;
      end
    end
  end

  initial begin
    for (int p = 0; p < RPORTS; p++) begin in_valid[p] = 0; in_data[p] = '0; out_ready[p] = 0; end
    for (int p = 0; p < RPORTS; p++) cfg_sel[p] = RP_NONE;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      bit used [RPORTS];
      for (int p = 0; p < RPORTS; p++) begin sent[p] = 0; recv[p] = 0; used[p] = 0; end
      for (int o = 0; o < RPORTS; o++) begin
        int s;
        s = $urandom_range(0, 5);
        if (round == 0) s = (o + 1) % RPORTS;        // a full permutation
        if (round == 1) s = 2;                       // broadcast of one input
        cfg_sel[o] = (s == 5) ? RP_NONE : rport_e'(s);
        if (s < 5) used[s] = 1;
      end
      @(negedge clk);
      running = 1;
      repeat (800) @(negedge clk);
      running = 0;
      repeat (10) @(negedge clk);
      for (int p = 0; p < RPORTS; p++) begin
        checks++;
        if (!used[p] && sent[p] != 0) begin failures++; $display("FAIL unselected input %0d taken", p); end
        if (used[p] && sent[p] != NPER) begin failures++; $display("FAIL input %0d sent %0d", p, sent[p]); end
        if (cfg_sel[p] != RP_NONE) begin
          checks++;
          if (recv[p] != NPER) begin failures++; $display("FAIL output %0d got %0d flits", p, recv[p]); end
        end
      end
      // drain everything (unselected inputs keep their flit pending)
      for (int p = 0; p < RPORTS; p++) cfg_sel[p] = RP_NONE;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
