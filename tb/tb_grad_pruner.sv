// tb_grad_pruner: sends random error gradients through the pruner and checks
// every output against the pruning rule using a copy of the random sequence
// generated here (same LFSR polynomial and seed), then checks that the
// pruned stream keeps the mean of the inputs (statistical check on small
// gradients) and that the stream passes unchanged when pruning is disabled.
module tb_grad_pruner;
  import eg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [PSUM_W-2:0] tau = 0;
  flit_t in_data, out_data;
  logic [31:0] kept_count, rounded_count, pruned_count;

  grad_pruner #(.SEED(16'hACE1)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] r = 16'hACE1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum_in = 0, sum_out = 0;
    int nk = 0, nr = 0, np = 0;
    in_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    en = 1; tau = 15'd200;
    for (int n = 0; n < 20000; n++) begin
      int d, m, expv;
      d = (n % 10 == 0) ? int'($urandom_range(0, 2000)) - 1000 : int'($urandom_range(0, 400)) - 200;
      in_valid = 1; in_data = '0; in_data.data = 16'(d);
      out_ready = ($urandom_range(0, 4) != 0);
      #1;
      m = (d < 0) ? -d : d;
      if (m > 200) begin expv = d; nk += out_ready; end
      else if (longint'(r) * 200 <= longint'(m) * 65536) begin expv = (d < 0) ? -200 : 200; nr += out_ready; end
      else begin expv = 0; np += out_ready; end
      if (out_ready) begin
        checks++;
        if (int'(out_data.data) != expv) begin
          failures++; $display("FAIL d=%0d got %0d exp %0d", d, out_data.data, expv);
        end
        if (m <= 200) begin sum_in += d; sum_out += expv; end
        r = {r[14:0], r[15] ^ r[13] ^ r[12] ^ r[10]};
      end
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (int'(kept_count) != nk || int'(rounded_count) != nr || int'(pruned_count) != np) begin
      failures++; $display("FAIL counters %0d/%0d/%0d exp %0d/%0d/%0d", kept_count, rounded_count, pruned_count, nk, nr, np);
    end
    // expectation kept: mean difference below 3 per small gradient sample
    checks++;
    if ((sum_out - sum_in) > 3 * 18000 || (sum_in - sum_out) > 3 * 18000) begin
      failures++; $display("FAIL mean drift %0d vs %0d", sum_out, sum_in);
    end
    $display("small-gradient sums: in %0d out %0d; kept %0d rounded %0d pruned %0d", sum_in, sum_out, nk, nr, np);
    // pass-through when disabled
    en = 0;
    for (int n = 0; n < 50; n++) begin
      int d;
      d = int'($urandom_range(0, 400)) - 200;
      in_valid = 1; in_data = '0; in_data.data = 16'(d); out_ready = 1; #1;
      checks++;
      if (int'(out_data.data) != d) begin failures++; $display("FAIL bypass"); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
