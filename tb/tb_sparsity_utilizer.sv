// tb_sparsity_utilizer: random (value, index, last) elements, some zero, are
// offered with random output back-pressure. The testbench checks that exactly
// the non-zero and the last elements come out, in order, with their indices,
// that zero elements cost no output cycle, and that the skip counter matches.
module tb_sparsity_utilizer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_last, out_zero;
  logic signed [7:0] in_value = 0, out_value;
  logic [7:0] in_index = 0, out_index;
  logic [15:0] skip_count;

  sparsity_utilizer #(.W(8), .IW(8), .CW(16)) dut (.*);

  int checks = 0, failures = 0;
  int exp_v [$], exp_i [$], exp_l [$];
  int nskip = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always begin
    @(negedge clk); #1;
    if (out_valid && out_ready) begin
      checks++;
      if (exp_v.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        int v, i, l;
        v = exp_v.pop_front(); i = exp_i.pop_front(); l = exp_l.pop_front();
        if (int'(out_value) != v || int'(out_index) != i || int'(out_last) != l ||
            out_zero != (v == 0)) begin
          failures++;
          $display("FAIL got %0d/%0d/%0d exp %0d/%0d/%0d", out_value, out_index, out_last, v, i, l);
        end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int v;
      bit l;
      v = ($urandom_range(0, 1) == 0) ? 0 : int'($urandom_range(1, 255)) - 128;
      l = ($urandom_range(0, 9) == 0);
      @(negedge clk);
      out_ready = $urandom_range(0, 1);
      in_valid = 1; in_value = 8'(v); in_index = 8'(n); in_last = l;
      if (v != 0 || l) begin exp_v.push_back(v); exp_i.push_back(n % 256); exp_l.push_back(l); end
      else nskip++;
      #1;
      if (v == 0 && !l) begin
        checks++;
        if (!in_ready || out_valid) begin failures++; $display("FAIL zero not skipped at once"); end
      end
      while (!in_ready) begin @(negedge clk); out_ready = $urandom_range(0, 1); #1; end
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_v.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_v.size()); end
    checks++;
    if (int'(skip_count) != nskip) begin failures++; $display("FAIL skip %0d exp %0d", skip_count, nskip); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
