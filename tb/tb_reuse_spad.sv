// tb_reuse_spad: appends random entries, reads them back in order, checks the
// entry count, clearing, and that writes beyond DEPTH set the overflow flag
// without disturbing stored entries.
module tb_reuse_spad;
  import eg_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, wr_en = 0, overflow;
  logic signed [RW-1:0] wr_w = 0, rd_w;
  logic [RW-1:0] wr_b = 0, rd_b;
  logic [OFF_W-1:0] wr_idx = 0, rd_idx;
  logic [$clog2(D)-1:0] rd_addr = 0;
  logic [$clog2(D):0] count;

  reuse_spad #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  int mw [D], mb [D], mi [D];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input int n);
    for (int k = 0; k < n; k++) begin
      rd_addr = 4'(k); #1;
      checks++;
      if (int'(rd_w) != mw[k] || int'(rd_b) != mb[k] || int'(rd_idx) != mi[k]) begin
        failures++; $display("FAIL entry %0d", k);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      int n;
      n = (round == 2) ? D + 3 : int'($urandom_range(1, D));
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      checks++;
      if (count != 0 || overflow) begin failures++; $display("FAIL clear"); end
      for (int k = 0; k < n; k++) begin
        int w, b, i;
        w = int'($urandom_range(0, 15)) - 8; b = $urandom_range(0, 15); i = $urandom_range(0, 255);
        wr_en = 1; wr_w = 4'(w); wr_b = 4'(b); wr_idx = 8'(i);
        if (k < D) begin mw[k] = w; mb[k] = b; mi[k] = i; end
        @(negedge clk);
      end
      wr_en = 0;
      checks++;
      if (int'(count) != ((n > D) ? D : n) || overflow != (n > D)) begin
        failures++; $display("FAIL count %0d ovf %0d for n=%0d", count, overflow, n);
      end
      check_all((n > D) ? D : n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
