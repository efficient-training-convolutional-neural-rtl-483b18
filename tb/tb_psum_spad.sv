// tb_psum_spad: random accumulations (including back-to-back ones to the same
// address) against a reference array, then reads with clear, checking the
// value and that cleared entries read zero afterwards; also checks reset.
module tb_psum_spad;
  import eg_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic acc_en = 0, clr_en = 0;
  logic [$clog2(D)-1:0] acc_addr = 0, rd_addr = 0;
  logic signed [PSUM_W-1:0] acc_val = 0, rd_data;

  psum_spad #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  int ref_m [D];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < D; k++) begin
      ref_m[k] = 0; rd_addr = 4'(k); #1; checks++;
      if (rd_data != 0) begin failures++; $display("FAIL reset %0d", k); end
    end
    @(negedge clk);
    for (int round = 0; round < 4; round++) begin
      for (int n = 0; n < 100; n++) begin
        int a, v;
        a = (n % 3 == 0) ? 5 : int'($urandom_range(0, D-1));
        v = int'($urandom_range(0, 4000)) - 2000;
        acc_en = 1; acc_addr = 4'(a); acc_val = 16'(v);
        ref_m[a] = int'(signed'(16'(ref_m[a] + v)));
        @(negedge clk);
      end
      acc_en = 0;
      for (int k = 0; k < D; k++) begin
        rd_addr = 4'(k); clr_en = 1; #1; checks++;
        if (int'(rd_data) != ref_m[k]) begin
          failures++; $display("FAIL round %0d addr %0d got %0d exp %0d", round, k, rd_data, ref_m[k]);
        end
        ref_m[k] = 0;
        @(negedge clk);
      end
      clr_en = 0;
      rd_addr = 4'($urandom_range(0, D-1)); #1; checks++;
      if (rd_data != 0) begin failures++; $display("FAIL clear"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
