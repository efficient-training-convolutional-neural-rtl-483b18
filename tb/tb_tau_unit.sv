// tb_tau_unit: feeds 2^LOG_N zero-mean random samples of known spread and
// checks sigma against a floating-point square root of the mean square and
// tau against PhiInv((1+P)/2)*sigma (inverse normal values to 6 digits) for
// several pruning rates, within rounding tolerance; also checks the latency.
module tb_tau_unit;
  import eg_pkg::*;
  localparam int LOG_N = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, sample_en = 0, done;
  logic [3:0] p_sel = 0;
  logic signed [PSUM_W-1:0] sample = 0;
  logic [PSUM_W-2:0] tau;
  logic [PSUM_W-1:0] sigma;

  tau_unit #(.LOG_N(LOG_N)) dut (.*);

  int checks = 0, failures = 0;
  real phinv [10] = '{0.0, 0.125661, 0.253347, 0.385320, 0.524401,
                      0.674490, 0.841621, 1.036433, 1.281552, 1.644854};

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 10; round++) begin
      real sumsq, sig_ref, tau_ref;
      int spread, lat;
      longint sq_i;
      spread = 20 << (round % 8);
      sumsq = 0; sq_i = 0;
      p_sel = 4'(round);
      start = 1; @(negedge clk); start = 0;
      for (int n = 0; n < (1 << LOG_N); n++) begin
        int v;
        v = int'($urandom_range(0, 2 * spread)) - spread;
        sample_en = 1; sample = 16'(v); sq_i += longint'(v) * v;
        @(negedge clk);
      end
      sample_en = 0;
      lat = 0;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      sig_ref = $floor($sqrt(real'(sq_i >> LOG_N)));
      tau_ref = phinv[round] * sig_ref;
      checks++;
      if (real'(sigma) != sig_ref) begin failures++; $display("FAIL sigma %0d exp %0f", sigma, sig_ref); end
      checks++;
      if (real'(tau) > tau_ref + 1.0 || real'(tau) < tau_ref - 1.5) begin
        failures++; $display("FAIL tau %0d exp %0f (P=0.%0d)", tau, tau_ref, round);
      end
      checks++;
      if (lat > PSUM_W + 3) begin failures++; $display("FAIL latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
