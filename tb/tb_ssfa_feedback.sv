// tb_ssfa_feedback: exhaustive check of the reuse operand for every weight,
// feedback magnitude and phase: sign(W)*|B| in phase 2, W otherwise.
module tb_ssfa_feedback;
  import eg_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  phase_e phase;
  logic signed [RW-1:0] w;
  logic [RW-1:0] b_mag;
  logic signed [RW:0] operand;

  ssfa_feedback dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 3; p++)
      for (int wi = -8; wi < 8; wi++)
        for (int bi = 0; bi < 16; bi++) begin
          int expv;
          phase = phase_e'(p); w = 4'(wi); b_mag = 4'(bi);
          #1;
          if (p == 1) expv = (wi > 0) ? bi : (wi < 0) ? -bi : 0;
          else        expv = wi;
          checks++;
          if (int'(operand) != expv) begin
            failures++; $display("FAIL p=%0d w=%0d b=%0d got %0d exp %0d", p, wi, bi, operand, expv);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
