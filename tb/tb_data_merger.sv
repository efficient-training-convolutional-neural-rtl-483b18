// tb_data_merger: checks the sum and the handshake of the data merger for
// both settings of the 0 / PSum-Input multiplexer over random values and
// random valid/ready combinations.
module tb_data_merger;
  import eg_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic use_in, loc_valid, loc_ready, in_valid, in_ready, out_valid, out_ready;
  logic signed [PSUM_W-1:0] loc_data, in_data, out_data;

  data_merger dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      int l, i;
      bit ev, elr, eir;
      use_in = $urandom_range(0, 1); loc_valid = $urandom_range(0, 1);
      in_valid = $urandom_range(0, 1); out_ready = $urandom_range(0, 1);
      l = int'($urandom_range(0, 60000)) - 30000; i = int'($urandom_range(0, 60000)) - 30000;
      loc_data = 16'(l); in_data = 16'(i);
      #1;
      ev  = loc_valid && (!use_in || in_valid);
      elr = out_ready && (!use_in || in_valid);
      eir = use_in && out_ready && loc_valid;
      checks++;
      if (out_valid != ev || loc_ready != elr || in_ready != eir) begin
        failures++; $display("FAIL handshake");
      end
      checks++;
      if (int'(out_data) != int'(signed'(16'(l + (use_in ? i : 0))))) begin
        failures++; $display("FAIL sum %0d+%0d (use %0d) got %0d", l, i, use_in, out_data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
