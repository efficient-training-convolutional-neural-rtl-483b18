// tb_glb_bank: fills a bank from the DRAM side, streams a window of it out
// under random back-pressure, writes a stream into another region, and reads
// everything back through the DRAM-side port, comparing with a reference
// copy. Also checks one flit per cycle when the consumer is always ready.
module tb_glb_bank;
  import eg_pkg::*;
  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ext_we = 0, rd_start = 0, rd_busy, out_valid, out_ready = 0;
  logic wr_start = 0, in_valid = 0, in_ready;
  logic [5:0] ext_waddr = 0, ext_raddr = 0, rd_base = 0, wr_base = 0;
  logic [6:0] rd_len = 0, wr_count;
  flit_t ext_wdata, ext_rdata, out_data, in_data;

  glb_bank #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  int ref_m [D];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ext_wdata = '0; in_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < D; k++) begin
      ref_m[k] = $urandom_range(0, 65535);
      ext_we = 1; ext_waddr = 6'(k); ext_wdata = '0; ext_wdata.data = 16'(ref_m[k]);
      @(negedge clk);
    end
    ext_we = 0;
    for (int pass = 0; pass < 2; pass++) begin
      int base, len, got, t0;
      base = 5 + pass * 10; len = 20; got = 0;
      rd_start = 1; rd_base = 6'(base); rd_len = 7'(len);
      @(negedge clk); rd_start = 0;
      t0 = 0;
      while (got < len && t0 < 500) begin
        out_ready = (pass == 0) ? 1'b1 : 1'($urandom_range(0, 1));
        #1;
        if (out_valid && out_ready) begin
          checks++;
          if (int'($unsigned(out_data.data)) != ref_m[base + got]) begin
            failures++; $display("FAIL stream %0d", got);
          end
          got++;
        end
        @(negedge clk); t0++;
      end
      out_ready = 0;
      checks++;
      if (got != len || rd_busy) begin failures++; $display("FAIL stream length %0d busy %0d pass %0d", got, rd_busy, pass); end
      if (pass == 0) begin
        checks++;
        if (t0 != len) begin failures++; $display("FAIL rate: %0d cycles for %0d flits", t0, len); end
      end
    end
    // stream write into [40, 52)
    wr_start = 1; wr_base = 6'd40; @(negedge clk); wr_start = 0;
    for (int k = 0; k < 12; k++) begin
      int v;
      v = $urandom_range(0, 65535);
      in_valid = ($urandom_range(0, 3) != 0);
      in_data = '0; in_data.data = 16'(v);
      if (in_valid) ref_m[40 + int'(wr_count)] = v;
      @(negedge clk);
    end
    in_valid = 0;
    for (int k = 0; k < D; k++) begin
      ext_raddr = 6'(k); @(negedge clk);
      checks++;
      if (int'($unsigned(ext_rdata.data)) != ref_m[k]) begin failures++; $display("FAIL readback %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
