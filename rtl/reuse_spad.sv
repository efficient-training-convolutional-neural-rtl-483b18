// reuse_spad: the PE's reuse-data scratchpad (N x 4 bit).
//
// It holds the stationary operand of the PE: the weight row in phase 1, the
// same weight signs together with the fixed feedback magnitudes |B| in
// phase 2, and a row of error gradients in phase 3. Keeping both the weight
// and the feedback inside the PE is what lets phase 2 run without fetching a
// transposed weight matrix from DRAM.
//
// The scratchpad is written as a compressed list: only the non-zero entries
// are appended, each with its original index, so reading entry k returns the
// k-th non-zero element. `clear` empties the list (one cycle); `wr_en`
// appends one entry. The read port is combinational (register-file style).
// Each entry holds a 4-bit weight and a 4-bit feedback magnitude, i.e. two
// N x 4 bit arrays, plus the index. Entries beyond DEPTH are dropped and
// flagged in `overflow`. DEPTH is this design's choice; the paper prints
// only "N".
module reuse_spad
  import eg_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       wr_en,
  input  logic signed [RW-1:0]       wr_w,
  input  logic [RW-1:0]              wr_b,
  input  logic [OFF_W-1:0]           wr_idx,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr,
  output logic signed [RW-1:0]       rd_w,
  output logic [RW-1:0]              rd_b,
  output logic [OFF_W-1:0]           rd_idx,
  output logic [$clog2(DEPTH):0]     count,
  output logic                       overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic signed [RW-1:0] w_mem   [DEPTH];
  logic [RW-1:0]        b_mem   [DEPTH];
  logic [OFF_W-1:0]     idx_mem [DEPTH];

  wire full = (count == (AW+1)'(DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (wr_en) begin
      if (full) overflow <= 1'b1;
      else      count    <= count + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !clear && !full) begin
      w_mem[count[AW-1:0]]   <= wr_w;
      b_mem[count[AW-1:0]]   <= wr_b;
      idx_mem[count[AW-1:0]] <= wr_idx;
    end
  end

  assign rd_w   = w_mem[rd_addr];
  assign rd_b   = b_mem[rd_addr];
  assign rd_idx = idx_mem[rd_addr];
endmodule
