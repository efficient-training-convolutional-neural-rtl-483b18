// psum_spad: the PE's partial-sum scratchpad (N x 16 bit).
//
// Port A is a read-modify-write accumulate port: with acc_en the entry at
// acc_addr becomes entry + acc_val at the next clock edge, so back-to-back
// accumulations into the same address need no forwarding. Port B reads an
// entry combinationally for draining; with clr_en the entry at rd_addr is
// zeroed at the same edge, so a drained scratchpad is ready for the next
// row. If both ports hit the same entry in one cycle the clear wins (the PE
// never does this). All entries are zero after reset. Additions wrap in two's
// complement. DEPTH is this design's choice; the paper prints only "N".
module psum_spad
  import eg_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       acc_en,
  input  logic [$clog2(DEPTH)-1:0]   acc_addr,
  input  logic signed [PSUM_W-1:0]   acc_val,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr,
  output logic signed [PSUM_W-1:0]   rd_data,
  input  logic                       clr_en
);
  logic signed [PSUM_W-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else begin
      if (acc_en)  mem[acc_addr] <= mem[acc_addr] + acc_val;
      if (clr_en)  mem[rd_addr]  <= '0;
    end
  end

  assign rd_data = mem[rd_addr];
endmodule
