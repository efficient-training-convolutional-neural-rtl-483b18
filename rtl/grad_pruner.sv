// grad_pruner: stochastic pruning of error gradients.
//
// For every error gradient d leaving the backward phase, with threshold tau
// and a fresh uniform random number r in [0, 1):
//   |d| >  tau            -> d                 (kept)
//   r*tau <= |d| <= tau   -> tau * sign(d)     (rounded up to the threshold)
//   otherwise             -> 0                 (pruned)
// Small gradients are thus either dropped or promoted to +-tau, which keeps
// the expected value of each gradient while making most of them zero; the
// zeros are then skipped by the PE sparsity utilizers.
//
// r is the state of a 16-bit maximal-length Fibonacci LFSR (taps 16,14,13,11)
// read as a fraction r = lfsr / 2^16; the test r*tau <= |d| is done exactly
// as (lfsr * tau) <= (|d| << 16). The LFSR advances once per gradient that
// passes while enabled. With en low the stream passes unchanged. The
// datapath is combinational (valid/ready pass straight through); the
// counters count kept, rounded and pruned gradients. The pruning rule is the
// architecture's; the LFSR as random source is this design's choice.
module grad_pruner
  import eg_pkg::*;
#(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic [PSUM_W-2:0]        tau,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  flit_t                    in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output flit_t                    out_data,
  output logic [31:0]              kept_count,
  output logic [31:0]              rounded_count,
  output logic [31:0]              pruned_count
);
  logic [15:0]        lfsr;
  logic [PSUM_W-1:0]  mag;
  logic [PSUM_W+15:0] lhs, rhs;
  logic               keep, round_up;
  logic signed [PSUM_W-1:0] d;

  assign d    = in_data.data;
  assign mag  = d[PSUM_W-1] ? PSUM_W'(-d) : PSUM_W'(d);
  assign lhs  = (PSUM_W+16)'(lfsr) * (PSUM_W+16)'(tau);
  assign rhs  = {mag, 16'h0000};
  assign keep     = (mag > PSUM_W'(tau));
  assign round_up = !keep && (lhs <= rhs);

  always_comb begin
    out_data = in_data;
    if (en) begin
      if (keep)
        out_data.data = d;
      else if (round_up)
        out_data.data = d[PSUM_W-1] ? -$signed({1'b0, tau}) : $signed({1'b0, tau});
      else
        out_data.data = '0;
    end
  end

  assign out_valid = in_valid;
  assign in_ready  = out_ready;

  wire fire = in_valid && out_ready && en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr          <= SEED;
      kept_count    <= '0;
      rounded_count <= '0;
      pruned_count  <= '0;
    end else if (fire) begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      if (keep)          kept_count    <= kept_count + 1'b1;
      else if (round_up) rounded_count <= rounded_count + 1'b1;
      else               pruned_count  <= pruned_count + 1'b1;
    end
  end
endmodule
