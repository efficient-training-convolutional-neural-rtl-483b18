// tau_unit: computes the dynamic pruning threshold
//   tau = PhiInv((1 + P) / 2) * sigma
// from the error gradients of a layer, where Phi is the standard normal CDF
// and P the wanted pruning rate. Error gradients are modelled as a zero-mean
// normal distribution, so sigma^2 is estimated as the mean of d^2.
//
// Operation: `start` clears the accumulator. Each cycle with sample_en the
// square of sample is added; after 2^LOG_N samples the unit takes the
// integer square root of sum/2^LOG_N bit by bit (one result bit per cycle,
// PSUM_W cycles), multiplies sigma by the constant
// K[p_sel] = round(4096 * PhiInv((1 + P)/2)) for P = p_sel/10 (p_sel 0..9),
// and raises `done` with tau held stable until the next start.
// Latency from the last sample to done: PSUM_W + 2 cycles.
//
// The formula is the architecture's; estimating sigma in hardware, the
// power-of-two sample count, the bit-serial square root and the 0.1 step of
// P are this design's choices.
module tau_unit
  import eg_pkg::*;
#(
  parameter int unsigned LOG_N = 10
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [3:0]                p_sel,
  input  logic                      sample_en,
  input  logic signed [PSUM_W-1:0]  sample,
  output logic [PSUM_W-2:0]         tau,
  output logic [PSUM_W-1:0]         sigma,
  output logic                      done
);
  localparam int unsigned SW       = 2*PSUM_W + LOG_N;  // sum of squares
  localparam int unsigned VW       = 2*PSUM_W;          // variance
  localparam int unsigned SQ_STEPS = VW/2;              // root bits

  typedef enum logic [1:0] {T_ACC, T_SQRT, T_MUL, T_DONE} tstate_e;
  tstate_e state;

  logic [SW-1:0]    acc;
  logic [LOG_N:0]   n;
  logic [VW-1:0]    rem;      // remainder of the root
  logic [VW/2-1:0]  root;
  logic [VW-1:0]    var_q;
  logic [$clog2(SQ_STEPS+1)-1:0] step;
  logic [15:0]      kconst;

  // K = round(4096 * PhiInv(0.5 + P/2)) for P = 0.0, 0.1, ..., 0.9
  always_comb begin
    unique case (p_sel)
      4'd0: kconst = 16'd0;
      4'd1: kconst = 16'd515;
      4'd2: kconst = 16'd1038;
      4'd3: kconst = 16'd1578;
      4'd4: kconst = 16'd2148;
      4'd5: kconst = 16'd2763;
      4'd6: kconst = 16'd3447;
      4'd7: kconst = 16'd4245;
      4'd8: kconst = 16'd5249;
      default: kconst = 16'd6737;
    endcase
  end

  // one step of the restoring square root: bring down two bits of var_q
  logic [VW+1:0] trial_rem;
  logic [VW+1:0] trial_sub;
  assign trial_rem = {rem, var_q[VW-1 -: 2]};
  assign trial_sub = (VW+2)'({root, 2'b01});

  wire signed [PSUM_W-1:0] s = sample;
  wire [2*PSUM_W-1:0] sq = (2*PSUM_W)'(s * s);
  logic [PSUM_W+15:0] prod;
  assign prod = (PSUM_W+16)'(root) * (PSUM_W+16)'(kconst);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_ACC;
      acc   <= '0;
      n     <= '0;
      rem   <= '0;
      root  <= '0;
      var_q <= '0;
      step  <= '0;
      tau   <= '0;
      sigma <= '0;
      done  <= 1'b0;
    end else if (start) begin
      state <= T_ACC;
      acc   <= '0;
      n     <= '0;
      done  <= 1'b0;
    end else begin
      unique case (state)
        T_ACC: if (sample_en) begin
          acc <= acc + SW'(sq);
          n   <= n + 1'b1;
          if (n == (LOG_N+1)'((1 << LOG_N) - 1)) begin
            state <= T_SQRT;
            var_q <= VW'((acc + SW'(sq)) >> LOG_N);
            rem   <= '0;
            root  <= '0;
            step  <= '0;
          end
        end
        T_SQRT: begin
          if (trial_rem >= trial_sub) begin
            rem  <= VW'(trial_rem - trial_sub);
            root <= {root[VW/2-2:0], 1'b1};
          end else begin
            rem  <= VW'(trial_rem);
            root <= {root[VW/2-2:0], 1'b0};
          end
          var_q <= {var_q[VW-3:0], 2'b00};
          step  <= step + 1'b1;
          if (step == ($clog2(SQ_STEPS+1))'(SQ_STEPS-1)) state <= T_MUL;
        end
        T_MUL: begin
          sigma <= PSUM_W'(root);
          tau   <= (prod >> 12) > (PSUM_W+16)'({(PSUM_W-1){1'b1}})
                   ? '1 : (PSUM_W-1)'(prod >> 12);
          done  <= 1'b1;
          state <= T_DONE;
        end
        default: ;
      endcase
    end
  end
endmodule
