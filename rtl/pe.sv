// pe: processing element. It runs the 1-D row convolution that the row
// stationary dataflow assigns to one PE, in any of the three training phases.
//
// Structure (after the PE diagram of the architecture): FIFOs on every port;
// a sparsity utilizer on the streamed operand (input activations or error
// gradients), one on the reuse load port (weights / gradients) and one on
// the offset vector that turns an element offset into a partial-sum address;
// the reuse-data scratchpad; a multiplier, a pipeline register and an adder
// that accumulates into the partial-sum scratchpad; a 0 / PSum-Input
// multiplexer and a data merger in front of the PSum Output port.
//
// Operation. The streamed operand arrives as values on act_* plus their
// positions on off_* (one offset per value, in the same order). The reuse
// row is loaded on ld_* as flits {off = index s, data = {|B|, W}}; zero
// weights are not stored. Each non-zero streamed element x at offset o is
// multiplied by every stored reuse entry k (index s_k) and accumulated into
//   psum[o - s_k]   in phases 1 and 3 (correlation: out[e] += W[s]*a[e+s])
//   psum[o + s_k]   in phase 2       (transposed: d_in[e+s] += FB[s]*d[e])
// where the reuse operand is W in phases 1/3 and sign(W)*|B| in phase 2.
// Addresses outside [0, psum_len) are discarded. Phase 3 uses the first
// form with an error-gradient row loaded as the reuse data.
//
// Control. IDLE: a load flit starts LOAD (the previous reuse row is
// replaced), a streamed element starts COMP. A reuse row stays resident
// across any number of streamed rows. COMP ends after the element marked
// last; the PE then drains psum[0..psum_len-1] through the data merger and
// clears each entry as it leaves. pso_last marks the final partial sum.
//
// Timing: one MAC per cycle. A streamed element with K stored reuse entries
// takes K cycles (the next element is taken in the cycle its last MAC
// issues); zero elements cost no MAC cycle. Product to scratchpad latency is
// 2 cycles. Drain emits one partial sum per cycle when not back-pressured.
// Widths, the compressed scratchpad format and the control are this design's
// choices; the block structure and the 4/16-bit scratchpad widths follow the
// architecture.
module pe
  import eg_pkg::*;
#(
  parameter int unsigned REUSE_DEPTH = 64,
  parameter int unsigned PSUM_DEPTH  = 64,
  parameter int unsigned FIFO_DEPTH  = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // configuration, held stable while the PE works
  input  phase_e                     cfg_phase,
  input  logic [$clog2(PSUM_DEPTH):0] cfg_psum_len,
  input  logic                       cfg_use_psum_in,
  // streamed operand values (input activations / error gradients)
  input  logic                       act_valid,
  output logic                       act_ready,
  input  logic signed [ACT_W-1:0]    act_data,
  input  logic                       act_last,
  // offset vector
  input  logic                       off_valid,
  output logic                       off_ready,
  input  logic [OFF_W-1:0]           off_data,
  // reuse operand load (weights + |B|, or error gradients)
  input  logic                       ld_valid,
  output logic                       ld_ready,
  input  flit_t                      ld_data,
  // partial sums in / out
  input  logic                       psi_valid,
  output logic                       psi_ready,
  input  logic signed [PSUM_W-1:0]   psi_data,
  output logic                       pso_valid,
  input  logic                       pso_ready,
  output logic signed [PSUM_W-1:0]   pso_data,
  output logic                       pso_last,
  // status
  output logic                       busy,
  output logic [31:0]                mac_count,
  output logic [15:0]                act_skip_count,
  output logic [15:0]                w_skip_count
);
  localparam int unsigned RAW = $clog2(REUSE_DEPTH);
  localparam int unsigned PAW = $clog2(PSUM_DEPTH);
  localparam int unsigned PW  = ACT_W + RW + 1;   // product width

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_COMP, S_DRAIN} state_e;
  state_e state;

  // ---------------------------------------------------------------- FIFOs
  logic                     a_v, a_r;  logic signed [ACT_W-1:0] a_d; logic a_l;
  logic                     o_v, o_r;  logic [OFF_W-1:0] o_d;
  logic                     l_v, l_r;  flit_t l_d;
  logic                     p_v, p_r;  logic signed [PSUM_W-1:0] p_d;
  logic                     q_v, q_r;  logic [PSUM_W:0] q_d;   // {last, psum}
  logic                     m_v, m_r;  logic signed [PSUM_W-1:0] m_d;

  stream_fifo #(.W(ACT_W+1), .DEPTH(FIFO_DEPTH)) u_act_fifo (
    .clk, .rst_n, .in_valid(act_valid), .in_ready(act_ready),
    .in_data({act_last, act_data}), .out_valid(a_v), .out_ready(a_r),
    .out_data({a_l, a_d}));
  stream_fifo #(.W(OFF_W), .DEPTH(FIFO_DEPTH)) u_off_fifo (
    .clk, .rst_n, .in_valid(off_valid), .in_ready(off_ready),
    .in_data(off_data), .out_valid(o_v), .out_ready(o_r), .out_data(o_d));
  stream_fifo #(.W(FLIT_W), .DEPTH(FIFO_DEPTH)) u_ld_fifo (
    .clk, .rst_n, .in_valid(ld_valid), .in_ready(ld_ready),
    .in_data(ld_data), .out_valid(l_v), .out_ready(l_r), .out_data(l_d));
  stream_fifo #(.W(PSUM_W), .DEPTH(FIFO_DEPTH)) u_psi_fifo (
    .clk, .rst_n, .in_valid(psi_valid), .in_ready(psi_ready),
    .in_data(psi_data), .out_valid(p_v), .out_ready(p_r), .out_data(p_d));
  stream_fifo #(.W(PSUM_W+1), .DEPTH(FIFO_DEPTH)) u_pso_fifo (
    .clk, .rst_n, .in_valid(q_v), .in_ready(q_r), .in_data(q_d),
    .out_valid(pso_valid), .out_ready(pso_ready),
    .out_data({pso_last, pso_data}));

  // ----------------------------------------------- streamed-operand utilizer
  // value and offset FIFOs are joined element by element
  logic                    su_v, su_r, su_last, su_zero, join_r;
  logic signed [ACT_W-1:0] su_val;
  logic [OFF_W-1:0]        su_off;

  sparsity_utilizer #(.W(ACT_W), .IW(OFF_W), .CW(16)) u_act_su (
    .clk, .rst_n,
    .in_valid(a_v && o_v && state inside {S_IDLE, S_COMP}), .in_ready(join_r),
    .in_value(a_d), .in_index(o_d), .in_last(a_l),
    .out_valid(su_v), .out_ready(su_r), .out_value(su_val),
    .out_index(su_off), .out_last(su_last), .out_zero(su_zero),
    .skip_count(act_skip_count));

  assign a_r = a_v && o_v && join_r && (state inside {S_IDLE, S_COMP});
  assign o_r = a_r;

  // ----------------------------------------------- reuse load utilizer
  logic                 wsu_v, wsu_zero;
  logic signed [RW-1:0] wsu_w;
  logic [OFF_W-1:0]     wsu_idx;
  logic                 wsu_in_r;

  sparsity_utilizer #(.W(RW), .IW(OFF_W), .CW(16)) u_w_su (
    .clk, .rst_n,
    .in_valid(l_v && state == S_LOAD), .in_ready(wsu_in_r),
    .in_value(load_w(l_d.data)), .in_index(l_d.off), .in_last(l_d.last),
    .out_valid(wsu_v), .out_ready(state == S_LOAD), .out_value(wsu_w),
    .out_index(wsu_idx), .out_last(), .out_zero(wsu_zero),
    .skip_count(w_skip_count));

  assign l_r = l_v && state == S_LOAD && wsu_in_r;

  // feedback magnitude travels beside the weight through the utilizer
  logic [RW-1:0] wsu_b;
  assign wsu_b = load_b(l_d.data);

  // ----------------------------------------------- reuse scratchpad
  logic [RAW-1:0]       k;
  logic signed [RW-1:0] r_w;
  logic [RW-1:0]        r_b;
  logic [OFF_W-1:0]     r_idx;
  logic [RAW:0]         r_cnt;
  logic                 r_ovf;
  logic                 idle_start_load;

  assign idle_start_load = (state == S_IDLE) && l_v;

  reuse_spad #(.DEPTH(REUSE_DEPTH)) u_reuse (
    .clk, .rst_n,
    .clear(idle_start_load),
    .wr_en(wsu_v && state == S_LOAD && !wsu_zero),
    .wr_w(wsu_w), .wr_b(wsu_b), .wr_idx(wsu_idx),
    .rd_addr(k), .rd_w(r_w), .rd_b(r_b), .rd_idx(r_idx),
    .count(r_cnt), .overflow(r_ovf));

  // ----------------------------------------------- MAC stage 0
  logic                    cur_v, cur_last, cur_zero;
  logic signed [ACT_W-1:0] cur_val;
  logic [OFF_W-1:0]        cur_off;

  logic signed [RW:0]      opnd;
  ssfa_feedback u_fb (.phase(cfg_phase), .w(r_w), .b_mag(r_b), .operand(opnd));

  // no MAC for a zero (last-only) element or an empty reuse row
  wire no_mac   = cur_zero || (r_cnt == '0);
  wire issuing  = (state == S_COMP) && cur_v && !no_mac;
  wire tok_done = cur_v && (no_mac || (issuing && ({1'b0, k} == r_cnt - 1'b1)));

  // offset utilizer: offset -> partial-sum address, range check
  logic signed [OFF_W+1:0] addr_s;
  always_comb begin
    if (cfg_phase == PH_BWD)
      addr_s = $signed({2'b00, cur_off}) + $signed({2'b00, r_idx});
    else
      addr_s = $signed({2'b00, cur_off}) - $signed({2'b00, r_idx});
  end
  wire addr_ok = (addr_s >= 0) && (addr_s < $signed((OFF_W+2)'(cfg_psum_len)));

  // a new streamed element is taken when none is held or the held one
  // finishes this cycle, unless the held one is the last of its row
  assign su_r = ((state == S_IDLE) && !l_v) || ((state == S_COMP) && (!cur_v || (tok_done && !cur_last)));

  // ----------------------------------------------- MAC stage 1
  logic                    s1_v;
  logic [PAW-1:0]          s1_addr;
  logic signed [PW-1:0]    s1_prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v    <= 1'b0;
      s1_addr <= '0;
      s1_prod <= '0;
    end else begin
      s1_v    <= issuing && addr_ok;
      s1_addr <= PAW'(addr_s);
      s1_prod <= PW'(cur_val) * PW'(opnd);
    end
  end

  // ----------------------------------------------- partial sums and drain
  logic [PAW:0]             e;
  logic signed [PSUM_W-1:0] ps_rd;
  logic                     drain_take, loc_ready;

  psum_spad #(.DEPTH(PSUM_DEPTH)) u_psum (
    .clk, .rst_n,
    .acc_en(s1_v), .acc_addr(s1_addr), .acc_val(PSUM_W'(s1_prod)),
    .rd_addr(e[PAW-1:0]), .rd_data(ps_rd), .clr_en(drain_take));

  data_merger u_merge (
    .use_in(cfg_use_psum_in),
    .loc_valid(state == S_DRAIN && !s1_v), .loc_ready(loc_ready), .loc_data(ps_rd),
    .in_valid(p_v), .in_ready(p_r), .in_data(p_d),
    .out_valid(m_v), .out_ready(m_r), .out_data(m_d));

  // an entry leaves (and is cleared) when the merged value is accepted
  assign drain_take = m_v && m_r;
  assign q_v = m_v;
  assign m_r = q_r;
  assign q_d = {(e == cfg_psum_len - 1'b1), m_d};

  // ----------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      k         <= '0;
      cur_v     <= 1'b0;
      cur_last  <= 1'b0;
      cur_zero  <= 1'b0;
      cur_val   <= '0;
      cur_off   <= '0;
      e         <= '0;
      mac_count <= '0;
    end else begin
      if (issuing && addr_ok) mac_count <= mac_count + 1'b1;

      unique case (state)
        S_IDLE: begin
          if (l_v) begin
            state <= S_LOAD;
          end else if (su_v) begin
            state    <= S_COMP;
            cur_v    <= 1'b1;
            cur_val  <= su_val;
            cur_off  <= su_off;
            cur_last <= su_last;
            cur_zero <= su_zero;
            k        <= '0;
          end
        end
        S_LOAD: begin
          if (l_r && l_d.last) state <= S_IDLE;
        end
        S_COMP: begin
          if (issuing && !tok_done) k <= k + 1'b1;
          if (!cur_v || tok_done) begin
            if (cur_v && cur_last) begin
              cur_v <= 1'b0;
              state <= S_DRAIN;
              e     <= '0;
            end else if (su_v) begin
              cur_v    <= 1'b1;
              cur_val  <= su_val;
              cur_off  <= su_off;
              cur_last <= su_last;
              cur_zero <= su_zero;
              k        <= '0;
            end else begin
              cur_v <= 1'b0;
            end
          end
        end
        S_DRAIN: begin
          // the drain waits until the last accumulation has been written
          if (drain_take) begin
            if (e == cfg_psum_len - 1'b1) begin
              state <= S_IDLE;
              e     <= '0;
            end else begin
              e <= e + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) || s1_v;

  a_psum_len_fits: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_psum_len <= ($clog2(PSUM_DEPTH)+1)'(PSUM_DEPTH));
  a_reuse_fits: assert property (@(posedge clk) disable iff (!rst_n) !r_ovf);
endmodule
