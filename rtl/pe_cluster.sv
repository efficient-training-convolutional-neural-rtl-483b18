// pe_cluster: the 3 x 4 array of PEs of one processing cluster, wired for
// the row stationary dataflow.
//
// PE(i,j) sits in row i (0..ROWS-1) and column j (0..COLS-1).
//  * Reuse rows: a load flit with tag i is broadcast to all PEs of row i, so
//    one filter row is shared along a PE row.
//  * Streamed rows: a flit with tag d is broadcast to all PEs with i+j == d,
//    i.e. each activation (or error-gradient) row is shared along an
//    anti-diagonal. The flit carries value (data), offset (off) and the
//    end-of-row flag (last); the cluster splits it into the PE's value and
//    offset-vector ports.
//  * Partial sums accumulate up each column: PE(ROWS-1,j) merges with 0,
//    every other PE merges with the stream of the PE below it, and PE(0,j)
//    delivers the column's result row.
// Column j therefore computes sum_i reuse_row(i) (*) stream_row(i+j). With a
// 2-D kernel of height ROWS this is output row j in phase 1; with the filter
// rows loaded in reverse order and error-gradient rows d placed on diagonal
// d+ROWS-1 it is input-gradient row j in phase 2; with error-gradient rows as
// reuse rows it is weight-gradient row j in phase 3.
//
// A broadcast is accepted only when every target PE can take it. After every
// diagonal has seen its last flit the columns drain in order 0..COLS-1; each
// output flit carries tag = column, off = element index, and last on the
// final element of the final column. The PE count and the row/diagonal
// sharing follow the architecture; the column drain order and the flit
// format are this design's choices.
module pe_cluster
  import eg_pkg::*;
#(
  parameter int unsigned ROWS        = 3,
  parameter int unsigned COLS        = 4,
  parameter int unsigned REUSE_DEPTH = 64,
  parameter int unsigned PSUM_DEPTH  = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  phase_e                       cfg_phase,
  input  logic [$clog2(PSUM_DEPTH):0]  cfg_psum_len,
  input  logic                         act_valid,
  output logic                         act_ready,
  input  flit_t                        act_data,
  input  logic                         ld_valid,
  output logic                         ld_ready,
  input  flit_t                        ld_data,
  output logic                         out_valid,
  input  logic                         out_ready,
  output flit_t                        out_data,
  output logic                         busy,
  output logic [31:0]                  mac_count,
  output logic [31:0]                  act_skip_count,
  output logic [31:0]                  w_skip_count
);
  localparam int unsigned CW  = $clog2(COLS) > 0 ? $clog2(COLS) : 1;

  logic pe_act_valid [ROWS][COLS], pe_act_ready [ROWS][COLS];
  logic pe_off_ready [ROWS][COLS];
  logic pe_ld_valid  [ROWS][COLS], pe_ld_ready  [ROWS][COLS];
  logic pe_psi_valid [ROWS][COLS], pe_psi_ready [ROWS][COLS];
  logic signed [PSUM_W-1:0] pe_psi_data [ROWS][COLS];
  logic pe_pso_valid [ROWS][COLS], pe_pso_ready [ROWS][COLS];
  logic signed [PSUM_W-1:0] pe_pso_data [ROWS][COLS];
  logic pe_pso_last  [ROWS][COLS];
  logic pe_busy      [ROWS][COLS];
  logic [31:0] pe_mac [ROWS][COLS];
  logic [15:0] pe_askip [ROWS][COLS], pe_wskip [ROWS][COLS];

  // ---------------------------------------------------------- broadcasts
  logic act_all_ready, ld_all_ready;
  always_comb begin
    act_all_ready = 1'b1;
    ld_all_ready  = 1'b1;
    for (int i = 0; i < ROWS; i++) begin
      for (int j = 0; j < COLS; j++) begin
        if (int'(act_data.tag) == i + j)
          act_all_ready = act_all_ready && pe_act_ready[i][j] && pe_off_ready[i][j];
        if (int'(ld_data.tag) == i)
          ld_all_ready = ld_all_ready && pe_ld_ready[i][j];
      end
    end
  end
  assign act_ready = act_all_ready;
  assign ld_ready  = ld_all_ready;

  // ---------------------------------------------------------- PE array
  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      assign pe_act_valid[i][j] = act_valid && act_all_ready && (int'(act_data.tag) == i + j);
      assign pe_ld_valid[i][j]  = ld_valid && ld_all_ready && (int'(ld_data.tag) == i);

      if (i == ROWS - 1) begin : g_bottom
        assign pe_psi_valid[i][j] = 1'b0;
        assign pe_psi_data[i][j]  = '0;
      end else begin : g_chain
        assign pe_psi_valid[i][j]   = pe_pso_valid[i+1][j];
        assign pe_psi_data[i][j]    = pe_pso_data[i+1][j];
        assign pe_pso_ready[i+1][j] = pe_psi_ready[i][j];
      end

      pe #(.REUSE_DEPTH(REUSE_DEPTH), .PSUM_DEPTH(PSUM_DEPTH)) u_pe (
        .clk, .rst_n,
        .cfg_phase, .cfg_psum_len,
        .cfg_use_psum_in(i != ROWS - 1),
        .act_valid(pe_act_valid[i][j]), .act_ready(pe_act_ready[i][j]),
        .act_data(ACT_W'(act_data.data)), .act_last(act_data.last),
        .off_valid(pe_act_valid[i][j]), .off_ready(pe_off_ready[i][j]),
        .off_data(act_data.off),
        .ld_valid(pe_ld_valid[i][j]), .ld_ready(pe_ld_ready[i][j]), .ld_data,
        .psi_valid(pe_psi_valid[i][j]), .psi_ready(pe_psi_ready[i][j]),
        .psi_data(pe_psi_data[i][j]),
        .pso_valid(pe_pso_valid[i][j]), .pso_ready(pe_pso_ready[i][j]),
        .pso_data(pe_pso_data[i][j]), .pso_last(pe_pso_last[i][j]),
        .busy(pe_busy[i][j]), .mac_count(pe_mac[i][j]),
        .act_skip_count(pe_askip[i][j]), .w_skip_count(pe_wskip[i][j]));
    end
  end

  // ---------------------------------------------------------- column drain
  logic [CW-1:0]     col;
  logic [OFF_W-1:0]  e;

  always_comb begin
    out_valid = 1'b0;
    out_data  = '0;
    for (int j = 0; j < COLS; j++) begin
      pe_pso_ready[0][j] = out_ready && (col == CW'(j));
      if (col == CW'(j)) begin
        out_valid     = pe_pso_valid[0][j];
        out_data.data = pe_pso_data[0][j];
        out_data.last = pe_pso_last[0][j] && (j == COLS - 1);
      end
    end
    out_data.tag = TAG_W'(col);
    out_data.off = e;
  end

  logic col_last;
  always_comb begin
    col_last = 1'b0;
    for (int j = 0; j < COLS; j++)
      if (col == CW'(j)) col_last = pe_pso_last[0][j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0;
      e   <= '0;
    end else if (out_valid && out_ready) begin
      if (col_last) begin
        e   <= '0;
        col <= (col == CW'(COLS - 1)) ? '0 : col + 1'b1;
      end else begin
        e <= e + 1'b1;
      end
    end
  end

  // ---------------------------------------------------------- status
  always_comb begin
    busy           = 1'b0;
    mac_count      = '0;
    act_skip_count = '0;
    w_skip_count   = '0;
    for (int i = 0; i < ROWS; i++) begin
      for (int j = 0; j < COLS; j++) begin
        busy           = busy || pe_busy[i][j];
        mac_count      = mac_count + pe_mac[i][j];
        act_skip_count = act_skip_count + 32'(pe_askip[i][j]);
        w_skip_count   = w_skip_count + 32'(pe_wskip[i][j]);
      end
    end
  end

  a_act_tag_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    act_valid |-> int'(act_data.tag) < ROWS + COLS - 1);
  a_ld_tag_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    ld_valid |-> int'(ld_data.tag) < ROWS);
endmodule
