// data_merger: joins the PE's own partial sums with the partial-sum stream
// that enters the PE from below, producing the PSum Output stream.
//
// The PSum Input port passes a 2:1 multiplexer whose other input is 0: with
// use_in low the PE's partial sums leave unchanged (first PE of a column),
// with use_in high each local partial sum is added to the partial sum that
// arrives in the same order from the PE below. The addition is this design's
// reading of "Data Merger"; the architecture names the block only.
// Combinational, valid/ready on all three sides.
module data_merger
  import eg_pkg::*;
(
  input  logic                      use_in,
  input  logic                      loc_valid,
  output logic                      loc_ready,
  input  logic signed [PSUM_W-1:0]  loc_data,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic signed [PSUM_W-1:0]  in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic signed [PSUM_W-1:0]  out_data
);
  logic signed [PSUM_W-1:0] mux_out;

  assign mux_out   = use_in ? in_data : '0;
  assign out_valid = loc_valid && (!use_in || in_valid);
  assign out_data  = loc_data + mux_out;
  assign loc_ready = out_ready && (!use_in || in_valid);
  assign in_ready  = use_in && out_ready && loc_valid;
endmodule
