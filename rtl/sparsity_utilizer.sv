// sparsity_utilizer: zero-skipping stage in front of a PE operand port.
//
// Every operand reaches the PE as a (value, index) pair. An element whose
// value is zero contributes nothing to any multiply-accumulate, so this
// stage consumes it without passing it on and the MAC datapath never spends
// a cycle on it. An element marked `last` is always forwarded, with `zero`
// set when its value is zero, so that the end of a row still reaches the PE
// control. This is how the PE profits from ReLU sparsity in activations and
// from the zeros that stochastic gradient pruning creates.
//
// Purely combinational handshake: out_valid = in_valid && (nonzero || last);
// a dropped element is accepted in the cycle it is presented. skip_count
// counts dropped elements (saturating). The architecture names this block
// but does not describe its insides; dropping zeros is this design's choice.
module sparsity_utilizer #(
  parameter int unsigned W  = 8,
  parameter int unsigned IW = 8,
  parameter int unsigned CW = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [W-1:0]  in_value,
  input  logic [IW-1:0]        in_index,
  input  logic                 in_last,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic signed [W-1:0]  out_value,
  output logic [IW-1:0]        out_index,
  output logic                 out_last,
  output logic                 out_zero,
  output logic [CW-1:0]        skip_count
);
  wire nonzero = (in_value != '0);
  wire pass    = nonzero || in_last;

  assign out_valid = in_valid && pass;
  assign in_ready  = pass ? out_ready : 1'b1;
  assign out_value = in_value;
  assign out_index = in_index;
  assign out_last  = in_last;
  assign out_zero  = !nonzero;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      skip_count <= '0;
    else if (in_valid && !pass && skip_count != '1)
      skip_count <= skip_count + 1'b1;
  end
endmodule
