// router: one node of the router cluster that links a processing cluster
// (PC) with its global buffer and with the neighbouring PCs.
//
// Five flit ports: LOCAL (the GLB bank or the PE cluster, depending on the
// router's role) and the four mesh directions NORTH, EAST, SOUTH, WEST. The
// router is circuit switched: for every output port a configuration field
// cfg_sel[o] names the input that drives it (RP_NONE leaves it unused). Several
// outputs may name the same input, which multicasts it; an input flit is
// taken only when every output that selects it can accept it, so all copies
// leave together. An input that no output selects is held (ready low), so a
// wrong configuration stalls instead of losing data. Each output has a
// 2-entry FIFO, which registers the mesh links and cuts every combinational
// handshake path between routers. Latency: 1 cycle input to output.
//
// The architecture shows three routers per PC meshed with the neighbouring
// PCs but does not describe their insides; the per-layer configured
// (circuit-switched) routing is this design's choice.
module router
  import eg_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  rport_e cfg_sel   [RPORTS],
  input  logic   in_valid  [RPORTS],
  output logic   in_ready  [RPORTS],
  input  flit_t  in_data   [RPORTS],
  output logic   out_valid [RPORTS],
  input  logic   out_ready [RPORTS],
  output flit_t  out_data  [RPORTS]
);
  logic  f_in_valid [RPORTS];
  logic  f_in_ready [RPORTS];
  flit_t f_in_data  [RPORTS];
  logic  take       [RPORTS];

  // an input is taken when it is selected by at least one output and all
  // outputs selecting it have room
  always_comb begin
    for (int i = 0; i < RPORTS; i++) begin
      logic used, room;
      used = 1'b0;
      room = 1'b1;
      for (int o = 0; o < RPORTS; o++) begin
        if (cfg_sel[o] == rport_e'(i)) begin
          used = 1'b1;
          room = room && f_in_ready[o];
        end
      end
      take[i]     = in_valid[i] && used && room;
      in_ready[i] = used && room;
    end
  end

  always_comb begin
    for (int o = 0; o < RPORTS; o++) begin
      f_in_valid[o] = 1'b0;
      f_in_data[o]  = '0;
      for (int i = 0; i < RPORTS; i++) begin
        if (cfg_sel[o] == rport_e'(i)) begin
          f_in_valid[o] = take[i];
          f_in_data[o]  = in_data[i];
        end
      end
    end
  end

  for (genvar o = 0; o < RPORTS; o++) begin : g_out
    stream_fifo #(.W(FLIT_W), .DEPTH(2)) u_fifo (
      .clk, .rst_n,
      .in_valid(f_in_valid[o]), .in_ready(f_in_ready[o]), .in_data(f_in_data[o]),
      .out_valid(out_valid[o]), .out_ready(out_ready[o]), .out_data(out_data[o]));
  end
endmodule
