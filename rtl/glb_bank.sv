// glb_bank: one bank of a PC's global buffer (GLB) cluster. It stages data
// between the external DRAM and the PE cluster: rows fetched from DRAM wait
// here to be streamed into the PEs, and results wait here to be pushed back.
//
// Storage is DEPTH flits. DRAM side: ext_we writes one flit at ext_waddr;
// ext_rdata returns the flit at ext_raddr one cycle later. Array side:
// rd_start launches a stream of rd_len flits from address rd_base on out_*
// (one flit per cycle while out_ready); wr_start sets the write pointer to
// wr_base, after which every flit accepted on in_* is stored at the pointer,
// which then advances; wr_count tells how many were stored since wr_start.
// rd_busy is high while a stream is being sent. The bank size and the
// start/length control are this design's choices: the architecture shows
// the GLB cluster but gives neither its capacity nor its control.
module glb_bank
  import eg_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // DRAM side
  input  logic                     ext_we,
  input  logic [$clog2(DEPTH)-1:0] ext_waddr,
  input  flit_t                    ext_wdata,
  input  logic [$clog2(DEPTH)-1:0] ext_raddr,
  output flit_t                    ext_rdata,
  // stream to the array
  input  logic                     rd_start,
  input  logic [$clog2(DEPTH)-1:0] rd_base,
  input  logic [$clog2(DEPTH):0]   rd_len,
  output logic                     rd_busy,
  output logic                     out_valid,
  input  logic                     out_ready,
  output flit_t                    out_data,
  // stream from the array
  input  logic                     wr_start,
  input  logic [$clog2(DEPTH)-1:0] wr_base,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  flit_t                    in_data,
  output logic [$clog2(DEPTH):0]   wr_count
);
  localparam int unsigned AW = $clog2(DEPTH);

  flit_t         mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   rd_left;

  assign rd_busy   = (rd_left != '0);
  assign out_valid = rd_busy;
  assign out_data  = mem[rd_ptr];
  assign in_ready  = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr   <= '0;
      rd_left  <= '0;
      wr_ptr   <= '0;
      wr_count <= '0;
    end else begin
      if (rd_start) begin
        rd_ptr  <= rd_base;
        rd_left <= rd_len;
      end else if (out_valid && out_ready) begin
        rd_ptr  <= rd_ptr + 1'b1;
        rd_left <= rd_left - 1'b1;
      end
      if (wr_start) begin
        wr_ptr   <= wr_base;
        wr_count <= '0;
      end else if (in_valid) begin
        wr_ptr   <= wr_ptr + 1'b1;
        wr_count <= wr_count + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ext_we)
      mem[ext_waddr] <= ext_wdata;
    else if (in_valid && !wr_start)
      mem[wr_ptr] <= in_data;
    ext_rdata <= mem[ext_raddr];
  end
endmodule
