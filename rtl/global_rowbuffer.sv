// global_rowbuffer -- the global rowbuffer of a subarray.
//
// A W-bit register shared by all tiles of the subarray.  It is loaded from
// one of three places: the host (external write data), a plain tile that has
// finished a read, or the local rowbuffer of the CIM tile.  It is the path
// over which rows move between plain tiles, the CIM tile and the outside.
// The paper only names this buffer; its width (one tile row) and the
// one-source-per-cycle loading are this design's choices.  A load takes
// effect at the next clock edge; the register is cleared on reset.
module global_rowbuffer
  import fpirm_pkg::*;
#(
  parameter int unsigned W = ROW_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         ld_host,
  input  logic [W-1:0] host_d,
  input  logic         ld_tile,
  input  logic [W-1:0] tile_d,
  input  logic         ld_rb,
  input  logic [W-1:0] rb_d,
  output logic [W-1:0] q
);
  always_ff @(posedge clk) begin
    if (!rst_n)       q <= '0;
    else if (ld_host) q <= host_d;
    else if (ld_tile) q <= tile_d;
    else if (ld_rb)   q <= rb_d;
  end

  a_one_source: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({ld_host, ld_tile, ld_rb}));
endmodule
