// fpirm_subarray -- one FPIRM subarray: the top of this design.
//
// A subarray holds N_TILES tiles of W x W racetrack cells on shared (global)
// wordlines.  Tiles 0 .. N_TILES-2 are plain storage (rm_tile); the last tile
// is CIM-augmented (cim_tile): its DBCs have a second access point for the
// transverse read, and a CIM unit, local rowbuffer and predication bits sit
// below it.  A global rowbuffer joins them and faces the host.
//
// The host drives commands (fpirm_pkg::cmd_t) over cmd_valid / cmd_ready.
// A cim_sequencer unrolls Add into per-bit carry-chain steps; every other
// command goes straight to its unit:
//   OP_G_LOAD      global rowbuffer <- cmd.data (1 cycle)
//   OP_TILE_READ   global rowbuffer <- row `row` of DBC `dbc` of tile `tile`
//   OP_TILE_WRITE  that row <- global rowbuffer
//                  (both take |shift| + 2 cycles; cmd_ready stays low while
//                  the DBC shifts -- the stall the host sees)
//   OP_G_FROM_RB   global rowbuffer <- CIM tile local rowbuffer (1 cycle)
//   CIM-tile ops   see cim_tile (1 cycle each), OP_ADD w cycles.
// grb_q, rb_q and pred_q show the two rowbuffers and the predication bits.
//
// The organisation (16 tiles, the last with DBCs, CIM unit, local rowbuffer
// and predication bits, global wordlines and a global rowbuffer) follows the
// paper's subarray figure.  One plain-tile access at a time, a rowbuffer of
// one tile row, and the command set are this design's choices.
module fpirm_subarray
  import fpirm_pkg::*;
#(
  parameter int unsigned W       = ROW_W,
  parameter int unsigned D       = D_DOM,
  parameter int unsigned NDBC    = N_DBC,
  parameter int unsigned NTILES  = N_TILES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  output logic [W-1:0]       grb_q,
  output logic [W-1:0]       rb_q,
  output logic [W/LANE_W-1:0] pred_q
);
  localparam int unsigned NPLAIN = NTILES - 1;

  // ---- sequencer ------------------------------------------------------------
  logic d_valid, d_ready;
  cmd_t d_cmd;

  cim_sequencer u_seq (
    .clk(clk), .rst_n(rst_n),
    .i_valid(cmd_valid), .i_ready(cmd_ready), .i_cmd(cmd),
    .o_valid(d_valid), .o_ready(d_ready), .o_cmd(d_cmd)
  );

  // ---- plain-tile access control -----------------------------------------------
  logic            busy;
  logic [3:0]      busy_tile;
  logic            tile_start;
  logic [NPLAIN-1:0] t_done;
  logic [W-1:0]    t_rdata [NPLAIN];
  logic [NPLAIN-1:0] t_ready;
  logic            any_done;
  logic            busy_we;

  assign d_ready    = !busy;
  assign tile_start = d_valid && d_ready &&
                      (d_cmd.op == OP_TILE_READ || d_cmd.op == OP_TILE_WRITE);
  assign any_done   = |t_done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      busy_tile <= '0;
      busy_we   <= 1'b0;
    end else if (tile_start) begin
      busy      <= 1'b1;
      busy_tile <= d_cmd.tile;
      busy_we   <= (d_cmd.op == OP_TILE_WRITE);
    end else if (any_done) begin
      busy <= 1'b0;
    end
  end

  // global wordlines: the DBC / row address goes to every tile, the request
  // strobe only to the addressed one
  for (genvar t = 0; t < int'(NPLAIN); t++) begin : g_tile
    rm_tile #(.W(W), .D(D), .NDBC(NDBC)) u_tile (
      .clk      (clk),
      .rst_n    (rst_n),
      .req_valid(tile_start && d_cmd.tile == 4'(t)),
      .req_we   (d_cmd.op == OP_TILE_WRITE),
      .req_dbc  (d_cmd.dbc),
      .req_row  (d_cmd.row),
      .wdata    (grb_q),
      .ready    (t_ready[t]),
      .done     (t_done[t]),
      .rdata    (t_rdata[t])
    );
  end

  // ---- CIM tile -------------------------------------------------------------------
  logic [ROW_AW-1:0] cim_pos [NDBC];
  cim_tile #(.W(W), .D(D), .NDBC(NDBC)) u_cim_tile (
    .clk      (clk),
    .rst_n    (rst_n),
    .cmd_valid(d_valid && d_ready && d_cmd.op != OP_TILE_READ &&
               d_cmd.op != OP_TILE_WRITE),
    .cmd      (d_cmd),
    .grb_q    (grb_q),
    .rb_q     (rb_q),
    .pred_q   (pred_q),
    .pos_q    (cim_pos)
  );

  // ---- global rowbuffer -------------------------------------------------------------
  global_rowbuffer #(.W(W)) u_grb (
    .clk    (clk),
    .rst_n  (rst_n),
    .ld_host(d_valid && d_ready && d_cmd.op == OP_G_LOAD),
    .host_d (d_cmd.data),
    .ld_tile(busy && !busy_we && t_done[busy_tile]),
    .tile_d (t_rdata[busy_tile]),
    .ld_rb  (d_valid && d_ready && d_cmd.op == OP_G_FROM_RB),
    .rb_d   (rb_q),
    .q      (grb_q)
  );

  a_tile_index: assert property (@(posedge clk) disable iff (!rst_n)
    tile_start |-> (d_cmd.tile < 4'(NPLAIN) && t_ready[d_cmd.tile]));
endmodule
