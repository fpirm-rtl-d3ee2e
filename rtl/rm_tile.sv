// rm_tile -- a plain racetrack tile (tiles 0 .. N-2 of a subarray).
//
// N_DBC domain-block clusters of W nanowires with a single access point each
// (16 DBCs x 32 data domains = a 512 x 512 tile).  The peripheral circuit
// takes one row request at a time: it stores the DBC and domain index, shifts
// the addressed DBC one domain per cycle until the wanted domain sits under
// AP0, and then reads or writes the whole row in one more cycle.  `ready` is
// low while a request is in flight; `done` pulses for one cycle when it has
// finished, with `rdata` valid from then on for a read.  A request therefore
// takes |pos - row| + 1 cycles after it is accepted, pos being where the DBC
// was left by its previous access.
//
// Shift-to-align before access is the paper's; the one-domain-per-cycle shift,
// the request/done handshake and leaving the DBC where it was last aligned
// (no shift back) are this design's choices.
module rm_tile
  import fpirm_pkg::*;
#(
  parameter int unsigned W    = ROW_W,
  parameter int unsigned D    = D_DOM,
  parameter int unsigned NDBC = N_DBC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  input  logic              req_we,
  input  logic [3:0]        req_dbc,
  input  logic [ROW_AW-1:0] req_row,
  input  logic [W-1:0]      wdata,
  output logic              ready,
  output logic              done,
  output logic [W-1:0]      rdata
);
  typedef enum logic [0:0] {S_IDLE, S_ALIGN} state_e;
  state_e state;

  logic              we_q;
  logic [3:0]        dbc_q;
  logic [ROW_AW-1:0] row_q;
  logic [W-1:0]      wdata_q;

  logic [ROW_AW-1:0] pos [NDBC];
  logic [W-1:0]      ap0_q [NDBC];
  logic [W-1:0]      unused_ap1 [NDBC];
  logic [CNT_W-1:0]  unused_lvl [NDBC][W];
  logic              aligned, shift_en, shift_dir, access;

  assign aligned   = (pos[dbc_q] == row_q);
  assign shift_en  = (state == S_ALIGN) && !aligned;
  assign shift_dir = (row_q > pos[dbc_q]);
  assign access    = (state == S_ALIGN) && aligned;
  assign ready     = (state == S_IDLE);

  for (genvar g = 0; g < int'(NDBC); g++) begin : g_dbc
    logic sel;
    assign sel = (dbc_q == 4'(g));
    dbc #(.W(W), .D(D), .TRDIST(TRD), .TWO_AP(1'b0)) u_dbc (
      .clk      (clk),
      .rst_n    (rst_n),
      .shift_en (sel && shift_en),
      .shift_dir(shift_dir),
      .pos      (pos[g]),
      .ap0_q    (ap0_q[g]),
      .ap1_q    (unused_ap1[g]),
      .level    (unused_lvl[g]),
      .ap0_we   ((sel && access && we_q) ? {W{1'b1}} : {W{1'b0}}),
      .ap0_d    (wdata_q),
      .ap1_we   ('0),
      .ap1_d    ('0)
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      we_q    <= 1'b0;
      dbc_q   <= '0;
      row_q   <= '0;
      wdata_q <= '0;
      rdata   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          we_q    <= req_we;
          dbc_q   <= req_dbc;
          row_q   <= req_row;
          wdata_q <= wdata;
          state   <= S_ALIGN;
        end
        S_ALIGN: if (aligned) begin
          if (!we_q) rdata <= ap0_q[dbc_q];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_row_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && ready) |-> (int'(req_row) < int'(D) && int'(req_dbc) < int'(NDBC)));
endmodule
