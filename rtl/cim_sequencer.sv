// cim_sequencer -- memory-controller side command sequencer of a subarray.
//
// The host sends commands over a valid/ready handshake.  Every command is
// forwarded unchanged to the subarray datapath except OP_ADD, the paper's
// Add(O, w, l): it is unrolled into w OP_ADD_STEP commands at bits l, l+1,
// ..., l+w-1 with the upper bound u = l+w, one per cycle, so that an Add of
// w bits occupies the datapath for exactly w cycles (the carry chain is
// walked once, from the least significant bit up).  The first step leaves in
// the cycle the Add is accepted; the host sees `i_ready` low for the other
// w-1 cycles.  Downstream back-pressure (`o_ready` low, a plain-tile access
// still shifting) stalls both the forwarding and the unrolling.
//
// The paper leaves loop control to the host / memory controller and states
// that Add takes w cycles; the split into a host part and this unroller and
// the handshake are this design's choices.
module cim_sequencer
  import fpirm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic i_valid,
  output logic i_ready,
  input  cmd_t i_cmd,
  output logic o_valid,
  input  logic o_ready,
  output cmd_t o_cmd
);
  logic              in_add;
  cmd_t              add_cmd;
  logic [BIT_AW-1:0] cur;

  function automatic cmd_t step(input cmd_t c, input logic [BIT_AW-1:0] b,
                                input logic [BIT_AW-1:0] u);
    cmd_t s;
    s        = c;
    s.op     = OP_ADD_STEP;
    s.bitpos = b;
    s.width  = u;
    return s;
  endfunction

  always_comb begin
    if (in_add) begin
      o_valid = 1'b1;
      o_cmd   = step(add_cmd, cur, add_cmd.bitpos + add_cmd.width);
      i_ready = 1'b0;
    end else if (i_valid && i_cmd.op == OP_ADD) begin
      o_valid = 1'b1;
      o_cmd   = step(i_cmd, i_cmd.bitpos, i_cmd.bitpos + i_cmd.width);
      i_ready = o_ready;
    end else begin
      o_valid = i_valid;
      o_cmd   = i_cmd;
      i_ready = o_ready;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_add  <= 1'b0;
      add_cmd <= '0;
      cur     <= '0;
    end else if (in_add) begin
      if (o_ready) begin
        if (cur + 1'b1 == add_cmd.bitpos + add_cmd.width) in_add <= 1'b0;
        cur <= cur + 1'b1;
      end
    end else if (i_valid && i_cmd.op == OP_ADD && o_ready && i_cmd.width > 1) begin
      in_add  <= 1'b1;
      add_cmd <= i_cmd;
      cur     <= i_cmd.bitpos + 1'b1;
    end
  end

  a_add_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (i_valid && i_cmd.op == OP_ADD) |-> (i_cmd.width != '0 &&
      i_cmd.bitpos + i_cmd.width <= BIT_AW'(LANE_W)));
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (i_valid && !i_ready) |=> $stable(i_cmd));
endmodule
