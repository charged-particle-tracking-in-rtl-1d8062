// bx_demux_merge: bunch-crossing sorter and full-mesh router of one PRB.
//
// Stubs enter on N_IN input links (one stream per fiber, after alignment and
// unpacking), each stream ordered by bunch crossing (BX) and closing every BX
// with an end-of-event marker.  The tower processes events in a time-
// multiplexed round robin over N_PRB * PRMS_PER_PRB mezzanines, so the BX
// number alone names the board that owns the event:
//     slot  = bx mod TMUX,   board = slot / PRMS_PER_PRB.
// Each stub is routed to the output port of that board.  The output ports are
// rotated by this board's own slot index (the "rotator"): port 0 is this board
// itself (the local path to the layer sorter) and port j > 0 is the full-mesh
// backplane link to board (PRB_ID + j) mod N_PRB.  Each port merges the stubs
// of all input links bound to it, round robin among the links; an end-of-event
// marker is forwarded once, when every input link shows the marker of the same
// BX at its head, so each output still carries whole, ordered events.
//
// Every input link has a FIFO (FIFO_DEPTH).  Outputs are valid/ready and are
// driven combinationally from the FIFO heads, so a stub can leave the cycle
// after it is written.  Each port moves one word per cycle.
//
// From the paper: the round-robin time multiplexing (factor 20 = 10 boards x
// 2 mezzanines), routing to the owning board over the mesh, the names of
// the stages.  This design's own: the marker protocol, the slot formula, the
// link arbitration and the FIFO depth.
module bx_demux_merge
  import tt_pkg::*;
#(
  parameter int unsigned N_IN         = 40,
  parameter int unsigned N_PRB        = 10,
  parameter int unsigned PRMS_PER_PRB = 2,
  parameter int unsigned TMUX         = 20,
  parameter int unsigned PRB_ID       = 0,
  parameter int unsigned FIFO_DEPTH   = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic       [N_IN-1:0]   in_valid,
  output logic       [N_IN-1:0]   in_ready,
  input  stub_word_t [N_IN-1:0]   in_data,
  output logic       [N_PRB-1:0]  out_valid,
  input  logic       [N_PRB-1:0]  out_ready,
  output stub_word_t [N_PRB-1:0]  out_data
);
  localparam int PW = $clog2(N_PRB > 1 ? N_PRB : 2);
  localparam int IW = $clog2(N_IN > 1 ? N_IN : 2);

  logic       [N_IN-1:0] hv, hpop;
  stub_word_t [N_IN-1:0] hd;
  logic [N_IN-1:0][PW-1:0] hport;

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    sync_fifo #(.T(stub_word_t), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_data[i]),
      .out_valid(hv[i]), .out_ready(hpop[i]), .out_data(hd[i]), .count());
    // Rotator: absolute owning board -> port relative to this board.
    always_comb begin
      int unsigned board;
      board    = (int'(hd[i].bx) % TMUX) / PRMS_PER_PRB;
      hport[i] = PW'((board + N_PRB - PRB_ID) % N_PRB);
    end
  end

  logic [N_PRB-1:0][N_IN-1:0] pop_by_port;

  for (genvar p = 0; p < N_PRB; p++) begin : g_port
    logic [N_IN-1:0] stub_req, mark_req;
    logic            any_stub;
    logic [IW-1:0]   sel;
    logic            all_mark;

    always_comb begin
      for (int i = 0; i < int'(N_IN); i++) begin
        stub_req[i] = hv[i] && !hd[i].eoe && (hport[i] == PW'(p));
        mark_req[i] = hv[i] &&  hd[i].eoe && (hport[i] == PW'(p));
      end
    end
    assign all_mark = &mark_req;

    rr_pick #(.N(N_IN)) u_rr (
      .clk, .rst_n, .req(stub_req), .advance(out_ready[p]),
      .any(any_stub), .sel(sel));

    always_comb begin
      out_valid[p]   = any_stub || all_mark;
      out_data[p]    = any_stub ? hd[sel] : hd[0];
      pop_by_port[p] = '0;
      if (out_ready[p]) begin
        if (any_stub)      pop_by_port[p][sel] = 1'b1;
        else if (all_mark) pop_by_port[p]      = '1;
      end
    end
  end

  always_comb begin
    hpop = '0;
    for (int p = 0; p < int'(N_PRB); p++) hpop |= pop_by_port[p];
  end

  // Every head belongs to exactly one port, so no FIFO is popped twice.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < int'(N_PRB); p++)
        for (int q = p + 1; q < int'(N_PRB); q++)
          assert ((pop_by_port[p] & pop_by_port[q]) == '0)
            else $error("bx_demux_merge: input popped by two ports");
    end
  end
endmodule
