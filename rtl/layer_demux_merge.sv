// layer_demux_merge: receive side of a PRB; sorts stubs by mezzanine and layer.
//
// Inputs are the N_SRC streams that carry this board's events: the local path
// from its own bunch-crossing sorter (port 0) and the backplane links from the
// other boards of the full mesh.  Each stub goes to the mezzanine (PRM) that
// owns its bunch crossing, prm = (bx mod TMUX) mod PRMS_PER_PRB, and within it
// to the stream of its detector layer.  Every (PRM, layer) output has its own
// FIFO (OUT_DEPTH deep; the "FIFO" between the board and the mezzanine link)
// and its own round-robin arbiter over the inputs, so up to
// PRMS_PER_PRB * N_LAYERS stubs move per cycle.  End-of-event markers are
// merged as a barrier: when every input shows the marker of the same BX and
// all layer FIFOs of the owning PRM have room, one marker is written into each
// of those N_LAYERS FIFOs and every input is popped.
//
// Each input also has a small FIFO (IN_DEPTH).  From the paper: sorting by
// layer after the backplane, FIFOs towards the PRM, two PRMs per board.  This
// design's own: the slot formula, the marker protocol, arbitration and depths.
module layer_demux_merge
  import tt_pkg::*;
#(
  parameter int unsigned N_SRC        = 10,
  parameter int unsigned PRMS_PER_PRB = 2,
  parameter int unsigned TMUX         = 20,
  parameter int unsigned IN_DEPTH     = 4,
  parameter int unsigned OUT_DEPTH    = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic       [N_SRC-1:0]  in_valid,
  output logic       [N_SRC-1:0]  in_ready,
  input  stub_word_t [N_SRC-1:0]  in_data,
  output logic       [PRMS_PER_PRB-1:0][N_LAYERS-1:0] out_valid,
  input  logic       [PRMS_PER_PRB-1:0][N_LAYERS-1:0] out_ready,
  output stub_word_t [PRMS_PER_PRB-1:0][N_LAYERS-1:0] out_data
);
  localparam int NO = PRMS_PER_PRB * N_LAYERS;
  localparam int SW = $clog2(N_SRC > 1 ? N_SRC : 2);
  localparam int OW = $clog2(NO > 1 ? NO : 2);

  logic       [N_SRC-1:0]           hv, hpop;
  stub_word_t [N_SRC-1:0]           hd;
  logic       [N_SRC-1:0][OW-1:0]   hout;
  int unsigned                      hprm [N_SRC];

  for (genvar i = 0; i < N_SRC; i++) begin : g_in
    sync_fifo #(.T(stub_word_t), .DEPTH(IN_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_data[i]),
      .out_valid(hv[i]), .out_ready(hpop[i]), .out_data(hd[i]), .count());
    always_comb begin
      hprm[i]     = (int'(hd[i].bx) % TMUX) % PRMS_PER_PRB;
      hout[i]     = OW'(hprm[i] * N_LAYERS + int'(hd[i].stub.layer));
    end
  end

  // Output FIFOs
  logic       [NO-1:0] f_wr, f_rdy, f_v;
  stub_word_t [NO-1:0] f_wd, f_rd;
  for (genvar o = 0; o < NO; o++) begin : g_out
    sync_fifo #(.T(stub_word_t), .DEPTH(OUT_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(f_wr[o]), .in_ready(f_rdy[o]), .in_data(f_wd[o]),
      .out_valid(f_v[o]), .out_ready(out_ready[o / N_LAYERS][o % N_LAYERS]),
      .out_data(f_rd[o]), .count());
    assign out_valid[o / N_LAYERS][o % N_LAYERS] = f_v[o];
    assign out_data [o / N_LAYERS][o % N_LAYERS] = f_rd[o];
  end

  // Marker barrier
  logic mark_all, mark_room, mark_go;
  int unsigned mark_prm;
  always_comb begin
    mark_all = 1'b1;
    for (int i = 0; i < int'(N_SRC); i++)
      mark_all &= hv[i] && hd[i].eoe;
    mark_prm  = hprm[0];
    mark_room = 1'b1;
    for (int l = 0; l < N_LAYERS; l++)
      mark_room &= f_rdy[mark_prm * N_LAYERS + l];
    mark_go = mark_all && mark_room;
  end

  // Stub arbitration, one arbiter per output
  logic [NO-1:0][N_SRC-1:0] pop_by_out;
  for (genvar o = 0; o < NO; o++) begin : g_arb
    logic [N_SRC-1:0] req;
    logic             any;
    logic [SW-1:0]    sel;
    always_comb
      for (int i = 0; i < int'(N_SRC); i++)
        req[i] = hv[i] && !hd[i].eoe && (hout[i] == OW'(o));
    rr_pick #(.N(N_SRC)) u_rr (
      .clk, .rst_n, .req(req), .advance(f_rdy[o]), .any(any), .sel(sel));
    always_comb begin
      pop_by_out[o] = '0;
      if (any && f_rdy[o]) pop_by_out[o][sel] = 1'b1;
      if (mark_go && (o / N_LAYERS) == int'(mark_prm)) begin
        f_wr[o] = 1'b1;
        f_wd[o] = hd[0];
      end else begin
        f_wr[o] = any && f_rdy[o];
        f_wd[o] = hd[sel];
      end
    end
  end

  always_comb begin
    hpop = mark_go ? '1 : '0;
    for (int o = 0; o < NO; o++) hpop |= pop_by_out[o];
  end

  // All inputs close the same bunch crossing together.
  always_ff @(posedge clk) begin
    if (rst_n && mark_go)
      for (int i = 1; i < int'(N_SRC); i++)
        assert (hd[i].bx == hd[0].bx)
          else $error("layer_demux_merge: end-of-event markers of different BX");
  end
endmodule
