// prb: data delivery of one pattern recognition board (PRB).
//
// The board receives the stubs of its share of the trigger tower's detector
// modules on N_IN input links, every bunch crossing.  bx_demux_merge sends the
// stubs of each bunch crossing to the board that owns that crossing in the
// time-multiplexed round robin: its own crossings take the local path, the
// others leave on the N_PRB-1 full-mesh backplane links (tx[j-1] goes to board
// PRB_ID + j mod N_PRB).  Coming the other way, rx[j-1] carries what board
// PRB_ID - j mod N_PRB sends here.  layer_demux_merge merges the local path
// with all received links and sorts the stubs by mezzanine and layer into the
// FIFOs that feed this board's PRMS_PER_PRB mezzanines.
//
// All streams are valid/ready stub words closed per bunch crossing by an
// end-of-event marker (see tt_pkg).  From the paper: the stage order of Fig.
// 11 (bunch-crossing sort, mesh transfer, layer sort, FIFO to the mezzanine),
// ten boards with two mezzanines each, forty input links per board.  Link
// serialization, alignment and unpacking are outside this block: the input
// links carry stub words already.
module prb
  import tt_pkg::*;
#(
  parameter int unsigned N_IN         = 40,
  parameter int unsigned N_PRB        = 10,
  parameter int unsigned PRMS_PER_PRB = 2,
  parameter int unsigned TMUX         = 20,
  parameter int unsigned PRB_ID       = 0
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic       [N_IN-1:0]      in_valid,
  output logic       [N_IN-1:0]      in_ready,
  input  stub_word_t [N_IN-1:0]      in_data,
  output logic       [N_PRB-2:0]     tx_valid,
  input  logic       [N_PRB-2:0]     tx_ready,
  output stub_word_t [N_PRB-2:0]     tx_data,
  input  logic       [N_PRB-2:0]     rx_valid,
  output logic       [N_PRB-2:0]     rx_ready,
  input  stub_word_t [N_PRB-2:0]     rx_data,
  output logic       [PRMS_PER_PRB-1:0][N_LAYERS-1:0] prm_valid,
  input  logic       [PRMS_PER_PRB-1:0][N_LAYERS-1:0] prm_ready,
  output stub_word_t [PRMS_PER_PRB-1:0][N_LAYERS-1:0] prm_data
);
  logic       [N_PRB-1:0] dm_v, dm_r, lm_v, lm_r;
  stub_word_t [N_PRB-1:0] dm_d, lm_d;

  bx_demux_merge #(
    .N_IN(N_IN), .N_PRB(N_PRB), .PRMS_PER_PRB(PRMS_PER_PRB), .TMUX(TMUX), .PRB_ID(PRB_ID)
  ) u_bx (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(dm_v), .out_ready(dm_r), .out_data(dm_d));

  // port 0: local path; ports 1.. : backplane
  assign lm_v[0] = dm_v[0];
  assign lm_d[0] = dm_d[0];
  assign dm_r[0] = lm_r[0];
  for (genvar j = 1; j < N_PRB; j++) begin : g_mesh
    assign tx_valid[j-1] = dm_v[j];
    assign tx_data [j-1] = dm_d[j];
    assign dm_r[j]       = tx_ready[j-1];
    assign lm_v[j]       = rx_valid[j-1];
    assign lm_d[j]       = rx_data[j-1];
    assign rx_ready[j-1] = lm_r[j];
  end

  layer_demux_merge #(
    .N_SRC(N_PRB), .PRMS_PER_PRB(PRMS_PER_PRB), .TMUX(TMUX)
  ) u_layer (
    .clk, .rst_n, .in_valid(lm_v), .in_ready(lm_r), .in_data(lm_d),
    .out_valid(prm_valid), .out_ready(prm_ready), .out_data(prm_data));
endmodule
