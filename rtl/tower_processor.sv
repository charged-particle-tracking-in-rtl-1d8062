// tower_processor: track-finding processor of one trigger tower.
//
// N_PRB pattern recognition boards are joined in a full mesh: every board
// has a direct backplane lane to every other board.  Each board receives the
// stubs of part of the tower's detector modules on N_IN input links for every
// bunch crossing.  Bunch crossings are assigned round robin to the
// N_PRB * PRMS_PER_PRB mezzanines (slot = bx mod TMUX, board = slot /
// PRMS_PER_PRB, mezzanine = slot mod PRMS_PER_PRB), so each mezzanine sees a
// new event every TMUX crossings and has that long, on average, to process it.
// Every board forwards each crossing's stubs over the mesh to the owning
// board, which gathers them from all boards, sorts them by layer and hands
// the event to the owning mezzanine.  The mezzanine finds roads with its
// associative memory, fits every stub combination of every road and removes
// duplicate tracks.
//
// Ports: the input links of all boards (valid/ready stub words, each link
// closing every crossing with an end-of-event marker), configuration ports
// broadcast to every mezzanine (pattern bank, coordinate tables, fit
// constants; all mezzanines hold the same tower's constants), and per
// mezzanine a track stream and an end-of-event strobe with counts.  The
// backplane lanes are modelled by mesh_link (fixed LATENCY, flow control).
//
// From the paper: ten boards, two mezzanines each, time-multiplexing factor
// 20, full mesh, forty input links per board, the mezzanine's stage chain.
// The stream format, the slot formula and the flow control are this design's
// own.
module tower_processor
  import tt_pkg::*;
#(
  parameter int unsigned N_PRB        = 10,
  parameter int unsigned PRMS_PER_PRB = 2,
  parameter int unsigned TMUX         = 20,
  parameter int unsigned N_IN         = 40,
  parameter int unsigned LINK_LAT     = 4,
  parameter int unsigned NPAT         = 1024,
  parameter int unsigned MAX_ROADS    = 200,
  parameter int unsigned N_TF         = 4
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // input links
  input  logic       [N_PRB-1:0][N_IN-1:0]  in_valid,
  output logic       [N_PRB-1:0][N_IN-1:0]  in_ready,
  input  stub_word_t [N_PRB-1:0][N_IN-1:0]  in_data,
  // configuration, broadcast to every mezzanine
  input  logic                              bank_we,
  input  logic [ROAD_W-1:0]                 bank_addr,
  input  logic [LAYER_W-1:0]                bank_layer,
  input  logic [SSID_W-1:0]                 bank_ssid,
  input  logic                              lut_we,
  input  logic                              pitch_we,
  input  logic [LAYER_W-1:0]                lut_layer,
  input  logic [MOD_W-1:0]                  lut_module,
  input  logic signed [COORD_W-1:0]         lut_phi0,
  input  logic signed [COORD_W-1:0]         lut_z0,
  input  logic signed [COORD_W-1:0]         pitch_phi,
  input  logic signed [COORD_W-1:0]         pitch_z,
  input  logic                              coef_we,
  input  logic [2:0]                        coef_ctype,
  input  logic [3:0]                        coef_row,
  input  logic [3:0]                        coef_col,
  input  logic signed [COEF_W-1:0]          coef_val,
  input  logic [CHI_W-1:0]                  chi2_cut,
  // tracks, one stream per mezzanine (index board * PRMS_PER_PRB + mezzanine)
  output logic   [N_PRB*PRMS_PER_PRB-1:0]             trk_valid,
  input  logic   [N_PRB*PRMS_PER_PRB-1:0]             trk_ready,
  output track_t [N_PRB*PRMS_PER_PRB-1:0]             trk_data,
  output logic   [N_PRB*PRMS_PER_PRB-1:0][BX_W-1:0]   trk_bx,
  output logic   [N_PRB*PRMS_PER_PRB-1:0]             evt_done,
  output logic   [N_PRB*PRMS_PER_PRB-1:0][BX_W-1:0]   evt_bx,
  output logic   [N_PRB*PRMS_PER_PRB-1:0][15:0]       n_roads,
  output logic   [N_PRB*PRMS_PER_PRB-1:0][15:0]       n_roads_dropped,
  output logic   [N_PRB*PRMS_PER_PRB-1:0][15:0]       n_combos,
  output logic   [N_PRB*PRMS_PER_PRB-1:0][15:0]       n_fits_passed,
  output logic   [N_PRB*PRMS_PER_PRB-1:0][15:0]       n_dup_removed,
  output logic   [N_PRB*PRMS_PER_PRB-1:0][15:0]       n_stub_overflow,
  output logic   [N_PRB*PRMS_PER_PRB-1:0][15:0]       n_trk_overflow
);
  logic       [N_PRB-1:0][N_PRB-2:0] tx_v, tx_r, rx_v, rx_r;
  stub_word_t [N_PRB-1:0][N_PRB-2:0] tx_d, rx_d;

  for (genvar b = 0; b < N_PRB; b++) begin : g_prb
    logic       [PRMS_PER_PRB-1:0][N_LAYERS-1:0] pv, pr;
    stub_word_t [PRMS_PER_PRB-1:0][N_LAYERS-1:0] pd;

    prb #(.N_IN(N_IN), .N_PRB(N_PRB), .PRMS_PER_PRB(PRMS_PER_PRB), .TMUX(TMUX), .PRB_ID(b)) u_prb (
      .clk, .rst_n,
      .in_valid(in_valid[b]), .in_ready(in_ready[b]), .in_data(in_data[b]),
      .tx_valid(tx_v[b]), .tx_ready(tx_r[b]), .tx_data(tx_d[b]),
      .rx_valid(rx_v[b]), .rx_ready(rx_r[b]), .rx_data(rx_d[b]),
      .prm_valid(pv), .prm_ready(pr), .prm_data(pd));

    // Full mesh: lane j-1 of board b goes to board (b + j) mod N_PRB, where it
    // arrives on receive lane j-1.
    for (genvar j = 1; j < N_PRB; j++) begin : g_lane
      localparam int unsigned DST = (b + j) % N_PRB;
      mesh_link #(.LATENCY(LINK_LAT)) u_link (
        .clk, .rst_n,
        .in_valid(tx_v[b][j-1]), .in_ready(tx_r[b][j-1]), .in_data(tx_d[b][j-1]),
        .out_valid(rx_v[DST][j-1]), .out_ready(rx_r[DST][j-1]), .out_data(rx_d[DST][j-1]));
    end

    for (genvar m = 0; m < PRMS_PER_PRB; m++) begin : g_prm
      localparam int unsigned K = b * PRMS_PER_PRB + m;
      prm #(.NPAT(NPAT), .MAX_ROADS(MAX_ROADS), .N_TF(N_TF)) u_prm (
        .clk, .rst_n,
        .bank_we, .bank_addr, .bank_layer, .bank_ssid,
        .lut_we, .pitch_we, .lut_layer, .lut_module, .lut_phi0, .lut_z0, .pitch_phi, .pitch_z,
        .coef_we, .coef_ctype, .coef_row, .coef_col, .coef_val, .chi2_cut,
        .in_valid(pv[m]), .in_ready(pr[m]), .in_data(pd[m]),
        .trk_valid(trk_valid[K]), .trk_ready(trk_ready[K]), .trk_data(trk_data[K]),
        .trk_bx(trk_bx[K]), .evt_done(evt_done[K]), .evt_bx(evt_bx[K]),
        .n_roads(n_roads[K]), .n_roads_dropped(n_roads_dropped[K]), .n_combos(n_combos[K]),
        .n_fits_passed(n_fits_passed[K]), .n_dup_removed(n_dup_removed[K]),
        .n_stub_overflow(n_stub_overflow[K]), .n_trk_overflow(n_trk_overflow[K]));
    end
  end
endmodule
