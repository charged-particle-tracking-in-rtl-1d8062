// prm: pattern recognition mezzanine, the engine that reconstructs one event.
//
// A mezzanine receives the stubs of the events it owns on six layer streams
// (one per detector layer, each closing an event with an end-of-event
// marker) and processes one event at a time in four phases:
//   LOAD   every layer stream gives at most one stub per cycle.  Each stub is
//          converted to its superstrip id (local_to_ssid, one cycle), stored
//          in the data organizer, and broadcast to the associative memory.
//          When all six streams show the marker, the event is complete.
//   READ   the associative memory lists its roads, one per cycle.  Each road
//          flows, one per cycle, through road_to_ssid (its superstrips),
//          the data organizer (its stubs), local_to_global (global
//          coordinates) and is dealt round robin to one of N_TF lanes, each a
//          combination builder feeding a track fitter.  The fitted tracks of
//          the lanes are merged round robin into duplicate removal.  READ ends
//          when the memory is done and every stage is empty.
//   FLUSH  duplicate removal sends out the surviving tracks.
//   CLEAR  one cycle: the memory's hit flags and the organizer are emptied;
//          evt_done pulses with the event's BX.
// Stubs of the next event wait in the layer streams (their FIFOs live on the
// PRB) until LOAD comes back.
//
// Configuration ports load the pattern bank (memory and its road_to_ssid
// copy), the coordinate tables and the fit constants (broadcast to all
// lanes).  From the paper: the order of the stages and the four fitting
// lanes (Fig. 11 and the text on the demonstrator).  The phase-by-phase event
// handling and the interfaces are this design's own; the paper's firmware
// overlaps consecutive events.  The paper's "stub removal" stage (Fig. 11)
// is not modelled, as the paper gives no function for it.
module prm
  import tt_pkg::*;
#(
  parameter int unsigned NPAT      = 1024,
  parameter int unsigned THRESH    = 5,
  parameter int unsigned MAX_ROADS = 200,
  parameter int unsigned DO_DEPTH  = 64,
  parameter int unsigned N_TF      = 4,
  parameter int unsigned MAX_TRK   = 32,
  parameter int unsigned N_SHARED  = 3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration
  input  logic                        bank_we,
  input  logic [ROAD_W-1:0]           bank_addr,
  input  logic [LAYER_W-1:0]          bank_layer,
  input  logic [SSID_W-1:0]           bank_ssid,
  input  logic                        lut_we,
  input  logic                        pitch_we,
  input  logic [LAYER_W-1:0]          lut_layer,
  input  logic [MOD_W-1:0]            lut_module,
  input  logic signed [COORD_W-1:0]   lut_phi0,
  input  logic signed [COORD_W-1:0]   lut_z0,
  input  logic signed [COORD_W-1:0]   pitch_phi,
  input  logic signed [COORD_W-1:0]   pitch_z,
  input  logic                        coef_we,
  input  logic [2:0]                  coef_ctype,
  input  logic [3:0]                  coef_row,
  input  logic [3:0]                  coef_col,
  input  logic signed [COEF_W-1:0]    coef_val,
  input  logic [CHI_W-1:0]            chi2_cut,
  // stubs, one stream per layer
  input  logic       [N_LAYERS-1:0]   in_valid,
  output logic       [N_LAYERS-1:0]   in_ready,
  input  stub_word_t [N_LAYERS-1:0]   in_data,
  // tracks
  output logic                        trk_valid,
  input  logic                        trk_ready,
  output track_t                      trk_data,
  output logic [BX_W-1:0]             trk_bx,
  output logic                        evt_done,
  output logic [BX_W-1:0]             evt_bx,
  // per-event counts, valid with evt_done
  output logic [15:0]                 n_roads,
  output logic [15:0]                 n_roads_dropped,
  output logic [15:0]                 n_combos,
  output logic [15:0]                 n_fits_passed,
  output logic [15:0]                 n_dup_removed,   // since reset
  output logic [15:0]                 n_stub_overflow,
  output logic [15:0]                 n_trk_overflow   // since reset
);
  typedef enum logic [1:0] {S_LOAD, S_READ, S_FLUSH, S_CLEAR} state_t;
  state_t state;
  logic   started;
  logic [BX_W-1:0] bx_q;

  // ---------------- LOAD: stubs in ----------------
  logic [N_LAYERS-1:0] is_mark, take_stub;
  logic                all_mark;
  always_comb begin
    for (int l = 0; l < N_LAYERS; l++) begin
      is_mark[l]   = in_valid[l] && in_data[l].eoe;
      take_stub[l] = (state == S_LOAD) && in_valid[l] && !in_data[l].eoe;
    end
    all_mark = (state == S_LOAD) && (&is_mark);
    for (int l = 0; l < N_LAYERS; l++)
      in_ready[l] = take_stub[l] || all_mark;
  end

  logic [N_LAYERS-1:0]             ss_v;
  logic [N_LAYERS-1:0][SSID_W-1:0] ss_id;
  stub_t [N_LAYERS-1:0]            ss_stub;
  for (genvar l = 0; l < N_LAYERS; l++) begin : g_l2s
    local_to_ssid u_l2s (
      .clk, .rst_n, .in_valid(take_stub[l]), .in_stub(in_data[l].stub),
      .out_valid(ss_v[l]), .out_ssid(ss_id[l]), .out_stub(ss_stub[l]));
  end

  // ---------------- associative memory ----------------
  logic am_clear, am_start, am_rv, am_rr, am_done;
  logic [ROAD_W-1:0] am_road;
  logic [15:0] am_nroads, am_ndrop;
  assign am_clear = (state == S_CLEAR);
  assign am_start = (state == S_READ) && !started;

  am_pram #(.NPAT(NPAT), .THRESH(THRESH), .MAX_ROADS(MAX_ROADS)) u_am (
    .clk, .rst_n, .bank_we, .bank_addr, .bank_layer, .bank_ssid,
    .ss_valid(ss_v), .ss(ss_id), .clear(am_clear), .start(am_start),
    .road_valid(am_rv), .road_ready(am_rr), .road(am_road), .done(am_done),
    .n_roads(am_nroads), .n_dropped(am_ndrop));

  // ---------------- road -> superstrips ----------------
  logic r2s_v, r2s_r;
  logic [ROAD_W-1:0] r2s_road;
  logic [N_LAYERS-1:0][SSID_W-1:0] r2s_ssid;
  road_to_ssid #(.NPAT(NPAT)) u_r2s (
    .clk, .rst_n, .bank_we, .bank_addr, .bank_layer, .bank_ssid,
    .in_valid(am_rv), .in_ready(am_rr), .in_road(am_road),
    .out_valid(r2s_v), .out_ready(r2s_r), .out_road(r2s_road), .out_ssid(r2s_ssid));

  // ---------------- data organizer ----------------
  logic do_v, do_r;
  road_local_t do_road;
  logic [15:0] do_ovf;
  data_organizer #(.DEPTH(DO_DEPTH)) u_do (
    .clk, .rst_n, .clear(am_clear),
    .wr_valid(ss_v), .wr_ssid(ss_id), .wr_stub(ss_stub),
    .rd_valid(r2s_v), .rd_ready(r2s_r), .rd_road(r2s_road), .rd_ssid(r2s_ssid),
    .out_valid(do_v), .out_ready(do_r), .out_road(do_road), .n_overflow(do_ovf));

  // ---------------- local -> global ----------------
  logic g_v, g_r;
  road_global_t g_road;
  local_to_global u_l2g (
    .clk, .rst_n, .lut_we, .lut_layer, .lut_module, .lut_phi0, .lut_z0,
    .pitch_we, .pitch_phi, .pitch_z,
    .in_valid(do_v), .in_ready(do_r), .in_road(do_road),
    .out_valid(g_v), .out_ready(g_r), .out_road(g_road));

  // ---------------- fitting lanes ----------------
  localparam int LW = $clog2(N_TF > 1 ? N_TF : 2);
  logic   [N_TF-1:0] cb_in_r, cb_in_v, cb_busy, cb_ov, cb_or, tf_ov, tf_or, tf_busy;
  combo_t [N_TF-1:0] cb_combo;
  track_t [N_TF-1:0] tf_trk;
  logic              disp_any;
  logic [LW-1:0]     disp_sel;

  rr_pick #(.N(N_TF)) u_disp (
    .clk, .rst_n, .req(cb_in_r), .advance(g_v), .any(disp_any), .sel(disp_sel));
  assign g_r = disp_any;

  for (genvar t = 0; t < N_TF; t++) begin : g_lane
    assign cb_in_v[t] = g_v && disp_any && (disp_sel == LW'(t));
    comb_builder u_cb (
      .clk, .rst_n, .in_valid(cb_in_v[t]), .in_ready(cb_in_r[t]), .in_road(g_road),
      .out_valid(cb_ov[t]), .out_ready(cb_or[t]), .out_combo(cb_combo[t]),
      .busy(cb_busy[t]));
    track_fitter u_tf (
      .clk, .rst_n, .coef_we, .coef_ctype, .coef_row, .coef_col, .coef_val, .chi2_cut,
      .in_valid(cb_ov[t]), .in_ready(cb_or[t]), .in_combo(cb_combo[t]),
      .out_valid(tf_ov[t]), .out_ready(tf_or[t]), .out_track(tf_trk[t]),
      .busy(tf_busy[t]));
  end

  // merge of the lanes into duplicate removal
  logic          mg_any, dr_in_r;
  logic [LW-1:0] mg_sel;
  rr_pick #(.N(N_TF)) u_merge (
    .clk, .rst_n, .req(tf_ov), .advance(dr_in_r), .any(mg_any), .sel(mg_sel));
  always_comb
    for (int t = 0; t < int'(N_TF); t++)
      tf_or[t] = dr_in_r && mg_any && (mg_sel == LW'(t));

  // ---------------- duplicate removal ----------------
  logic dr_flush, dr_done;
  logic [15:0] dr_nrem, dr_novf;
  assign dr_flush = (state == S_FLUSH) && !started;
  duplicate_removal #(.MAX_TRK(MAX_TRK), .N_SHARED(N_SHARED)) u_dr (
    .clk, .rst_n, .in_valid(mg_any), .in_ready(dr_in_r), .in_track(tf_trk[mg_sel]),
    .flush(dr_flush), .out_valid(trk_valid), .out_ready(trk_ready), .out_track(trk_data),
    .done(dr_done), .n_removed(dr_nrem), .n_overflow(dr_novf));
  assign trk_bx         = bx_q;
  assign n_trk_overflow = dr_novf;

  // ---------------- control ----------------
  logic drained;
  assign drained = am_done && !am_rv && !r2s_v && !do_v && !g_v
                   && !(|cb_busy) && !(|tf_busy);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_LOAD;
      started         <= 1'b0;
      bx_q            <= '0;
      evt_done        <= 1'b0;
      evt_bx          <= '0;
      n_combos        <= '0;
      n_fits_passed   <= '0;
      n_roads         <= '0;
      n_roads_dropped <= '0;
      n_dup_removed   <= '0;
      n_stub_overflow <= '0;
    end else begin
      evt_done <= 1'b0;
      n_combos <= n_combos + 16'($countones(cb_ov & cb_or));
      if (mg_any && dr_in_r && tf_trk[mg_sel].pass) n_fits_passed <= n_fits_passed + 1'b1;
      unique case (state)
        S_LOAD: if (all_mark) begin
          state   <= S_READ;
          started <= 1'b0;
          bx_q    <= in_data[0].bx;
          n_combos      <= '0;
          n_fits_passed <= '0;
        end
        S_READ: begin
          started <= 1'b1;
          if (started && drained) begin
            state   <= S_FLUSH;
            started <= 1'b0;
          end
        end
        S_FLUSH: begin
          started <= 1'b1;
          if (dr_done) state <= S_CLEAR;
        end
        S_CLEAR: begin
          state           <= S_LOAD;
          evt_done        <= 1'b1;
          evt_bx          <= bx_q;
          n_roads         <= am_nroads;
          n_roads_dropped <= am_ndrop;
          n_dup_removed   <= dr_nrem;
          n_stub_overflow <= do_ovf;
        end
      endcase
    end
  end
endmodule
