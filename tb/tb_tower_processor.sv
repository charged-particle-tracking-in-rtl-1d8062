// tb_tower_processor: end-to-end test of the trigger-tower processor.
//
// Reduced size: three boards with two mezzanines each (TMUX 6), two input
// links per board, 32 patterns, a road limit of 3 and two fitters per
// mezzanine.  Geometry and fit constants are the toy ones of tb_prm (module
// origins 0, pitches 1 and 64, collinearity constants), broadcast to every
// mezzanine.  Twelve track templates use modules of their own (template k,
// layer l: module 6k+l+1); module m arrives on board m mod N_PRB, link
// (m / N_PRB) mod N_IN, so a track's stubs start on several boards and most
// reach their mezzanine over the mesh.  Each bunch crossing (BX) holds 0..5
// templates, some with a layer missing, some with noise stubs in the
// superstrip of a true stub; every link closes every BX with a marker.
//
// Checks, per BX, on the mezzanine that owns it (BX mod TMUX): the end-of-
// event BX, the road count and dropped-road count (roads beyond the limit
// are the templates with the highest pattern addresses), and that the
// tracks out are exactly the kept templates (layers used, chi2 = 0, first
// phi and z).  Mechanisms counted, each of which must happen: stubs over the
// mesh, stubs on the local path, roads dropped at the limit, duplicates
// removed, five-of-six tracks, fits rejected by the chi2 cut, input links
// held by back-pressure, and track outputs held by back-pressure.
module tb_tower_processor;
  import tt_pkg::*;
  import tb_geom_pkg::*;
  localparam int N_PRB = 3, PRMS = 2, TMUX = 6, N_IN = 2, NPAT = 32, MAXR = 3;
  localparam int NTPL = 12, NBX = 24, MAXT = 5;
  localparam int NPRM = N_PRB * PRMS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N_PRB-1:0][N_IN-1:0] in_valid = '0, in_ready;
  stub_word_t [N_PRB-1:0][N_IN-1:0] in_data = '0;
  logic bank_we = 0, lut_we = 0, pitch_we = 0, coef_we = 0;
  logic [ROAD_W-1:0] bank_addr = '0;
  logic [LAYER_W-1:0] bank_layer = '0, lut_layer = '0;
  logic [SSID_W-1:0] bank_ssid = '0;
  logic [MOD_W-1:0] lut_module = '0;
  logic signed [COORD_W-1:0] lut_phi0 = '0, lut_z0 = '0, pitch_phi = '0, pitch_z = '0;
  logic [2:0] coef_ctype = '0;
  logic [3:0] coef_row = '0, coef_col = '0;
  logic signed [COEF_W-1:0] coef_val = '0;
  logic [CHI_W-1:0] chi2_cut = 32'd4;
  logic   [NPRM-1:0] trk_valid, trk_ready = '1, evt_done;
  track_t [NPRM-1:0] trk_data;
  logic   [NPRM-1:0][BX_W-1:0] trk_bx, evt_bx;
  logic   [NPRM-1:0][15:0] n_roads, n_roads_dropped, n_combos, n_fits_passed,
                           n_dup_removed, n_stub_overflow, n_trk_overflow;

  tower_processor #(.N_PRB(N_PRB), .PRMS_PER_PRB(PRMS), .TMUX(TMUX), .N_IN(N_IN),
                    .NPAT(NPAT), .MAX_ROADS(MAXR), .N_TF(2)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- templates and events ----
  int tstrip [NTPL][N_LAYERS], tz [NTPL][N_LAYERS];
  int bx_tpl  [NBX][$];          // templates in the BX, ascending
  int bx_skip [NBX][NTPL];       // missing layer or -1
  stub_word_t lnk [N_PRB][N_IN][$];

  function automatic int modof(input int k, input int l);
    return 6 * k + l + 1;
  endfunction

  function automatic stub_t mk(input int k, input int l, input int strip, input int zseg);
    stub_t s;
    s = '0;
    s.layer = 3'(l); s.module_id = MOD_W'(modof(k, l));
    s.strip = STRIP_W'(strip); s.zseg = ZSEG_W'(zseg);
    return s;
  endfunction

  task automatic add_stub(input int bx, input stub_t s);
    stub_word_t w;
    int m;
    w = '0; w.bx = BX_W'(bx); w.stub = s;
    m = int'(s.module_id);
    lnk[m % N_PRB][(m / N_PRB) % N_IN].push_back(w);
  endtask

  task automatic build();
    for (int k = 0; k < NTPL; k++) begin
      int s0, b, z0, e;
      s0 = $urandom_range(100, 900); b = $urandom_range(0, 20) - 10;
      z0 = $urandom_range(1, 4); e = $urandom_range(0, 2);
      for (int l = 0; l < N_LAYERS; l++) begin
        tstrip[k][l] = s0 + b * l; tz[k][l] = z0 + e * l;
      end
    end
    for (int bx = 0; bx < NBX; bx++) begin
      int nt;
      bit used [NTPL];
      nt = (bx % 7 == 3) ? 0 : $urandom_range(1, MAXT);
      foreach (used[k]) used[k] = 0;
      for (int i = 0; i < nt; i++) used[$urandom_range(0, NTPL - 1)] = 1;
      for (int k = 0; k < NTPL; k++) if (used[k]) begin
        int nn;
        nn = 0;
        bx_tpl[bx].push_back(k);
        bx_skip[bx][k] = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 5) : -1;
        for (int l = 0; l < N_LAYERS; l++) begin
          if (l == bx_skip[bx][k]) continue;
          if (bx_skip[bx][k] < 0 && nn < 2 && $urandom_range(0, 2) == 0) begin
            // noise in the same superstrip (the low three strip bits differ)
            add_stub(bx, mk(k, l, tstrip[k][l] ^ $urandom_range(1, 7), tz[k][l]));
            nn++;
          end
          add_stub(bx, mk(k, l, tstrip[k][l], tz[k][l]));
        end
      end
      for (int p = 0; p < N_PRB; p++)
        for (int i = 0; i < N_IN; i++) begin
          stub_word_t w;
          w = '0; w.eoe = 1; w.bx = BX_W'(bx);
          lnk[p][i].push_back(w);
        end
    end
  endtask

  // ---- input link drivers (one process, see tb_prm) ----
  bit go = 0;
  int lpos [N_PRB][N_IN];
  initial foreach (lpos[p, i]) lpos[p][i] = 0;
  int n_in_bp = 0;
  always @(posedge clk) if (go) begin
    for (int p = 0; p < N_PRB; p++)
      for (int i = 0; i < N_IN; i++) begin
        if (in_valid[p][i] && in_ready[p][i]) lpos[p][i]++;
        else if (in_valid[p][i]) begin n_in_bp++; continue; end
        if (lpos[p][i] < lnk[p][i].size() && $urandom_range(0, 3) != 0) begin
          in_valid[p][i] <= 1'b1;
          in_data[p][i]  <= lnk[p][i][lpos[p][i]];
        end else in_valid[p][i] <= 1'b0;
      end
  end

  // ---- output capture ----
  typedef struct {
    int bx, roads, dropped;
    track_t t [$];
  } evrec_s;
  evrec_s done_q [NPRM][$];
  track_t got [NPRM][$];
  int n_trk_bp = 0, n_mesh = 0, n_local = 0, n_rej = 0;
  always @(negedge clk) for (int k = 0; k < NPRM; k++) trk_ready[k] = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NPRM; k++) begin
      if (trk_valid[k] && trk_ready[k]) got[k].push_back(trk_data[k]);
      if (trk_valid[k] && !trk_ready[k]) n_trk_bp++;
      if (evt_done[k]) begin
        evrec_s r;
        r.bx = int'(evt_bx[k]); r.roads = int'(n_roads[k]); r.dropped = int'(n_roads_dropped[k]);
        r.t = got[k];
        done_q[k].push_back(r);
        got[k] = {};
        n_rej += int'(n_combos[k]) - int'(n_fits_passed[k]);
      end
    end
  end
  for (genvar p = 0; p < N_PRB; p++) begin : g_cnt
    always @(posedge clk) if (rst_n) begin
      for (int j = 0; j < N_PRB - 1; j++)
        if (dut.tx_v[p][j] && dut.tx_r[p][j] && !dut.tx_d[p][j].eoe) n_mesh++;
      if (dut.g_prb[p].u_prb.dm_v[0] && dut.g_prb[p].u_prb.dm_r[0] && !dut.g_prb[p].u_prb.dm_d[0].eoe)
        n_local++;
    end
  end

  initial begin
    int n_drop, n_dup, n_five;
    n_drop = 0; n_dup = 0; n_five = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < N_LAYERS; l++) begin
      @(negedge clk);
      pitch_we = 1; lut_layer = 3'(l); pitch_phi = 16'sd1; pitch_z = 16'sd64;
      @(negedge clk) pitch_we = 0;
      for (int m = 0; m <= 6 * NTPL; m++) begin
        lut_we = 1; lut_module = MOD_W'(m); lut_phi0 = '0; lut_z0 = '0;
        @(negedge clk);
      end
      lut_we = 0;
    end
    for (int t = 0; t < N_CTYPE; t++)
      for (int r = 0; r < N_PAR + N_CONS; r++)
        for (int c = 0; c <= N_COORD; c++) begin
          @(negedge clk);
          coef_we = 1; coef_ctype = 3'(t); coef_row = 4'(r); coef_col = 4'(c);
          coef_val = COEF_W'(fit_coef(t, r, c));
        end
    @(negedge clk) coef_we = 0;
    build();
    for (int k = 0; k < NTPL; k++)
      for (int l = 0; l < N_LAYERS; l++) begin
        @(negedge clk);
        bank_we = 1; bank_addr = ROAD_W'(k); bank_layer = 3'(l);
        bank_ssid = ref_ssid(mk(k, l, tstrip[k][l], tz[k][l]));
      end
    @(negedge clk) bank_we = 0;
    go = 1;

    for (int bx = 0; bx < NBX; bx++) begin
      int k, tmo, nkeep;
      evrec_s r;
      k = bx % TMUX;
      tmo = 0;
      while (done_q[k].size() == 0 && tmo < 50000) begin @(posedge clk); tmo++; end
      checks++;
      if (done_q[k].size() == 0) begin
        failures++; $display("FAIL bx %0d: mezzanine %0d never finished", bx, k);
        break;
      end
      r = done_q[k].pop_front();
      nkeep = (bx_tpl[bx].size() < MAXR) ? bx_tpl[bx].size() : MAXR;
      checks++;
      if (r.bx != bx || r.roads != nkeep || r.dropped != bx_tpl[bx].size() - nkeep) begin
        failures++;
        $display("FAIL bx %0d: event bx %0d roads %0d dropped %0d, expected %0d roads of %0d",
                 bx, r.bx, r.roads, r.dropped, nkeep, bx_tpl[bx].size());
      end
      n_drop += r.dropped;
      checks++;
      if (r.t.size() != nkeep) begin
        failures++; $display("FAIL bx %0d: %0d tracks, expected %0d", bx, r.t.size(), nkeep);
      end
      for (int i = 0; i < nkeep; i++) begin
        int tk, sk, first;
        int f[$];
        tk = bx_tpl[bx][i]; sk = bx_skip[bx][tk];
        first = (sk == 0) ? 1 : 0;
        f = r.t.find_first_index(g) with (int'(g.road) == tk);
        checks++;
        if (f.size() == 0) begin
          failures++; $display("FAIL bx %0d: template %0d missing", bx, tk);
        end else if (r.t[f[0]].chi2 != 0 || r.t[f[0]].ctype != 3'(sk < 0 ? N_LAYERS : sk)
                     || $signed(r.t[f[0]].par[0]) != tstrip[tk][first]
                     || $signed(r.t[f[0]].par[2]) != 64 * tz[tk][first]) begin
          failures++;
          $display("FAIL bx %0d template %0d: ctype %0d chi2 %0d", bx, tk, r.t[f[0]].ctype, r.t[f[0]].chi2);
        end
        if (sk >= 0) n_five++;
      end
    end
    for (int k = 0; k < NPRM; k++) n_dup += int'(n_dup_removed[k]);
    $display("mesh stubs %0d, local stubs %0d, roads dropped %0d, duplicates removed %0d",
             n_mesh, n_local, n_drop, n_dup);
    $display("five-of-six tracks %0d, fits rejected %0d, input back-pressure %0d, track back-pressure %0d",
             n_five, n_rej, n_in_bp, n_trk_bp);
    begin
      int mech [8];
      mech = '{n_mesh, n_local, n_drop, n_dup, n_five, n_rej, n_in_bp, n_trk_bp};
      foreach (mech[i]) begin
        checks++;
        if (mech[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
