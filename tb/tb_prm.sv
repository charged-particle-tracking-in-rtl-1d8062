// tb_prm: whole mezzanine, event by event, in a toy geometry.
// Module origins are zero and the pitches are 1 (phi per strip) and 64 (z
// per segment), and the fit constants are the collinearity constants of
// tb_geom_pkg, so a track whose strips and segments are linear in the layer
// index fits with chi2 = 0.  Each event holds 1..4 such tracks (some missing
// one layer) in its own module, plus noise stubs (in at most two layers of a
// six-layer track, so every combination using them shares at least three
// stubs with the true track) placed in the superstrip of
// a track stub; the bank holds one pattern per track.  Events are sent
// back to back on the six layer streams.  Checks per event: the tracks out
// are exactly the true tracks (layers used, stub indices, chi2 = 0, first
// phi and z), the road count, the combination count from the stub counts of
// the roads, and the end-of-event strobe and BX.  Duplicates removed, events
// kept waiting by a busy mezzanine and tracks held by back-pressure are
// counted and must all occur.
module tb_prm;
  import tt_pkg::*;
  import tb_geom_pkg::*;
  localparam int NPAT = 128, NEV = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

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
  logic [N_LAYERS-1:0] in_valid = '0, in_ready;
  stub_word_t [N_LAYERS-1:0] in_data = '0;
  logic trk_valid, trk_ready = 1, evt_done;
  track_t trk_data;
  logic [BX_W-1:0] trk_bx, evt_bx;
  logic [15:0] n_roads, n_roads_dropped, n_combos, n_fits_passed, n_dup_removed,
               n_stub_overflow, n_trk_overflow;

  prm #(.NPAT(NPAT), .N_TF(2)) dut (.*);

  // ---- event generation ----
  typedef struct {
    int skip;            // missing layer or -1
    int strip [N_LAYERS];
    int zseg  [N_LAYERS];
    int idx   [N_LAYERS]; // organizer index of the true stub
  } trk_s;
  trk_s  trks [NEV][$];
  stub_t lay  [NEV][N_LAYERS][$];
  int    exp_combos [NEV];
  int    pat_of_ev [NEV];

  function automatic stub_t mkstub(input int ev, input int l, input int strip, input int zseg);
    stub_t s;
    s = '0;
    s.layer = 3'(l); s.module_id = MOD_W'(ev + 1); s.strip = STRIP_W'(strip); s.zseg = ZSEG_W'(zseg);
    return s;
  endfunction

  int n_dup_seen = 0, n_wait = 0, n_bp = 0, pat = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic build_events();
    for (int ev = 0; ev < NEV; ev++) begin
      int ntrk;
      ntrk = $urandom_range(1, 4);
      pat_of_ev[ev] = pat;
      for (int k = 0; k < ntrk; k++) begin
        trk_s t;
        int s0, b, z0, e;
        s0 = 100 + 220 * k; b = $urandom_range(0, 20) - 10;
        z0 = $urandom_range(1, 4); e = $urandom_range(0, 2);
        t.skip = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 5) : -1;
        for (int l = 0; l < N_LAYERS; l++) begin
          t.strip[l] = s0 + b * l; t.zseg[l] = z0 + e * l;
        end
        trks[ev].push_back(t);
        // pattern: the superstrips of the track (all six layers)
        for (int l = 0; l < N_LAYERS; l++) begin
          @(negedge clk);
          bank_we = 1; bank_addr = ROAD_W'(pat); bank_layer = 3'(l);
          bank_ssid = ref_ssid(mkstub(ev, l, t.strip[l], t.zseg[l]));
        end
        pat++;
      end
      @(negedge clk) bank_we = 0;
      // stubs, with noise next to some true stubs, in random order per layer
      exp_combos[ev] = 0;
      foreach (trks[ev][k]) begin
        int n [N_LAYERS];
        int tot, nnoise;
        nnoise = 0;
        for (int l = 0; l < N_LAYERS; l++) begin
          n[l] = 0;
          if (l == trks[ev][k].skip) continue;
          if (trks[ev][k].skip < 0 && nnoise < 2 && $urandom_range(0, 2) == 0) begin
            // noise in the same superstrip, one strip over, ahead of the true stub
            int ns;
            ns = trks[ev][k].strip[l] ^ 1;
            lay[ev][l].push_back(mkstub(ev, l, ns, trks[ev][k].zseg[l]));
            n[l]++;
            nnoise++;
          end
          trks[ev][k].idx[l] = lay[ev][l].size();
          lay[ev][l].push_back(mkstub(ev, l, trks[ev][k].strip[l], trks[ev][k].zseg[l]));
          n[l]++;
        end
        tot = 1;
        for (int l = 0; l < N_LAYERS; l++) tot *= n[l];
        exp_combos[ev] += tot;
        for (int s = 0; s < N_LAYERS; s++) begin
          tot = 1;
          for (int l = 0; l < N_LAYERS; l++) if (l != s) tot *= n[l];
          exp_combos[ev] += tot;
        end
      end
    end
  endtask

  // ---- layer stream drivers ----
  // One process drives all six streams: at each rising edge it sees the
  // handshake of the cycle that ends, then drives the next word with
  // non-blocking assignments.  A word once offered is held until taken;
  // between words a stream idles at random.
  bit dut_ready_to_go = 0;
  int dpos [N_LAYERS], dev [N_LAYERS];
  initial for (int l = 0; l < N_LAYERS; l++) begin dpos[l] = 0; dev[l] = 0; end
  always @(posedge clk) if (dut_ready_to_go) begin
    for (int l = 0; l < N_LAYERS; l++) begin
      if (in_valid[l] && in_ready[l]) begin
        if (dpos[l] == lay[dev[l]][l].size()) begin dpos[l] = 0; dev[l]++; end
        else dpos[l]++;
      end else if (in_valid[l]) begin
        if (l == 0 && dut.state != 0) n_wait++;
        continue;
      end
      if (dev[l] < NEV && $urandom_range(0, 3) != 0) begin
        stub_word_t w;
        w = '0;
        w.bx = BX_W'(100 + dev[l]);
        if (dpos[l] == lay[dev[l]][l].size()) w.eoe = 1;
        else w.stub = lay[dev[l]][l][dpos[l]];
        in_valid[l] <= 1'b1;
        in_data[l]  <= w;
      end else begin
        in_valid[l] <= 1'b0;
      end
    end
  end

  // ---- track and end-of-event capture ----
  typedef struct {
    int bx, roads, combos;
    track_t t [$];
  } evrec_s;
  evrec_s done_q [$];
  track_t got [$], chk [$];
  always @(negedge clk) trk_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    if (rst_n && trk_valid && trk_ready) got.push_back(trk_data);
    if (trk_valid && !trk_ready) n_bp++;
    if (rst_n && evt_done) begin
      evrec_s r;
      r.bx = int'(evt_bx); r.roads = int'(n_roads); r.combos = int'(n_combos); r.t = got;
      done_q.push_back(r);
      got = {};
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // tables
    for (int l = 0; l < N_LAYERS; l++) begin
      @(negedge clk);
      pitch_we = 1; lut_layer = 3'(l); pitch_phi = 16'sd1; pitch_z = 16'sd64;
      @(negedge clk) pitch_we = 0;
      for (int m = 0; m <= NEV; m++) begin
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
    build_events();
    dut_ready_to_go = 1;

    for (int ev = 0; ev < NEV; ev++) begin
      int tmo;
      evrec_s r;
      tmo = 0;
      while (done_q.size() == 0 && tmo < 20000) begin @(posedge clk); tmo++; end
      checks++;
      if (done_q.size() == 0) begin
        failures++;
        $display("FAIL ev %0d: no end of event", ev);
        break;
      end
      r = done_q.pop_front();
      chk = r.t;
      checks++;
      if (r.bx != 100 + ev) begin
        failures++; $display("FAIL ev %0d: end of event BX %0d", ev, r.bx);
      end
      checks++;
      if (r.roads != trks[ev].size()) begin
        failures++; $display("FAIL ev %0d: %0d roads, expected %0d", ev, r.roads, trks[ev].size());
      end
      checks++;
      if (r.combos != exp_combos[ev]) begin
        failures++; $display("FAIL ev %0d: %0d combinations, expected %0d", ev, r.combos, exp_combos[ev]);
      end
      checks++;
      if (chk.size() != trks[ev].size()) begin
        failures++; $display("FAIL ev %0d: %0d tracks, expected %0d", ev, chk.size(), trks[ev].size());
      end
      foreach (trks[ev][k]) begin
        trk_s t;
        int f[$], first;
        t = trks[ev][k];
        first = (t.skip == 0) ? 1 : 0;
        f = chk.find_first_index(g) with (int'(g.road) == pat_of_ev[ev] + k);
        checks++;
        if (f.size() == 0) begin
          failures++; $display("FAIL ev %0d: track %0d missing", ev, k);
          continue;
        end
        begin
          track_t g;
          bit ok;
          g = chk[f[0]];
          ok = g.chi2 == 0 && g.ctype == 3'(t.skip < 0 ? N_LAYERS : t.skip)
               && $signed(g.par[0]) == t.strip[first] && $signed(g.par[2]) == 64 * t.zseg[first];
          for (int l = 0; l < N_LAYERS; l++)
            if (l != t.skip && int'(g.idx[l]) != t.idx[l]) ok = 0;
          if (!ok) begin
            failures++;
            $display("FAIL ev %0d track %0d: ctype %0d chi2 %0d par0 %0d", ev, k, g.ctype, g.chi2, $signed(g.par[0]));
          end
        end
      end
    end
    n_dup_seen = n_dup_removed;
    $display("duplicates removed %0d, cycles an event waited %0d, cycles of track back-pressure %0d",
             n_dup_seen, n_wait, n_bp);
    checks++;
    if (n_dup_seen == 0 || n_wait == 0 || n_bp == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
