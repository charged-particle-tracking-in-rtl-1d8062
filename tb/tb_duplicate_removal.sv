// tb_duplicate_removal: a directed event, then random events.
// Directed: a six-layer track, a five-layer track sharing five of its stubs
// with a better chi2 per degree of freedom (replaces it), an unrelated track
// (kept), a worse track sharing three stubs (dropped), a track that failed
// the cut (dropped).  Random: tracks whose stub indices come from a small
// range so that sharing is common; the survivors are predicted by a slot
// model written here.  Checks the flushed tracks in slot order, the removed
// count, and the done pulse.
module tb_duplicate_removal;
  import tt_pkg::*;
  localparam int MAX_TRK = 8, N_SHARED = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, flush = 0, out_valid, out_ready = 1, done;
  track_t in_track = '0, out_track;
  logic [15:0] n_removed, n_overflow;

  duplicate_removal #(.MAX_TRK(MAX_TRK), .N_SHARED(N_SHARED)) dut (.*);

  track_t slot [MAX_TRK];
  bit     sv   [MAX_TRK];
  int     removed = 0;

  function automatic int nd(input track_t t);
    return (t.ctype == 3'(N_LAYERS)) ? 8 : 6;
  endfunction

  task automatic model_add(input track_t t);
    int conf[$];
    bit better;
    if (!t.pass) return;
    for (int j = 0; j < MAX_TRK; j++)
      if (sv[j]) begin
        int n;
        n = 0;
        for (int l = 0; l < N_LAYERS; l++)
          if (t.present[l] && slot[j].present[l] && t.idx[l] == slot[j].idx[l]) n++;
        if (n >= N_SHARED) conf.push_back(j);
      end
    if (conf.size() == 0) begin
      for (int j = 0; j < MAX_TRK; j++)
        if (!sv[j]) begin sv[j] = 1; slot[j] = t; return; end
      return;
    end
    better = 1;
    foreach (conf[i])
      if (!(longint'(t.chi2) * nd(slot[conf[i]]) < longint'(slot[conf[i]].chi2) * nd(t))) better = 0;
    if (better) begin
      foreach (conf[i]) sv[conf[i]] = 0;
      sv[conf[0]] = 1; slot[conf[0]] = t;
      removed += conf.size();
    end else removed++;
  endtask

  task automatic send(input track_t t);
    @(negedge clk);
    in_valid = 1; in_track = t;
    model_add(t);
    @(negedge clk) in_valid = 0;
  endtask

  task automatic flush_and_check(input string tag);
    track_t got[$];
    @(negedge clk) flush = 1;
    @(negedge clk) flush = 0;
    for (int c = 0; c < 100; c++) begin
      @(posedge clk);
      if (out_valid && out_ready) got.push_back(out_track);
      if (done) break;
    end
    checks++;
    if (!done) begin failures++; $display("FAIL %s: no done", tag); end
    begin
      int k;
      k = 0;
      for (int j = 0; j < MAX_TRK; j++)
        if (sv[j]) begin
          checks++;
          if (k >= got.size() || got[k] !== slot[j]) begin
            failures++;
            $display("FAIL %s: survivor %0d", tag, k);
          end
          k++;
          sv[j] = 0;
        end
      checks++;
      if (k != got.size()) begin failures++; $display("FAIL %s: %0d out, %0d expected", tag, got.size(), k); end
    end
    checks++;
    if (int'(n_removed) != removed) begin failures++; $display("FAIL %s: removed %0d exp %0d", tag, n_removed, removed); end
  endtask

  function automatic track_t mk(input int road, input int ctype, input int chi2, input bit pass,
                                input int i0, input int i1, input int i2, input int i3, input int i4, input int i5);
    track_t t;
    int ids[6];
    ids = '{i0, i1, i2, i3, i4, i5};
    t = '0;
    t.road = ROAD_W'(road); t.ctype = 3'(ctype); t.chi2 = CHI_W'(chi2); t.pass = pass;
    for (int l = 0; l < N_LAYERS; l++) begin
      t.present[l] = (l != ctype);
      t.idx[l] = STUB_IDX_W'(ids[l]);
    end
    return t;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed
    send(mk(1, 6, 80, 1,  1, 1, 1, 1, 1, 1));   // A
    send(mk(2, 5, 30, 1,  1, 1, 1, 1, 1, 0));   // B: shares 5 with A, 30/6 < 80/8 -> replaces A
    send(mk(3, 6, 10, 1,  7, 7, 7, 7, 7, 7));   // C: unrelated
    send(mk(4, 6, 90, 1,  7, 7, 7, 2, 2, 2));   // D: shares 3 with C, worse -> dropped
    send(mk(5, 6, 1,  0,  9, 9, 9, 9, 9, 9));   // E: failed the cut
    checks++;
    if (!(dut.kv == 8'b0000_0011 && dut.kept[0].road == 2 && dut.kept[1].road == 3)) begin
      failures++;
      $display("FAIL directed: slots %b", dut.kv);
    end
    flush_and_check("directed");
    // random
    for (int ev = 0; ev < 30; ev++) begin
      for (int n = 0; n < $urandom_range(1, 14); n++) begin
        track_t t;
        t = mk($urandom_range(0, 999), $urandom_range(0, 6), $urandom_range(0, 200), $urandom_range(0, 5) != 0,
               $urandom_range(0, 2), $urandom_range(0, 2), $urandom_range(0, 2),
               $urandom_range(0, 2), $urandom_range(0, 2), $urandom_range(0, 2));
        send(t);
      end
      out_ready = ($urandom_range(0, 1) != 0) || ev < 10;
      fork begin
        repeat (40) begin @(negedge clk) out_ready = (ev < 10) || ($urandom_range(0, 2) != 0); end
      end join_none
      flush_and_check($sformatf("event %0d", ev));
      out_ready = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
