// tb_comb_builder: random roads with 0..4 stubs per layer.  For each road the
// expected set of combinations is enumerated here independently (every
// choice of one stub per layer over all six layers, then over every set of
// five layers whose layers all have stubs); the builder's output must match
// it exactly and in count.  With an always-ready output, combinations of
// consecutive roads must leave one per cycle with no gap.
module tb_comb_builder;
  import tt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1, busy;
  road_global_t in_road = '0;
  combo_t out_combo;

  comb_builder dut (.*);

  string exp_set [$];
  int n_out = 0, first_c = -1, last_c = -1, cyc = 0;

  function automatic string key(input combo_t c);
    return $sformatf("%0d/%0d/%b/%h", c.road, c.ctype, c.present, c.st);
  endfunction

  // expected combinations of a road
  task automatic enumerate(input road_global_t r);
    for (int t = N_LAYERS; t >= 0; t--) begin
      int cfg, total;
      bit ok;
      cfg = (t == N_LAYERS) ? N_LAYERS : N_LAYERS - 1 - t;  // order does not matter here
      ok = 1;
      total = 1;
      for (int l = 0; l < N_LAYERS; l++)
        if (l != cfg) begin
          if (r.layer[l].n == 0) ok = 0;
          else total *= r.layer[l].n;
        end
      if (!ok) continue;
      for (int i = 0; i < total; i++) begin
        combo_t c;
        int rem;
        c = '0;
        c.road = r.road;
        c.ctype = 3'(cfg);
        rem = i;
        for (int l = 0; l < N_LAYERS; l++)
          if (l != cfg) begin
            c.present[l] = 1;
            c.st[l] = r.layer[l].s[rem % r.layer[l].n];
            rem /= r.layer[l].n;
          end
        exp_set.push_back(key(c));
      end
    end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid && out_ready) begin
      int f[$];
      f = exp_set.find_first_index(x) with (x == key(out_combo));
      checks++;
      if (f.size() == 0) begin
        failures++;
        $display("FAIL unexpected combo %s", key(out_combo));
      end else exp_set.delete(f[0]);
      n_out++;
      if (first_c < 0) first_c = cyc;
      last_c = cyc;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input road_global_t r);
    @(negedge clk);
    in_valid = 1; in_road = r;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  function automatic road_global_t rand_road(input int id, input int maxn);
    road_global_t r;
    r = '0;
    r.road = ROAD_W'(id);
    for (int l = 0; l < N_LAYERS; l++) begin
      r.layer[l].n = KCNT_W'($urandom_range(0, maxn));
      if ($urandom_range(0, 4) != 0 && r.layer[l].n == 0) r.layer[l].n = 1;
      for (int k = 0; k < K_PER_SS; k++)
        r.layer[l].s[k] = gstub_t'({$urandom, $urandom});
    end
    return r;
  endfunction

  initial begin
    int expected;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: back-to-back roads with nonzero stubs everywhere, rate check
    expected = 0;
    for (int n = 0; n < 10; n++) begin
      road_global_t r;
      r = rand_road(n, 3);
      for (int l = 0; l < N_LAYERS; l++) if (r.layer[l].n == 0) r.layer[l].n = 1;
      enumerate(r);
      send(r);
    end
    expected = exp_set.size() + n_out;
    repeat (3000) begin @(posedge clk); if (!busy && !in_valid) break; end
    repeat (2) @(posedge clk);
    checks++;
    if (exp_set.size() != 0 || last_c - first_c + 1 != n_out) begin
      failures++;
      $display("FAIL phase 1: %0d missing, %0d combos over %0d cycles", exp_set.size(), n_out,
               last_c - first_c + 1);
    end
    // phase 2: any stub counts, random back-pressure
    fork forever begin @(negedge clk) out_ready = ($urandom_range(0, 2) != 0); end join_none
    for (int n = 0; n < 60; n++) begin
      road_global_t r;
      r = rand_road(100 + n, 4);
      enumerate(r);
      send(r);
    end
    repeat (5000) begin @(posedge clk); if (!busy) break; end
    repeat (2) @(posedge clk);
    checks++;
    if (exp_set.size() != 0) begin failures++; $display("FAIL phase 2: %0d combos missing", exp_set.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
