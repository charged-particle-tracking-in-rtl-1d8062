// tb_track_fitter: loads random constants for all seven combination types,
// fits random combinations, and compares parameters, chi2 and the pass flag
// with a 64-bit integer reference computed here.  Checks the four-cycle
// latency with an always-ready output, then order and completeness under
// random back-pressure.  A second part loads the collinear toy constants and
// checks that a true straight track gives chi2 = 0 and its parameters.
module tb_track_fitter;
  import tt_pkg::*;
  import tb_geom_pkg::*;
  localparam int NR = N_PAR + N_CONS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic coef_we = 0;
  logic [2:0] coef_ctype = '0;
  logic [3:0] coef_row = '0, coef_col = '0;
  logic signed [COEF_W-1:0] coef_val = '0;
  logic [CHI_W-1:0] chi2_cut = 32'd5000;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, busy;
  combo_t in_combo = '0;
  track_t out_track;

  track_fitter dut (.*);

  int V [N_CTYPE][NR][N_COORD+1];
  track_t exp_q [$];
  int cyc = 0;
  int sent_cyc [$];
  bit phase1 = 1;

  function automatic longint sat(input longint a, input int w);
    longint mx;
    mx = (64'sd1 <<< (w - 1)) - 1;
    if (a > mx) return mx;
    if (a < -mx - 1) return -mx - 1;
    return a;
  endfunction

  function automatic track_t model(input combo_t c);
    track_t t;
    longint row [NR];
    longint chi;
    int ct;
    t = '0;
    ct = c.ctype;
    for (int r = 0; r < NR; r++) begin
      longint acc;
      acc = 0;
      for (int l = 0; l < N_LAYERS; l++)
        if (c.present[l]) begin
          acc += longint'(V[ct][r][2*l])   * longint'(c.st[l].phi);
          acc += longint'(V[ct][r][2*l+1]) * longint'(c.st[l].z);
        end
      row[r] = sat((acc >>> FRAC_W) + V[ct][r][N_COORD], PAR_W);
    end
    chi = 0;
    for (int i = 0; i < N_CONS; i++) chi += row[N_PAR+i] * row[N_PAR+i];
    if (chi > 64'hFFFF_FFFF) chi = 64'hFFFF_FFFF;
    t.road = c.road; t.ctype = c.ctype; t.present = c.present;
    for (int l = 0; l < N_LAYERS; l++) t.idx[l] = c.st[l].idx;
    for (int p = 0; p < N_PAR; p++) t.par[p] = PAR_W'(row[p]);
    t.chi2 = CHI_W'(chi);
    t.pass = (chi <= longint'(chi2_cut) * ((ct == N_LAYERS) ? 8 : 6));
    return t;
  endfunction

  task automatic load(input bit toy);
    for (int t = 0; t < N_CTYPE; t++)
      for (int r = 0; r < NR; r++)
        for (int c = 0; c <= N_COORD; c++) begin
          V[t][r][c] = toy ? fit_coef(t, r, c) : ($urandom_range(0, 8000) - 4000);
          @(negedge clk);
          coef_we = 1; coef_ctype = 3'(t); coef_row = 4'(r); coef_col = 4'(c);
          coef_val = COEF_W'(V[t][r][c]);
        end
    @(negedge clk) coef_we = 0;
  endtask

  function automatic combo_t rand_combo(input int id);
    combo_t c;
    int sk;
    c = '0;
    c.road = ROAD_W'(id);
    sk = $urandom_range(0, N_LAYERS);
    c.ctype = 3'(sk);
    for (int l = 0; l < N_LAYERS; l++)
      if (l != sk) begin
        c.present[l] = 1;
        c.st[l].idx = STUB_IDX_W'($urandom);
        c.st[l].phi = COORD_W'($urandom_range(0, 2000) - 1000);
        c.st[l].z   = COORD_W'($urandom_range(0, 2000) - 1000);
      end
    return c;
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid && out_ready) begin
      track_t e;
      e = exp_q.pop_front();
      checks++;
      if (out_track !== e) begin
        failures++;
        $display("FAIL road %0d: chi2 %0d exp %0d pass %0d exp %0d", out_track.road,
                 out_track.chi2, e.chi2, out_track.pass, e.pass);
      end
      if (sent_cyc.size() > 0) begin
        int s;
        s = sent_cyc.pop_front();
        if (s >= 0) begin
          checks++;
          if (cyc - s != 4) begin failures++; $display("FAIL latency %0d", cyc - s); end
        end
      end
    end
    if (rst_n && in_valid && in_ready) begin
      exp_q.push_back(model(in_combo));
      sent_cyc.push_back(phase1 ? cyc : -1);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int npass;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load(0);
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      in_valid = 1; in_combo = rand_combo(n);
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    sent_cyc = {};
    phase1 = 0;
    fork forever begin @(negedge clk) out_ready = ($urandom_range(0, 2) != 0); end join_none
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0); in_combo = rand_combo(1000 + n);
      @(posedge clk);
      while (in_valid && !in_ready) @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d fits lost", exp_q.size()); end
    // toy geometry: straight tracks give chi2 = 0
    disable fork;
    out_ready = 1;
    load(1);
    npass = 0;
    for (int n = 0; n < 50; n++) begin
      combo_t c;
      int a, b, z0, dz;
      c = rand_combo(2000 + n);
      a = $urandom_range(0, 1000) - 500; b = $urandom_range(0, 100) - 50;
      z0 = $urandom_range(0, 1000) - 500; dz = $urandom_range(0, 100) - 50;
      for (int l = 0; l < N_LAYERS; l++) begin
        c.st[l].phi = COORD_W'(a + b * l);
        c.st[l].z   = COORD_W'(z0 + dz * l);
      end
      @(negedge clk);
      in_valid = 1; in_combo = c;
      @(posedge clk);
      #1;
      in_valid = 0;
      repeat (3) @(posedge clk);   // output valid after the third edge, taken at the fourth
      #1;
      checks++;
      begin
        logic signed [PAR_W-1:0] p1;
        int span;
        p1   = out_track.par[1];
        span = used_layer(int'(c.ctype), n_used(int'(c.ctype)) - 1) - used_layer(int'(c.ctype), 0);
      if (!(out_valid && out_track.chi2 == 0 && out_track.pass && int'(p1) == b * span)) begin
        failures++;
        $display("FAIL toy track ctype %0d chi2 %0d par1 %0d exp %0d", c.ctype, out_track.chi2, p1, b * span);
      end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
