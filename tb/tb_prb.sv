// tb_prb: checks the data delivery of one board (board 1 of three, two
// mezzanines each, TMUX 6, two input links).  The input links carry random
// stubs for bunch crossings (BX) 0..NBX-1, each closed by a marker; the
// receive lanes carry random stubs for the BXs this board owns, as the other
// boards would send them.  Every stub has a unique strip number.  Each output
// (transmit lane j-1 towards board PRB_ID+j mod 3, or mezzanine m layer l)
// has a scoreboard: every stub must arrive on the output the round robin and
// its layer select, exactly once and before that BX's marker there, and each
// output must see one marker per BX it serves, in BX order, only after all
// of that BX's stubs.  Outputs are held by random back-pressure.
module tb_prb;
  import tt_pkg::*;
  localparam int N_IN = 2, N_PRB = 3, P = 2, TMUX = 6, ID = 1, NBX = 18;
  localparam int NCH = N_PRB - 1 + P * N_LAYERS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N_IN-1:0] in_valid = '0, in_ready;
  stub_word_t [N_IN-1:0] in_data = '0;
  logic [N_PRB-2:0] tx_valid, tx_ready = '1, rx_valid = '0, rx_ready;
  stub_word_t [N_PRB-2:0] tx_data, rx_data = '0;
  logic [P-1:0][N_LAYERS-1:0] prm_valid, prm_ready = '1;
  stub_word_t [P-1:0][N_LAYERS-1:0] prm_data;

  prb #(.N_IN(N_IN), .N_PRB(N_PRB), .PRMS_PER_PRB(P), .TMUX(TMUX), .PRB_ID(ID)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int owner(input int bx);
    return (bx % TMUX) / P;
  endfunction

  stub_word_t src_q [N_IN + N_PRB - 1][$];   // inputs, then receive lanes
  int exp_cnt [NCH][int];                    // per output: stub id -> expected count
  int exp_bx  [NCH][int];                    // per output: stub id -> its BX
  int mark_q  [NCH][$];                      // per output: BXs whose marker is due
  int next_id = 0, n_stubs = 0, n_marks = 0;

  function automatic int prm_ch(input int bx, input int l);
    return N_PRB - 1 + ((bx % TMUX) % P) * N_LAYERS + l;
  endfunction

  task automatic add(input int src, input int bx, input int to_ch);
    stub_word_t w;
    w = '0; w.bx = BX_W'(bx);
    w.stub.layer = 3'($urandom_range(0, 5));
    w.stub.module_id = MOD_W'($urandom);
    w.stub.strip = STRIP_W'(next_id);
    if (to_ch < 0) to_ch = prm_ch(bx, int'(w.stub.layer));
    exp_cnt[to_ch][next_id] = 1;
    exp_bx[to_ch][next_id]  = bx;
    next_id++;
    src_q[src].push_back(w);
  endtask

  task automatic build();
    for (int bx = 0; bx < NBX; bx++) begin
      int o;
      o = owner(bx);
      for (int i = 0; i < N_IN; i++) begin
        stub_word_t m;
        repeat ($urandom_range(0, 3))
          add(i, bx, (o == ID) ? -1 : (o - ID + N_PRB) % N_PRB - 1);
        m = '0; m.eoe = 1; m.bx = BX_W'(bx);
        src_q[i].push_back(m);
      end
      if (o == ID) begin
        for (int j = 0; j < N_PRB - 1; j++) begin
          stub_word_t m;
          repeat ($urandom_range(0, 3)) add(N_IN + j, bx, -1);
          m = '0; m.eoe = 1; m.bx = BX_W'(bx);
          src_q[N_IN + j].push_back(m);
        end
        for (int l = 0; l < N_LAYERS; l++) mark_q[prm_ch(bx, l)].push_back(bx);
      end else begin
        mark_q[(o - ID + N_PRB) % N_PRB - 1].push_back(bx);
      end
    end
  endtask

  // drivers and monitors, all at the rising edge
  bit go = 0;
  int spos [N_IN + N_PRB - 1];
  initial foreach (spos[i]) spos[i] = 0;

  task automatic see(input int ch, input stub_word_t w);
    checks++;
    if (w.eoe) begin
      n_marks++;
      if (mark_q[ch].size() == 0 || mark_q[ch][0] != int'(w.bx)) begin
        failures++; $display("FAIL out %0d: unexpected marker BX %0d", ch, w.bx);
      end else begin
        void'(mark_q[ch].pop_front());
        foreach (exp_cnt[ch][id])
          if (exp_cnt[ch][id] != 0 && exp_bx[ch][id] == int'(w.bx)) begin
            failures++; $display("FAIL out %0d: marker BX %0d before stub %0d", ch, w.bx, id);
          end
      end
    end else begin
      int id;
      id = int'(w.stub.strip);
      n_stubs++;
      if (!exp_cnt[ch].exists(id) || exp_cnt[ch][id] != 1 || exp_bx[ch][id] != int'(w.bx)) begin
        failures++; $display("FAIL out %0d: stray stub %0d BX %0d", ch, id, w.bx);
      end else exp_cnt[ch][id] = 0;
    end
  endtask

  always @(posedge clk) if (rst_n && go) begin
    for (int j = 0; j < N_PRB - 1; j++) if (tx_valid[j] && tx_ready[j]) see(j, tx_data[j]);
    for (int m = 0; m < P; m++)
      for (int l = 0; l < N_LAYERS; l++)
        if (prm_valid[m][l] && prm_ready[m][l]) see(N_PRB - 1 + m * N_LAYERS + l, prm_data[m][l]);
    for (int s = 0; s < N_IN + N_PRB - 1; s++) begin
      bit v, r;
      v = (s < N_IN) ? in_valid[s] : rx_valid[s - N_IN];
      r = (s < N_IN) ? in_ready[s] : rx_ready[s - N_IN];
      if (v && r) spos[s]++;
      else if (v) continue;
      v = spos[s] < src_q[s].size() && $urandom_range(0, 3) != 0;
      if (s < N_IN) begin
        in_valid[s] <= v;
        if (v) in_data[s] <= src_q[s][spos[s]];
      end else begin
        rx_valid[s - N_IN] <= v;
        if (v) rx_data[s - N_IN] <= src_q[s][spos[s]];
      end
    end
    for (int j = 0; j < N_PRB - 1; j++) tx_ready[j] <= ($urandom_range(0, 3) != 0);
    for (int m = 0; m < P; m++)
      for (int l = 0; l < N_LAYERS; l++) prm_ready[m][l] <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    int left;
    repeat (3) @(posedge clk);
    rst_n = 1;
    build();
    go = 1;
    repeat (3000) @(posedge clk);
    left = 0;
    for (int ch = 0; ch < NCH; ch++) begin
      left += mark_q[ch].size();
      foreach (exp_cnt[ch][id]) left += exp_cnt[ch][id];
    end
    checks++;
    if (left != 0) begin failures++; $display("FAIL %0d stubs or markers never arrived", left); end
    $display("stubs %0d of %0d, markers %0d", n_stubs, next_id, n_marks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
