// tb_layer_demux_merge: three sources (local path and two backplane links)
// send 12 bunch crossings each, with stubs of random layers, into a board
// with two mezzanines.  With random back-pressure on all twelve outputs,
// every (mezzanine, layer) output must carry exactly the stubs of its layer
// from the crossings its mezzanine owns, crossing by crossing, each crossing
// closed on all six layers of that mezzanine by one marker.
module tb_layer_demux_merge;
  import tt_pkg::*;
  localparam int N_SRC = 3, PRMS = 2, TMUX = 4, NBX = 12, NO = PRMS * N_LAYERS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N_SRC-1:0] in_valid = '0, in_ready;
  stub_word_t [N_SRC-1:0] in_data = '0;
  logic [PRMS-1:0][N_LAYERS-1:0] out_valid, out_ready = '1;
  stub_word_t [PRMS-1:0][N_LAYERS-1:0] out_data;

  layer_demux_merge #(.N_SRC(N_SRC), .PRMS_PER_PRB(PRMS), .TMUX(TMUX), .IN_DEPTH(4), .OUT_DEPTH(4)) dut (.*);

  function automatic int prm_of(input int bx);
    return (bx % TMUX) % PRMS;
  endfunction

  stub_t exp_stubs [NO][NBX][$];
  int    cur_bx [NO];
  int    markers = 0, nstubs = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar i = 0; i < N_SRC; i++) begin : g_drv
    initial begin
      @(posedge rst_n);
      for (int b = 0; b < NBX; b++) begin
        int n;
        n = $urandom_range(0, 8);
        for (int k = 0; k <= n; k++) begin
          stub_word_t w;
          w = '0;
          w.bx = BX_W'(b);
          if (k == n) w.eoe = 1;
          else begin
            w.stub = stub_t'($urandom);
            w.stub.layer = 3'($urandom_range(0, N_LAYERS - 1));
            exp_stubs[prm_of(b) * N_LAYERS + w.stub.layer][b].push_back(w.stub);
          end
          @(negedge clk);
          in_valid[i] = 1;
          in_data[i] = w;
          @(posedge clk);
          while (!in_ready[i]) @(posedge clk);
          #1 in_valid[i] = 0;
        end
      end
    end
  end

  always @(negedge clk) out_ready = NO'($urandom);

  always @(posedge clk) begin
    if (rst_n)
      for (int o = 0; o < NO; o++)
        if (out_valid[o / N_LAYERS][o % N_LAYERS] && out_ready[o / N_LAYERS][o % N_LAYERS]) begin
          stub_word_t w;
          w = out_data[o / N_LAYERS][o % N_LAYERS];
          while (cur_bx[o] < NBX && prm_of(cur_bx[o]) != o / N_LAYERS) cur_bx[o]++;
          checks++;
          if (int'(w.bx) != cur_bx[o]) begin
            failures++;
            $display("FAIL out %0d: bx %0d, expected %0d", o, w.bx, cur_bx[o]);
          end else if (w.eoe) begin
            markers++;
            if (exp_stubs[o][cur_bx[o]].size() != 0) begin
              failures++;
              $display("FAIL out %0d bx %0d: marker before all stubs", o, w.bx);
            end
            cur_bx[o]++;
          end else begin
            int f[$];
            f = exp_stubs[o][cur_bx[o]].find_first_index(x) with (x == w.stub);
            if (f.size() == 0) begin
              failures++;
              $display("FAIL out %0d bx %0d: unexpected stub", o, w.bx);
            end else exp_stubs[o][cur_bx[o]].delete(f[0]);
            nstubs++;
          end
        end
  end

  initial begin
    for (int o = 0; o < NO; o++) cur_bx[o] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4000) @(posedge clk);
    checks++;
    if (markers != NBX * N_LAYERS) begin failures++; $display("FAIL %0d markers, expected %0d", markers, NBX * N_LAYERS); end
    for (int o = 0; o < NO; o++)
      for (int b = 0; b < NBX; b++) begin
        checks++;
        if (exp_stubs[o][b].size() != 0) begin failures++; $display("FAIL out %0d bx %0d: stubs missing", o, b); end
      end
    $display("stubs %0d markers %0d", nstubs, markers);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
