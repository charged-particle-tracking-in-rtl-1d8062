// tb_bx_demux_merge: four input links carry 18 bunch crossings each (random
// stub counts, every crossing closed by a marker) into a board with slot
// index 1 of 3 (two mezzanines per board, time-multiplexing factor 6).  With
// random back-pressure on the outputs, every output port must carry exactly
// the stubs of the crossings owned by the board that port leads to (rotated
// by the board's own index), crossing by crossing in order, each closed by a
// single marker.  Also counts stubs that took the local port and the mesh
// ports, and that both happened.
module tb_bx_demux_merge;
  import tt_pkg::*;
  localparam int N_IN = 4, N_PRB = 3, PRMS = 2, TMUX = 6, PRB_ID = 1, NBX = 18;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N_IN-1:0] in_valid = '0, in_ready;
  stub_word_t [N_IN-1:0] in_data = '0;
  logic [N_PRB-1:0] out_valid, out_ready = '1;
  stub_word_t [N_PRB-1:0] out_data;

  bx_demux_merge #(.N_IN(N_IN), .N_PRB(N_PRB), .PRMS_PER_PRB(PRMS), .TMUX(TMUX), .PRB_ID(PRB_ID),
                   .FIFO_DEPTH(4)) dut (.*);

  function automatic int port_of(input int bx);
    return ((bx % TMUX) / PRMS - PRB_ID + N_PRB) % N_PRB;
  endfunction

  stub_t exp_stubs [N_PRB][NBX][$];
  int    cur_bx [N_PRB];
  int    n_local = 0, n_mesh = 0, markers = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar i = 0; i < N_IN; i++) begin : g_drv
    initial begin
      @(posedge rst_n);
      for (int b = 0; b < NBX; b++) begin
        int n;
        n = $urandom_range(0, 3);
        for (int k = 0; k <= n; k++) begin
          stub_word_t w;
          w = '0;
          w.bx = BX_W'(b);
          if (k == n) w.eoe = 1;
          else begin
            w.stub = stub_t'($urandom);
            exp_stubs[port_of(b)][b].push_back(w.stub);
          end
          @(negedge clk);
          in_valid[i] = ($urandom_range(0, 3) != 0);
          while (!in_valid[i]) begin @(negedge clk); in_valid[i] = ($urandom_range(0, 3) != 0); end
          in_data[i] = w;
          @(posedge clk);
          while (!in_ready[i]) @(posedge clk);
          #1 in_valid[i] = 0;
        end
      end
    end
  end

  always @(negedge clk) out_ready = N_PRB'($urandom);

  always @(posedge clk) begin
    if (rst_n)
      for (int p = 0; p < N_PRB; p++)
        if (out_valid[p] && out_ready[p]) begin
          stub_word_t w;
          w = out_data[p];
          // next crossing owned by this port
          while (cur_bx[p] < NBX && port_of(cur_bx[p]) != p) cur_bx[p]++;
          checks++;
          if (int'(w.bx) != cur_bx[p]) begin
            failures++;
            $display("FAIL port %0d: bx %0d, expected %0d", p, w.bx, cur_bx[p]);
          end else if (w.eoe) begin
            markers++;
            if (exp_stubs[p][cur_bx[p]].size() != 0) begin
              failures++;
              $display("FAIL port %0d bx %0d: marker before %0d stubs", p, w.bx, exp_stubs[p][cur_bx[p]].size());
            end
            cur_bx[p]++;
          end else begin
            int f[$];
            f = exp_stubs[p][cur_bx[p]].find_first_index(x) with (x == w.stub);
            if (f.size() == 0) begin
              failures++;
              $display("FAIL port %0d bx %0d: unexpected stub", p, w.bx);
            end else exp_stubs[p][cur_bx[p]].delete(f[0]);
            if (p == 0) n_local++; else n_mesh++;
          end
        end
  end

  initial begin
    for (int p = 0; p < N_PRB; p++) cur_bx[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (markers != NBX) begin failures++; $display("FAIL %0d markers, expected %0d", markers, NBX); end
    checks++;
    if (n_local == 0 || n_mesh == 0) begin failures++; $display("FAIL local %0d mesh %0d", n_local, n_mesh); end
    $display("stubs local %0d mesh %0d", n_local, n_mesh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
