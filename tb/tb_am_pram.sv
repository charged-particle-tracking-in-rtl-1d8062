// tb_am_pram: pattern matching and road readout of the associative memory.
// A reduced bank (64 patterns, road limit 10) is loaded with random
// superstrips.  Each event presents chosen patterns on 6, 5 or 4 layers plus
// random noise superstrips; the expected fired set is computed here by
// searching the presented ids.  Checks: the roads, their ascending order, one
// road per cycle, the road limit and the dropped count, and that clear
// forgets the event.
module tb_am_pram;
  import tt_pkg::*;

  localparam int NPAT = 64, THRESH = 5, MAXR = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic bank_we = 0;
  logic [ROAD_W-1:0] bank_addr = '0;
  logic [LAYER_W-1:0] bank_layer = '0;
  logic [SSID_W-1:0] bank_ssid = '0;
  logic [N_LAYERS-1:0] ss_valid = '0;
  logic [N_LAYERS-1:0][SSID_W-1:0] ss = '0;
  logic clear = 0, start = 0;
  logic road_valid, road_ready = 1, done;
  logic [ROAD_W-1:0] road;
  logic [15:0] n_roads, n_dropped;

  am_pram #(.NPAT(NPAT), .THRESH(THRESH), .MAX_ROADS(MAXR)) dut (.*);

  logic [SSID_W-1:0] bank [NPAT][N_LAYERS];
  logic [SSID_W-1:0] sent [N_LAYERS][$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic present(input int l, input logic [SSID_W-1:0] id);
    @(negedge clk);
    ss_valid    = '0;
    ss_valid[l] = 1'b1;
    ss[l]       = id;
    sent[l].push_back(id);
    @(posedge clk);
    #1 ss_valid = '0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPAT; p++)
      for (int l = 0; l < N_LAYERS; l++) begin
        bank[p][l] = SSID_W'($urandom);
        @(negedge clk);
        bank_we = 1; bank_addr = ROAD_W'(p); bank_layer = LAYER_W'(l); bank_ssid = bank[p][l];
        @(posedge clk);
        #1 bank_we = 0;
      end

    for (int ev = 0; ev < 12; ev++) begin
      int ntrk, exp_roads[$], got[$], t0, t1;
      exp_roads = {}; got = {};
      for (int l = 0; l < N_LAYERS; l++) sent[l] = {};
      ntrk = (ev == 11) ? 14 : $urandom_range(0, 7);   // last event exceeds the road limit
      for (int k = 0; k < ntrk; k++) begin
        int p, nl, skip1, skip2;
        p = $urandom_range(0, NPAT - 1);
        nl = $urandom_range(4, 6);
        skip1 = (nl < 6) ? $urandom_range(0, 5) : -1;
        skip2 = (nl < 5) ? (skip1 + 1) % 6 : -1;
        for (int l = 0; l < N_LAYERS; l++)
          if (l != skip1 && l != skip2) present(l, bank[p][l]);
      end
      for (int k = 0; k < 20; k++) present($urandom_range(0, 5), SSID_W'($urandom));
      // several buses at once
      @(negedge clk);
      ss_valid = '1;
      for (int l = 0; l < N_LAYERS; l++) begin
        ss[l] = bank[(ev * 5) % NPAT][l];
        sent[l].push_back(ss[l]);
      end
      @(posedge clk);
      #1 ss_valid = '0;

      // reference
      for (int p = 0; p < NPAT; p++) begin
        int nh;
        nh = 0;
        for (int l = 0; l < N_LAYERS; l++) begin
          bit f;
          f = 0;
          foreach (sent[l][i]) if (sent[l][i] == bank[p][l]) f = 1;
          nh += f;
        end
        if (nh >= THRESH) exp_roads.push_back(p);
      end

      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      t0 = -1; t1 = -1;
      for (int c = 0; c < NPAT + 50 && !done; c++) begin
        road_ready = ($urandom_range(0, 3) != 0) || ev < 6;
        @(posedge clk);
        if (road_valid && road_ready) begin
          got.push_back(int'(road));
          if (t0 < 0) t0 = c;
          t1 = c;
        end
        #1;
      end
      road_ready = 1;
      checks++;
      if (!done) begin failures++; $display("FAIL ev %0d: done not raised", ev); end
      checks++;
      if (got.size() != ((exp_roads.size() > MAXR) ? MAXR : exp_roads.size())) begin
        failures++;
        $display("FAIL ev %0d: %0d roads, expected %0d", ev, got.size(), exp_roads.size());
      end
      foreach (got[i]) begin
        checks++;
        if (i >= exp_roads.size() || got[i] != exp_roads[i]) begin
          failures++;
          $display("FAIL ev %0d: road %0d = %0d", ev, i, got[i]);
        end
      end
      checks++;
      if (int'(n_dropped) != ((exp_roads.size() > MAXR) ? exp_roads.size() - MAXR : 0)) begin
        failures++;
        $display("FAIL ev %0d: dropped %0d", ev, n_dropped);
      end
      if (ev < 6 && got.size() > 1) begin
        checks++;  // one road per cycle while the reader is always ready
        if (t1 - t0 != got.size() - 1) begin
          failures++;
          $display("FAIL ev %0d: %0d roads over %0d cycles", ev, got.size(), t1 - t0 + 1);
        end
      end
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      checks++;
      if (road_valid || done || n_roads != 0) begin failures++; $display("FAIL clear"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
