// tb_data_organizer: stores random stubs on all layers (superstrip ids drawn
// from a small set so that several stubs share a superstrip), then looks up
// random superstrip lists.  The expected answer is found here by scanning the
// stubs written so far: the first K_PER_SS matches in arrival order, their
// count, and the truncation flag.  Also checks one lookup per cycle, layer
// overflow counting, and that clear empties the organizer.
module tb_data_organizer;
  import tt_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0;
  logic [N_LAYERS-1:0] wr_valid = '0;
  logic [N_LAYERS-1:0][SSID_W-1:0] wr_ssid = '0;
  stub_t [N_LAYERS-1:0] wr_stub = '0;
  logic rd_valid = 0, rd_ready, out_valid, out_ready = 1;
  logic [ROAD_W-1:0] rd_road = '0;
  logic [N_LAYERS-1:0][SSID_W-1:0] rd_ssid = '0;
  road_local_t out_road;
  logic [15:0] n_overflow;

  data_organizer #(.DEPTH(DEPTH)) dut (.*);

  logic [SSID_W-1:0] m_ssid [N_LAYERS][$];
  stub_t             m_stub [N_LAYERS][$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic road_local_t expect_road(input int road, input logic [N_LAYERS-1:0][SSID_W-1:0] q);
    road_local_t r;
    r = '0;
    r.road = ROAD_W'(road);
    for (int l = 0; l < N_LAYERS; l++) begin
      int k;
      k = 0;
      foreach (m_ssid[l][e])
        if (e < DEPTH && m_ssid[l][e] == q[l]) begin
          if (k < K_PER_SS) begin
            r.layer[l].s[k].idx  = STUB_IDX_W'(e);
            r.layer[l].s[k].stub = m_stub[l][e];
          end else r.layer[l].trunc = 1;
          k++;
        end
      r.layer[l].n = KCNT_W'(k > K_PER_SS ? K_PER_SS : k);
    end
    return r;
  endfunction

  initial begin
    road_local_t exp_q[$];
    int nw;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 3; ev++) begin
      for (int l = 0; l < N_LAYERS; l++) begin m_ssid[l] = {}; m_stub[l] = {}; end
      nw = (ev == 2) ? 70 : 40;   // event 2 overflows every layer
      for (int n = 0; n < nw; n++) begin
        @(negedge clk);
        for (int l = 0; l < N_LAYERS; l++) begin
          wr_valid[l] = ($urandom_range(0, 3) != 0) || ev == 2;
          wr_ssid[l]  = SSID_W'($urandom_range(0, 7));
          wr_stub[l]  = stub_t'($urandom);
          if (wr_valid[l]) begin m_ssid[l].push_back(wr_ssid[l]); m_stub[l].push_back(wr_stub[l]); end
        end
      end
      @(negedge clk) wr_valid = '0;
      // back-to-back lookups
      for (int n = 0; n < 40; n++) begin
        @(negedge clk);
        rd_valid = 1;
        rd_road  = ROAD_W'(n);
        for (int l = 0; l < N_LAYERS; l++) rd_ssid[l] = SSID_W'($urandom_range(0, 8));
        exp_q.push_back(expect_road(n, rd_ssid));
        @(posedge clk);
        #1;
        checks++;
        if (!out_valid || out_road !== exp_q.pop_front()) begin
          failures++;
          $display("FAIL ev %0d lookup %0d", ev, n);
        end
      end
      @(negedge clk) rd_valid = 0;
      if (ev == 2) begin
        int ov;
        ov = 0;
        for (int l = 0; l < N_LAYERS; l++) ov += (m_ssid[l].size() > DEPTH) ? m_ssid[l].size() - DEPTH : 0;
        checks++;
        if (int'(n_overflow) != ov) begin failures++; $display("FAIL overflow %0d exp %0d", n_overflow, ov); end
      end
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      rd_valid = 1;
      for (int l = 0; l < N_LAYERS; l++) rd_ssid[l] = '0;
      @(posedge clk);
      #1;
      checks++;
      for (int l = 0; l < N_LAYERS; l++)
        if (out_road.layer[l].n != 0) begin failures++; $display("FAIL clear"); break; end
      @(negedge clk) rd_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
