// tb_road_to_ssid: loads a reduced bank and reads random roads under random
// output back-pressure.  Checks every returned superstrip list against the
// bank written here, that roads keep their order, and one road per cycle
// while the output is always ready.
module tb_road_to_ssid;
  import tt_pkg::*;
  localparam int NPAT = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic bank_we = 0;
  logic [ROAD_W-1:0] bank_addr = '0;
  logic [LAYER_W-1:0] bank_layer = '0;
  logic [SSID_W-1:0] bank_ssid = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [ROAD_W-1:0] in_road = '0, out_road;
  logic [N_LAYERS-1:0][SSID_W-1:0] out_ssid;

  road_to_ssid #(.NPAT(NPAT)) dut (.*);

  logic [N_LAYERS-1:0][SSID_W-1:0] bank [NPAT];
  int q[$];
  int sent = 0, got = 0, first_c = -1, last_c = -1, cyc = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid && out_ready) begin
      int exp_r;
      exp_r = q.pop_front();
      checks++;
      if (int'(out_road) != exp_r || out_ssid != bank[exp_r]) begin
        failures++;
        $display("FAIL road %0d exp %0d", out_road, exp_r);
      end
      got++;
      if (first_c < 0) first_c = cyc;
      last_c = cyc;
    end
    if (rst_n && in_valid && in_ready) q.push_back(int'(in_road));
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPAT; p++)
      for (int l = 0; l < N_LAYERS; l++) begin
        @(negedge clk);
        bank[p][l] = SSID_W'($urandom);
        bank_we = 1; bank_addr = ROAD_W'(p); bank_layer = LAYER_W'(l); bank_ssid = bank[p][l];
      end
    @(negedge clk) bank_we = 0;
    // phase 1: always ready, continuous roads
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_road  = ROAD_W'($urandom_range(0, NPAT - 1));
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (got != 50 || last_c - first_c != 49) begin
      failures++;
      $display("FAIL rate: %0d roads in %0d cycles", got, last_c - first_c + 1);
    end
    // phase 2: random back-pressure
    fork
      forever begin @(negedge clk) out_ready = ($urandom_range(0, 2) != 0); end
    join_none
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_road  = ROAD_W'($urandom_range(0, NPAT - 1));
      @(posedge clk);
      while (in_valid && !in_ready) @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d roads lost", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
