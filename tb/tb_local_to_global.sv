// tb_local_to_global: loads random module origins and pitches, converts
// random roads and compares every stub with phi0 + strip*dphi and
// z0 + zseg*dz computed here; checks one-cycle latency and that the counts
// and indices pass through.
module tb_local_to_global;
  import tt_pkg::*;
  localparam int N_MOD = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lut_we = 0, pitch_we = 0;
  logic [LAYER_W-1:0] lut_layer = '0;
  logic [MOD_W-1:0] lut_module = '0;
  logic signed [COORD_W-1:0] lut_phi0 = '0, lut_z0 = '0, pitch_phi = '0, pitch_z = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  road_local_t in_road = '0;
  road_global_t out_road;

  local_to_global #(.N_MOD(N_MOD)) dut (.*);

  int phi0 [N_LAYERS][N_MOD], z0 [N_LAYERS][N_MOD], dphi [N_LAYERS], dz [N_LAYERS];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < N_LAYERS; l++) begin
      @(negedge clk);
      dphi[l] = $urandom_range(1, 40) - 20; dz[l] = $urandom_range(1, 100);
      pitch_we = 1; lut_layer = LAYER_W'(l); pitch_phi = COORD_W'(dphi[l]); pitch_z = COORD_W'(dz[l]);
      @(negedge clk) pitch_we = 0;
      for (int m = 0; m < N_MOD; m++) begin
        phi0[l][m] = $urandom_range(0, 60000) - 30000;
        z0[l][m]   = $urandom_range(0, 60000) - 30000;
        lut_we = 1; lut_module = MOD_W'(m); lut_phi0 = COORD_W'(phi0[l][m]); lut_z0 = COORD_W'(z0[l][m]);
        @(negedge clk);
      end
      lut_we = 0;
    end
    for (int n = 0; n < 300; n++) begin
      road_local_t r;
      r = road_local_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                         $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                         $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                         $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      @(negedge clk);
      in_valid = 1; in_road = r;
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid || out_road.road != r.road) begin failures++; $display("FAIL valid/road"); end
      for (int l = 0; l < N_LAYERS; l++) begin
        checks++;
        if (out_road.layer[l].n != r.layer[l].n) begin failures++; $display("FAIL n"); end
        for (int k = 0; k < K_PER_SS; k++) begin
          stub_t s;
          logic [COORD_W-1:0] ep, ez;
          s  = r.layer[l].s[k].stub;
          ep = COORD_W'(phi0[l][s.module_id] + int'(s.strip) * dphi[l]);
          ez = COORD_W'(z0[l][s.module_id] + int'(s.zseg) * dz[l]);
          checks++;
          if (out_road.layer[l].s[k].phi != ep || out_road.layer[l].s[k].z != ez ||
              out_road.layer[l].s[k].idx != r.layer[l].s[k].idx) begin
            failures++;
            $display("FAIL l%0d k%0d phi %0d exp %0d z %0d exp %0d", l, k,
                     out_road.layer[l].s[k].phi, $signed(ep), out_road.layer[l].s[k].z, $signed(ez));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
