// local_to_global: converts the stubs of a road to global coordinates.
//
// Stubs are stored with module-local coordinates (module, strip, z segment).
// Before the fit they are turned into global (phi, z) by a lookup table with
// one entry per layer and module, giving that module's phi and z origin, and
// a per-layer strip pitch in phi and segment pitch in z:
//     phi = phi0[layer][module] + strip * phi_pitch[layer]
//     z   =   z0[layer][module] + zseg  * z_pitch[layer]
// (wrapping COORD_W-bit signed arithmetic).  Because the tables are written
// at run time, geometry and alignment corrections are folded into them.  All
// K_PER_SS stubs of all layers of a road are converted in parallel; the block
// is a valid/ready stage with one cycle of latency and one road per cycle.
// From the paper: the conversion by lookup tables that carry geometry and
// alignment corrections.  The linear form and table layout are this design's
// own.
module local_to_global
  import tt_pkg::*;
#(
  parameter int unsigned N_MOD = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // table loading
  input  logic                        lut_we,
  input  logic [LAYER_W-1:0]          lut_layer,
  input  logic [MOD_W-1:0]            lut_module,
  input  logic signed [COORD_W-1:0]   lut_phi0,
  input  logic signed [COORD_W-1:0]   lut_z0,
  input  logic                        pitch_we,
  input  logic signed [COORD_W-1:0]   pitch_phi,
  input  logic signed [COORD_W-1:0]   pitch_z,
  // roads
  input  logic                        in_valid,
  output logic                        in_ready,
  input  road_local_t                 in_road,
  output logic                        out_valid,
  input  logic                        out_ready,
  output road_global_t                out_road
);
  localparam int MW = $clog2(N_MOD);

  logic signed [COORD_W-1:0] phi0 [N_LAYERS][N_MOD];
  logic signed [COORD_W-1:0] z0   [N_LAYERS][N_MOD];
  logic signed [COORD_W-1:0] dphi [N_LAYERS];
  logic signed [COORD_W-1:0] dz   [N_LAYERS];

  always_ff @(posedge clk) begin
    if (lut_we && lut_layer < LAYER_W'(N_LAYERS) && int'(lut_module) < int'(N_MOD)) begin
      phi0[lut_layer][lut_module[MW-1:0]] <= lut_phi0;
      z0  [lut_layer][lut_module[MW-1:0]] <= lut_z0;
    end
    if (pitch_we && lut_layer < LAYER_W'(N_LAYERS)) begin
      dphi[lut_layer] <= pitch_phi;
      dz  [lut_layer] <= pitch_z;
    end
  end

  road_global_t conv;
  always_comb begin
    conv      = '0;
    conv.road = in_road.road;
    for (int l = 0; l < N_LAYERS; l++) begin
      conv.layer[l].n = in_road.layer[l].n;
      for (int k = 0; k < K_PER_SS; k++) begin
        stub_t st;
        st = in_road.layer[l].s[k].stub;
        conv.layer[l].s[k].idx = in_road.layer[l].s[k].idx;
        conv.layer[l].s[k].phi = COORD_W'(phi0[l][st.module_id[MW-1:0]]
                                 + $signed({1'b0, st.strip}) * dphi[l]);
        conv.layer[l].s[k].z   = COORD_W'(z0[l][st.module_id[MW-1:0]]
                                 + $signed({1'b0, st.zseg}) * dz[l]);
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) out_road <= conv;
  end
endmodule
