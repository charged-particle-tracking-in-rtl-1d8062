// track_fitter: linearized track fit and chi-square of one stub combination.
//
// Near a road, the track parameters and the constraints that a true track
// satisfies are linear in the stub coordinates.  With x the vector of the
// twelve coordinates of a combination (phi and z of layers 0..5, zero for a
// skipped layer), the fitter computes, for each row r of a constant matrix,
//     y_r = ( sum_c  V[t][r][c] * x_c ) / 2**FRAC_W  +  C[t][r]
// where t is the combination type (which layer is skipped, if any).  Rows
// 0..N_PAR-1 are the track parameters (1/pt, phi0, cot(theta), z0); the
// remaining N_CONS rows are the constraints F_i, and
//     chi2 = sum_i F_i^2.
// A five-layer type uses its own constant set, whose unused constraint rows
// are zero.  The track passes when chi2 <= chi2_cut * ndof (ndof 8 for six
// layers, 6 for five).  Constants are written at run time through the coef_*
// port (column N_COORD writes the offset C), as they come from a principal
// component analysis of simulated tracks.
//
// Four pipeline stages, one combination per cycle: multiply, row sums,
// squares, chi2 and cut.  A combination taken at edge n leaves at edge n+4.
// The whole pipeline stalls when the output is not taken.  From the paper:
// the linearized constraint and parameter evaluation by matrix
// multiplication, DSP-style pipelining, constants in distributed RAM.  The
// widths, the fixed-point scaling and the cut form are this design's own.
module track_fitter
  import tt_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // constant loading
  input  logic                        coef_we,
  input  logic [2:0]                  coef_ctype,
  input  logic [3:0]                  coef_row,
  input  logic [3:0]                  coef_col,
  input  logic signed [COEF_W-1:0]    coef_val,
  input  logic [CHI_W-1:0]            chi2_cut,
  // combinations
  input  logic                        in_valid,
  output logic                        in_ready,
  input  combo_t                      in_combo,
  output logic                        out_valid,
  input  logic                        out_ready,
  output track_t                      out_track,
  output logic                        busy
);
  localparam int NR    = N_PAR + N_CONS;
  localparam int PROD_W = COEF_W + COORD_W;
  localparam int ACC_W  = PROD_W + 4;
  localparam int SQ_W   = 2 * PAR_W;

  logic signed [COEF_W-1:0] V [N_CTYPE][NR][N_COORD];
  logic signed [COEF_W-1:0] C [N_CTYPE][NR];

  always_ff @(posedge clk) begin
    if (coef_we && coef_ctype < 3'(N_CTYPE) && coef_row < 4'(NR)) begin
      if (coef_col < 4'(N_COORD)) V[coef_ctype][coef_row][coef_col] <= coef_val;
      else                        C[coef_ctype][coef_row]           <= coef_val;
    end
  end

  // Sideband that travels with a combination
  typedef struct packed {
    logic [ROAD_W-1:0]                   road;
    logic [2:0]                          ctype;
    logic [N_LAYERS-1:0]                 present;
    logic [N_LAYERS-1:0][STUB_IDX_W-1:0] idx;
  } side_t;

  logic  [3:0] v;
  side_t       sb [4];
  logic  adv;
  assign adv      = !v[3] || out_ready;
  assign in_ready = adv;

  // Stage 1: products
  logic signed [PROD_W-1:0] prod [NR][N_COORD];
  logic signed [COEF_W-1:0] off1 [NR];
  // Stage 2: rows
  logic signed [PAR_W-1:0]  row2 [NR];
  // Stage 3: squares
  logic signed [PAR_W-1:0]  par3 [N_PAR];
  logic        [SQ_W-1:0]   sq3  [N_CONS];
  // Stage 4: output
  track_t t4;

  side_t sb_in;
  logic signed [COORD_W-1:0] x [N_COORD];
  always_comb begin
    sb_in.road    = in_combo.road;
    sb_in.ctype   = in_combo.ctype;
    sb_in.present = in_combo.present;
    for (int l = 0; l < N_LAYERS; l++) begin
      sb_in.idx[l]  = in_combo.st[l].idx;
      x[2*l]        = in_combo.present[l] ? in_combo.st[l].phi : '0;
      x[2*l+1]      = in_combo.present[l] ? in_combo.st[l].z   : '0;
    end
  end

  function automatic logic signed [PAR_W-1:0] sat_par(input logic signed [ACC_W-1:0] a);
    if (a > ACC_W'((1 <<< (PAR_W-1)) - 1))   return {1'b0, {(PAR_W-1){1'b1}}};
    if (a < -ACC_W'(1 <<< (PAR_W-1)))        return {1'b1, {(PAR_W-1){1'b0}}};
    return a[PAR_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else if (adv) v <= {v[2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      // stage 1
      sb[0] <= sb_in;
      for (int r = 0; r < NR; r++) begin
        off1[r] <= C[in_combo.ctype < 3'(N_CTYPE) ? in_combo.ctype : 3'd0][r];
        for (int c = 0; c < N_COORD; c++)
          prod[r][c] <= V[in_combo.ctype < 3'(N_CTYPE) ? in_combo.ctype : 3'd0][r][c] * x[c];
      end
      // stage 2
      sb[1] <= sb[0];
      for (int r = 0; r < NR; r++) begin
        logic signed [ACC_W-1:0] acc;
        acc = '0;
        for (int c = 0; c < N_COORD; c++) acc += ACC_W'(prod[r][c]);
        acc = (acc >>> FRAC_W) + ACC_W'(off1[r]);
        row2[r] <= sat_par(acc);
      end
      // stage 3
      sb[2] <= sb[1];
      for (int p = 0; p < N_PAR; p++) par3[p] <= row2[p];
      for (int i = 0; i < N_CONS; i++) sq3[i] <= SQ_W'(row2[N_PAR+i] * row2[N_PAR+i]);
      // stage 4
      sb[3] <= sb[2];
      begin
        logic [SQ_W+3:0] sum;
        logic [CHI_W-1:0] chi;
        sum = '0;
        for (int i = 0; i < N_CONS; i++) sum += (SQ_W+4)'(sq3[i]);
        chi = (sum > (SQ_W+4)'({CHI_W{1'b1}})) ? '1 : CHI_W'(sum);
        t4.road    <= sb[2].road;
        t4.ctype   <= sb[2].ctype;
        t4.present <= sb[2].present;
        t4.idx     <= sb[2].idx;
        for (int p = 0; p < N_PAR; p++) t4.par[p] <= par3[p];
        t4.chi2    <= chi;
        t4.pass    <= (64'(chi) <= 64'(chi2_cut) * 64'(ndof(sb[2].ctype)));
      end
    end
  end

  assign out_valid = v[3];
  assign out_track = t4;
  assign busy      = |v;
endmodule
