// tb_geom_pkg: reference formulas shared by the testbenches.
//
// ref_ssid() is the superstrip id written as a bit concatenation (module,
// z bin, superstrip), independent of the arithmetic form used in the RTL.
// fit_coef() gives a set of fit constants for a toy geometry in which a true
// track is a straight line in (layer, phi) and in (layer, z): every
// constraint is the collinearity of three consecutive present layers,
//     (l3-l2)*y1 - (l3-l1)*y2 + (l2-l1)*y3 = 0,
// so a true track has chi2 = 0 in every combination type.  The parameter rows
// give phi and z at the first present layer and their change to the last.
package tb_geom_pkg;
  import tt_pkg::*;

  localparam int S = 1 << FRAC_W;

  function automatic logic [SSID_W-1:0] ref_ssid(input stub_t st);
    int unsigned sh;
    logic [6:0] ss;
    case (st.layer)
      3'd0, 3'd1: sh = 3;
      3'd2, 3'd3: sh = 4;
      default:    sh = 5;
    endcase
    ss = 7'(st.strip >> sh);
    return {st.module_id, st.zseg[3:1], ss};
  endfunction

  // layers used by combination type t (t = N_LAYERS: all)
  function automatic int n_used(input int t);
    return (t == N_LAYERS) ? N_LAYERS : N_LAYERS - 1;
  endfunction

  function automatic int used_layer(input int t, input int i);
    int k;
    k = 0;
    for (int l = 0; l < N_LAYERS; l++)
      if (l != t) begin
        if (k == i) return l;
        k++;
      end
    return 0;
  endfunction

  // Coefficient V[t][row][col]; col = N_COORD is the offset
  function automatic int fit_coef(input int t, input int row, input int col);
    int nu, nc, first, last;
    nu    = n_used(t);
    nc    = nu - 2;              // constraints per view
    first = used_layer(t, 0);
    last  = used_layer(t, nu - 1);
    if (col == N_COORD) return 0;
    if (row < N_PAR) begin
      case (row)
        0: return (col == 2*first) ? S : 0;
        1: return (col == 2*last) ? S : (col == 2*first) ? -S : 0;
        2: return (col == 2*first+1) ? S : 0;
        default: return (col == 2*last+1) ? S : (col == 2*first+1) ? -S : 0;
      endcase
    end else begin
      int c, view, l1, l2, l3;
      c = row - N_PAR;
      view = (c < nc) ? 0 : 1;
      if (c >= nc) c -= nc;
      if (c >= nc) return 0;     // unused row of a five-layer set
      l1 = used_layer(t, c);
      l2 = used_layer(t, c + 1);
      l3 = used_layer(t, c + 2);
      if (col == 2*l1 + view) return  (l3 - l2) * S;
      if (col == 2*l2 + view) return -(l3 - l1) * S;
      if (col == 2*l3 + view) return  (l2 - l1) * S;
      return 0;
    end
  endfunction
endpackage
