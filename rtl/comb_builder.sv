// comb_builder: enumerates the stub combinations of a road.
//
// A road brings up to K_PER_SS stubs in each of the six layers.  The fit
// takes exactly one stub per layer, so every choice of one stub per layer is
// a candidate.  To keep tracks that lost a stub, combinations that leave out
// one layer are formed too.  The builder walks the seven layer sets in a
// fixed order: all six layers first (type 6), then the sets without layer
// 0, 1, ... 5 (types 0..5).  A set is used when every layer in it has at
// least one stub.  Within a set, a mixed-radix counter over the stub counts
// of its layers steps through every combination, layer 0 fastest.  The
// number of combinations of a road is therefore
//     prod_l n_l  +  sum_k prod_{l != k} n_l      (products of nonzero n only,
//                                                   a set with an empty layer
//                                                   contributes nothing).
// One combination leaves per cycle on a valid/ready port, and the next road
// is taken in the cycle the last combination of the current one leaves, so
// there is no gap between roads.  A road with no valid set is consumed with
// no output.  From the paper: one stub per layer, five-of-six combinations
// allowed.  The walk order and the rule that five-layer sets are formed also
// when the sixth layer has stubs (which the paper's duplicate count implies)
// are this design's reading.
module comb_builder
  import tt_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  road_global_t  in_road,
  output logic          out_valid,
  input  logic          out_ready,
  output combo_t        out_combo,
  output logic          busy
);
  road_global_t            r;
  logic [2:0]              seq;                  // 0: all six, 1+k: skip layer k
  logic [N_LAYERS-1:0][KCNT_W-1:0] c;

  function automatic logic [2:0] cfg_of(input logic [2:0] q);
    return (q == 3'd0) ? 3'(N_LAYERS) : q - 3'd1;
  endfunction

  function automatic logic cfg_ok(input road_global_t rd, input logic [2:0] cfg);
    logic ok;
    ok = 1'b1;
    for (int l = 0; l < N_LAYERS; l++)
      if (3'(l) != cfg && rd.layer[l].n == '0) ok = 1'b0;
    return ok;
  endfunction

  // First usable set at or after position `from`
  function automatic logic [3:0] next_seq(input road_global_t rd, input int from);
    logic [3:0] res;
    res = 4'd8;  // none
    for (int q = N_LAYERS; q >= 0; q--)
      if (q >= from && cfg_ok(rd, cfg_of(3'(q)))) res = 4'(q);
    return res;
  endfunction

  // Next counter value and whether the counter wraps
  logic [N_LAYERS-1:0][KCNT_W-1:0] c_next;
  logic                            wrap;
  always_comb begin
    logic carry;
    logic [2:0] cfg;
    cfg    = cfg_of(seq);
    c_next = c;
    carry  = 1'b1;
    for (int l = 0; l < N_LAYERS; l++) begin
      if (carry && 3'(l) != cfg) begin
        if (c[l] + 1'b1 >= r.layer[l].n) c_next[l] = '0;
        else begin
          c_next[l] = c[l] + 1'b1;
          carry     = 1'b0;
        end
      end
    end
    wrap = carry;
  end

  logic [3:0] seq_after, seq_first;
  assign seq_after = next_seq(r, int'(seq) + 1);
  assign seq_first = next_seq(in_road, 0);

  logic last;
  assign last     = busy && wrap && seq_after[3];
  assign in_ready = !busy || (out_ready && last);

  always_comb begin
    logic [2:0] cfg;
    cfg             = cfg_of(seq);
    out_valid       = busy;
    out_combo       = '0;
    out_combo.road  = r.road;
    out_combo.ctype = cfg;
    for (int l = 0; l < N_LAYERS; l++)
      if (3'(l) != cfg) begin
        out_combo.present[l] = 1'b1;
        out_combo.st[l]      = r.layer[l].s[c[l][$clog2(K_PER_SS)-1:0]];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      seq  <= '0;
      c    <= '0;
      r    <= '0;
    end else begin
      if (busy && out_ready && !last) begin
        if (wrap) begin
          seq <= seq_after[2:0];
          c   <= '0;
        end else begin
          c   <= c_next;
        end
      end
      if (in_valid && in_ready) begin
        r    <= in_road;
        c    <= '0;
        seq  <= seq_first[2:0];
        busy <= !seq_first[3];
      end else if (busy && out_ready && last) begin
        busy <= 1'b0;
      end
    end
  end
endmodule
