// duplicate_removal: keeps one track out of each group that shares stubs.
//
// Fitting every five- and six-layer combination makes several tracks out of
// one particle.  This stage holds the accepted tracks of the current event
// in MAX_TRK slots.  A new track that passed the chi-square cut is compared
// with every held track at once: two tracks are duplicates when they use the
// same stub (same layer, same organizer index) in at least N_SHARED layers.
//   - no duplicate held: the track takes a free slot (if none is free it is
//     dropped and counted in n_overflow);
//   - duplicates held and the new track fits better than all of them: the
//     duplicates are removed and the new track takes the first of their slots;
//   - otherwise the new track is dropped.
// "Fits better" compares chi2 per degree of freedom, computed without
// division as chi2_a * ndof_b < chi2_b * ndof_a, standing in for the
// chi-square probability.  Tracks that failed the cut are dropped on entry.
// One track is taken per cycle.  On `flush` (end of event) the held tracks
// leave in slot order on a valid/ready port, one per cycle, then `done`
// pulses and the slots are empty for the next event; no track is taken while
// flushing.
// From the paper: removal by number of shared stubs (one of the two methods
// it tested), keeping the track with the best fit.  N_SHARED, MAX_TRK and the
// per-dof comparison are this design's own.
module duplicate_removal
  import tt_pkg::*;
#(
  parameter int unsigned MAX_TRK  = 32,
  parameter int unsigned N_SHARED = 3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  track_t        in_track,
  input  logic          flush,
  output logic          out_valid,
  input  logic          out_ready,
  output track_t        out_track,
  output logic          done,
  output logic [15:0]   n_removed,
  output logic [15:0]   n_overflow
);
  localparam int TW = $clog2(MAX_TRK);

  track_t              kept [MAX_TRK];
  logic [MAX_TRK-1:0]  kv;
  logic                flushing;

  assign in_ready = !flushing;

  function automatic int unsigned shared_stubs(input track_t a, input track_t b);
    int unsigned n;
    n = 0;
    for (int l = 0; l < N_LAYERS; l++)
      if (a.present[l] && b.present[l] && a.idx[l] == b.idx[l]) n++;
    return n;
  endfunction

  function automatic logic better(input track_t a, input track_t b);
    return (64'(a.chi2) * 64'(ndof(b.ctype))) < (64'(b.chi2) * 64'(ndof(a.ctype)));
  endfunction

  logic [MAX_TRK-1:0] conflict;
  logic               all_better, any_conflict, any_free;
  logic [TW-1:0]      first_conf, first_free;
  always_comb begin
    all_better   = 1'b1;
    any_conflict = 1'b0;
    any_free     = 1'b0;
    first_conf   = '0;
    first_free   = '0;
    for (int j = 0; j < int'(MAX_TRK); j++) begin
      conflict[j] = kv[j] && (shared_stubs(in_track, kept[j]) >= N_SHARED);
      if (conflict[j]) begin
        if (!any_conflict) first_conf = TW'(j);
        any_conflict = 1'b1;
        if (!better(in_track, kept[j])) all_better = 1'b0;
      end
      if (!kv[j] && !any_free) begin
        any_free   = 1'b1;
        first_free = TW'(j);
      end
    end
  end

  // Flush: first held slot
  logic          any_held;
  logic [TW-1:0] first_held;
  always_comb begin
    any_held   = 1'b0;
    first_held = '0;
    for (int j = 0; j < int'(MAX_TRK); j++)
      if (kv[j] && !any_held) begin
        any_held   = 1'b1;
        first_held = TW'(j);
      end
  end

  assign out_valid = flushing && any_held;
  assign out_track = kept[first_held];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kv         <= '0;
      flushing   <= 1'b0;
      done       <= 1'b0;
      n_removed  <= '0;
      n_overflow <= '0;
    end else begin
      done <= 1'b0;
      if (flushing) begin
        if (!any_held) begin
          flushing <= 1'b0;
          done     <= 1'b1;
        end else if (out_ready) begin
          kv[first_held] <= 1'b0;
        end
      end else begin
        if (flush) flushing <= 1'b1;
        if (in_valid && in_track.pass) begin
          if (!any_conflict) begin
            if (any_free) kv[first_free] <= 1'b1;
            else          n_overflow <= n_overflow + 1'b1;
          end else if (all_better) begin
            kv            <= kv & ~conflict;
            kv[first_conf] <= 1'b1;
            n_removed     <= n_removed + 16'($countones(conflict));
          end else begin
            n_removed <= n_removed + 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!flushing && in_valid && in_track.pass) begin
      if (!any_conflict && any_free) kept[first_free] <= in_track;
      else if (any_conflict && all_better) kept[first_conf] <= in_track;
    end
  end
endmodule
