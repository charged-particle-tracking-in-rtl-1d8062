// am_pram: associative memory (pattern RAM) for one mezzanine.
//
// The pattern bank holds NPAT patterns, each a list of one superstrip id per
// layer.  While an event is loaded, every layer presents at most one
// superstrip id per cycle (six buses in parallel).  Every pattern compares
// the id on each layer bus with its own id for that layer at once, and sets
// a per-layer hit flag on a match, so loading costs one cycle per stub with
// no search.  A pattern fires when at least THRESH of its N_LAYERS layers are
// hit (5 of 6 by default, so a track that missed one layer still finds its
// road).  After `start`, fired patterns leave as roads, one per cycle on a
// valid/ready port, in bank address order: the order in which the bank was
// loaded sets the order of the roads.  At most MAX_ROADS roads leave per
// event; the rest are dropped and counted.  `done` rises when readout is
// over and stays high until `clear`, which also drops every hit flag.
//
// Bank loading uses bank_we/bank_addr/bank_layer/bank_ssid; a written pattern
// becomes active.  From the paper: the per-layer parallel match, roads in
// bank order, 1024 patterns in the emulation, the 200-road limit of the
// latency study.  This design's own: the threshold rule as a parameter, the
// interface, and exact (not ternary) superstrip matching.
module am_pram
  import tt_pkg::*;
#(
  parameter int unsigned NPAT      = 1024,
  parameter int unsigned THRESH    = 5,
  parameter int unsigned MAX_ROADS = 200
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // bank loading
  input  logic                                  bank_we,
  input  logic [ROAD_W-1:0]                     bank_addr,
  input  logic [LAYER_W-1:0]                    bank_layer,
  input  logic [SSID_W-1:0]                     bank_ssid,
  // event loading
  input  logic [N_LAYERS-1:0]                   ss_valid,
  input  logic [N_LAYERS-1:0][SSID_W-1:0]       ss,
  input  logic                                  clear,
  input  logic                                  start,
  // road readout
  output logic                                  road_valid,
  input  logic                                  road_ready,
  output logic [ROAD_W-1:0]                     road,
  output logic                                  done,
  output logic [15:0]                           n_roads,
  output logic [15:0]                           n_dropped
);
  logic [N_LAYERS-1:0][SSID_W-1:0] bank [NPAT];
  logic [NPAT-1:0]                 active;
  logic [NPAT-1:0][N_LAYERS-1:0]   hit;
  logic [NPAT-1:0]                 fired, sent;
  logic                            reading;

  always_ff @(posedge clk) begin
    if (bank_we && bank_addr < ROAD_W'(NPAT))
      bank[bank_addr][bank_layer] <= bank_ssid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) active <= '0;
    else if (bank_we && bank_addr < ROAD_W'(NPAT)) active[bank_addr] <= 1'b1;
  end

  // Parallel match of every pattern against every layer bus
  for (genvar p = 0; p < NPAT; p++) begin : g_pat
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) hit[p] <= '0;
      else if (clear) hit[p] <= '0;
      else
        for (int l = 0; l < N_LAYERS; l++)
          if (ss_valid[l] && bank[p][l] == ss[l]) hit[p][l] <= 1'b1;
    end
    assign fired[p] = active[p] && ($countones(hit[p]) >= THRESH);
  end

  // Readout: first fired pattern not yet sent
  logic            found;
  logic [ROAD_W-1:0] first;
  always_comb begin
    found = 1'b0;
    first = '0;
    for (int p = 0; p < int'(NPAT); p++)
      if (!found && fired[p] && !sent[p]) begin
        found = 1'b1;
        first = ROAD_W'(p);
      end
  end

  logic limit;
  assign limit      = (n_roads >= 16'(MAX_ROADS));
  assign road_valid = reading && found && !limit;
  assign road       = first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sent      <= '0;
      reading   <= 1'b0;
      done      <= 1'b0;
      n_roads   <= '0;
      n_dropped <= '0;
    end else if (clear) begin
      sent      <= '0;
      reading   <= 1'b0;
      done      <= 1'b0;
      n_roads   <= '0;
      n_dropped <= '0;
    end else begin
      if (start) reading <= 1'b1;
      if (road_valid && road_ready) begin
        sent[first] <= 1'b1;
        n_roads     <= n_roads + 1'b1;
      end
      if (reading && !done) begin
        if (!found) begin
          reading <= 1'b0;
          done    <= 1'b1;
        end else if (limit) begin
          // count what the road limit throws away, one per cycle
          sent[first] <= 1'b1;
          n_dropped   <= n_dropped + 1'b1;
        end
      end
    end
  end
endmodule
