// data_organizer: stores one event's stubs and hands them out road by road.
//
// Each layer has a stub memory of DEPTH entries.  While an event is loaded,
// each layer can write one stub per cycle together with its superstrip id;
// a stub's position in its layer memory is its index, which travels with it
// to the fit and to duplicate removal.  A full layer drops further stubs and
// counts them.  For a road, the organizer compares the road's superstrip id
// with every stored id of the same layer at once and returns, for every
// layer, the first K_PER_SS matching stubs in arrival order with their count
// (`trunc` marks a layer that had more).  Lookup is a valid/ready stage with
// one cycle of latency and one road per cycle.  `clear` empties all layers
// for the next event.
//
// From the paper: the organizer holds the local stubs of the event and
// returns the stubs of each road's superstrips with low latency.  The paper
// does this in block RAM with newer read/write features it does not detail;
// the parallel compare over a register memory here is this design's own,
// as are DEPTH and K_PER_SS.
module data_organizer
  import tt_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clear,
  // event loading, one port per layer
  input  logic [N_LAYERS-1:0]               wr_valid,
  input  logic [N_LAYERS-1:0][SSID_W-1:0]   wr_ssid,
  input  stub_t [N_LAYERS-1:0]              wr_stub,
  // road lookup
  input  logic                              rd_valid,
  output logic                              rd_ready,
  input  logic [ROAD_W-1:0]                 rd_road,
  input  logic [N_LAYERS-1:0][SSID_W-1:0]   rd_ssid,
  output logic                              out_valid,
  input  logic                              out_ready,
  output road_local_t                       out_road,
  output logic [15:0]                       n_overflow
);
  localparam int IW = $clog2(DEPTH);

  logic  [SSID_W-1:0] mem_ssid [N_LAYERS][DEPTH];
  stub_t              mem_stub [N_LAYERS][DEPTH];
  logic  [IW:0]       cnt [N_LAYERS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LAYERS; l++) cnt[l] <= '0;
      n_overflow <= '0;
    end else if (clear) begin
      for (int l = 0; l < N_LAYERS; l++) cnt[l] <= '0;
      n_overflow <= '0;
    end else begin
      logic [N_LAYERS-1:0] ovf;
      for (int l = 0; l < N_LAYERS; l++) begin
        ovf[l] = wr_valid[l] && cnt[l] == (IW+1)'(DEPTH);
        if (wr_valid[l] && !ovf[l]) cnt[l] <= cnt[l] + 1'b1;
      end
      n_overflow <= n_overflow + 16'($countones(ovf));
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < N_LAYERS; l++)
      if (wr_valid[l] && cnt[l] < (IW+1)'(DEPTH)) begin
        mem_ssid[l][cnt[l][IW-1:0]] <= wr_ssid[l];
        mem_stub[l][cnt[l][IW-1:0]] <= wr_stub[l];
      end
  end

  // Parallel compare and first-K extraction
  road_local_t found;
  always_comb begin
    found      = '0;
    found.road = rd_road;
    for (int l = 0; l < N_LAYERS; l++) begin
      int unsigned k;
      k = 0;
      for (int e = 0; e < int'(DEPTH); e++) begin
        if ((IW+1)'(e) < cnt[l] && mem_ssid[l][e] == rd_ssid[l]) begin
          if (k < K_PER_SS) begin
            found.layer[l].s[k].idx  = STUB_IDX_W'(e);
            found.layer[l].s[k].stub = mem_stub[l][e];
            k++;
          end else begin
            found.layer[l].trunc = 1'b1;
          end
        end
      end
      found.layer[l].n = KCNT_W'(k);
    end
  end

  assign rd_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (rd_ready) out_valid <= rd_valid;
  end

  always_ff @(posedge clk) begin
    if (rd_ready && rd_valid) out_road <= found;
  end
endmodule
