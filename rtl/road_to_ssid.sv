// road_to_ssid: turns a road (pattern address) back into its superstrips.
//
// The associative memory reports only which pattern fired; the data
// organizer needs the superstrip id of that pattern in every layer to fetch
// the stubs.  This block keeps its own copy of the pattern bank, written by
// the same bank-load port as the associative memory, and reads it with one
// cycle of latency.  It is a valid/ready pipeline stage: in_ready is high
// when the output register is empty or being taken, so one road passes per
// cycle.  From the paper: the block and its place between the pattern
// memory and the data organizer.  The separate copy of the bank and the
// handshake are this design's own.
module road_to_ssid
  import tt_pkg::*;
#(
  parameter int unsigned NPAT = 1024
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              bank_we,
  input  logic [ROAD_W-1:0]                 bank_addr,
  input  logic [LAYER_W-1:0]                bank_layer,
  input  logic [SSID_W-1:0]                 bank_ssid,
  input  logic                              in_valid,
  output logic                              in_ready,
  input  logic [ROAD_W-1:0]                 in_road,
  output logic                              out_valid,
  input  logic                              out_ready,
  output logic [ROAD_W-1:0]                 out_road,
  output logic [N_LAYERS-1:0][SSID_W-1:0]   out_ssid
);
  localparam int AW = $clog2(NPAT);
  logic [N_LAYERS-1:0][SSID_W-1:0] bank [NPAT];

  always_ff @(posedge clk) begin
    if (bank_we && bank_addr < ROAD_W'(NPAT) && bank_layer < LAYER_W'(N_LAYERS))
      bank[bank_addr[AW-1:0]][bank_layer] <= bank_ssid;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) begin
      out_road <= in_road;
      out_ssid <= bank[in_road[AW-1:0]];
    end
  end
endmodule
