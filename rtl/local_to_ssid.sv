// local_to_ssid: superstrip identifier of a stub, for the associative memory.
//
// Each layer is cut into superstrips: along phi a superstrip is a run of
// 2**SS_SHIFT[layer] strips, and along z each module is cut into NZ bins.
// The widths grow from the inner to the outer layers ("fountain" layout),
// which the shifts express.  The identifier packs module, z bin and
// superstrip number:
//     ssid = (module * NZ + zbin) * 2**SS_BITS + (strip >> SS_SHIFT[layer]),
//     zbin = zseg * NZ / 2**ZSEG_W.
// One stub in, one identifier out, one cycle later (registered, no stall);
// the stub is carried along.  From the paper: superstrips along phi that
// widen outwards, nz = 8 divisions in z (baseline sf1nz8).  The widths in
// strips and the identifier layout are this design's own; the paper gives
// widths only as a plot.  The Gray-coded numbering with don't-care bits
// (mx8 merging) is not implemented.
module local_to_ssid
  import tt_pkg::*;
#(
  parameter int unsigned NZ = 8,
  parameter int unsigned SS_SHIFT [N_LAYERS] = '{3, 3, 4, 4, 5, 5}
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  stub_t               in_stub,
  output logic                out_valid,
  output logic [SSID_W-1:0]   out_ssid,
  output stub_t               out_stub
);
  localparam int SS_BITS = STRIP_W - 3;  // room for the narrowest superstrip (8 strips)
  localparam int ZB_W    = $clog2(NZ > 1 ? NZ : 2);

  logic [SSID_W-1:0] ssid;
  always_comb begin
    logic [STRIP_W-1:0] ss;
    logic [ZB_W-1:0]    zbin;
    ss   = in_stub.strip >> SS_SHIFT[in_stub.layer < N_LAYERS ? in_stub.layer : 0];
    zbin = ZB_W'((int'(in_stub.zseg) * NZ) >> ZSEG_W);
    ssid = SSID_W'(((int'(in_stub.module_id) * NZ + int'(zbin)) << SS_BITS) + int'(ss));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ssid  <= '0;
      out_stub  <= '0;
    end else begin
      out_valid <= in_valid;
      out_ssid  <= ssid;
      out_stub  <= in_stub;
    end
  end
endmodule
