// mesh_link: behavioural model of one full-mesh backplane lane.
//
// Kind: behavioural model.  In hardware a lane is a multi-gigabit
// transmitter, a backplane trace pair and a receiver with word alignment; none
// of that is described by the paper beyond its existence and its line rate.
// This model stands in for it so that boards can be wired together: it
// delivers the stub words it is given, in order and unchanged, LATENCY clock
// cycles later, one word per cycle, with valid/ready flow control (the whole
// pipeline holds while the receiver is not ready).  It is synthesizable, but
// it is not a model of the serializer, the line code or the link's real
// latency.
module mesh_link
  import tt_pkg::*;
#(
  parameter int unsigned LATENCY = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  stub_word_t  in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output stub_word_t  out_data
);
  logic       [LATENCY-1:0] v;
  stub_word_t               d [LATENCY];
  logic adv;
  assign adv       = !v[LATENCY-1] || out_ready;
  assign in_ready  = adv;
  assign out_valid = v[LATENCY-1];
  assign out_data  = d[LATENCY-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   v <= '0;
    else if (adv) v <= {v[LATENCY-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      d[0] <= in_data;
      for (int i = 1; i < int'(LATENCY); i++) d[i] <= d[i-1];
    end
  end

  initial assert (LATENCY >= 2) else $error("mesh_link: LATENCY must be at least 2");
endmodule
