// sync_fifo: single-clock FIFO with valid/ready on both sides.
//
// Used wherever the design buffers a stream: at each input link, at each
// output of the layer sorter (the FIFO between the PRB and its PRMs) and at
// each track-fitter output.  Storage is a register array with read and write
// pointers one bit wider than the address, so full and empty are exact.
// The head word is shown combinationally (first-word fall-through): out_valid
// rises the cycle after a write into an empty FIFO.  Depth must be a power of
// two.  Reset empties it.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [AW:0] wp, rp;

  assign count     = wp - rp;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (wp != rp);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("sync_fifo: DEPTH must be a power of two");
endmodule
