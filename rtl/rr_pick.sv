// rr_pick: round-robin choice of one request out of N.
//
// Combinational search starting one place after the last grant; `advance`
// moves the priority pointer past the current grant (give it the cycle the
// granted request is actually taken).  `any` says whether a request exists.
module rr_pick #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic                 any,
  output logic [$clog2(N > 1 ? N : 2)-1:0] sel
);
  localparam int W = $clog2(N > 1 ? N : 2);
  logic [W-1:0] last;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 1; k <= int'(N); k++) begin
      int unsigned j;
      j = (int'(last) + k) % N;
      if (!any && req[j]) begin
        any = 1'b1;
        sel = W'(j);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              last <= W'(N - 1);
    else if (advance && any) last <= sel;
  end
endmodule
