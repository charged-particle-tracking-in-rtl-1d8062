// tb_local_to_ssid: random stubs of every layer through local_to_ssid.
// Checks the superstrip id against the concatenated reference form, the
// carried stub, and the one-cycle latency.
module tb_local_to_ssid;
  import tt_pkg::*;
  import tb_geom_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0;
  stub_t in_stub = '0;
  logic out_valid;
  logic [SSID_W-1:0] out_ssid;
  stub_t out_stub;

  local_to_ssid dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    stub_t s;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      s = stub_t'($urandom);
      s.layer = 3'($urandom_range(0, N_LAYERS - 1));
      @(negedge clk);
      in_valid = 1;
      in_stub  = s;
      @(posedge clk);
      #1;
      in_valid = 0;
      checks++;
      if (!out_valid || out_ssid !== ref_ssid(s) || out_stub !== s) begin
        failures++;
        $display("FAIL stub %p ssid %h exp %h v=%0d", s, out_ssid, ref_ssid(s), out_valid);
      end
      @(posedge clk);
      #1;
      checks++;
      if (out_valid) begin
        failures++;
        $display("FAIL valid held");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
