// tb_mesh_link: checks the backplane lane model.  Random stub words go in
// with random gaps and come out against random back-pressure; every word
// must come out once, unchanged and in order, and while the receiver is
// always ready (first phase) each word must leave exactly LATENCY cycles
// after it entered.  Both sides are driven and sampled at the rising edge
// (non-blocking drive), so the handshake seen is that of the cycle ending.
module tb_mesh_link;
  import tt_pkg::*;
  localparam int LAT = 4, NW = 600;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  stub_word_t in_data = '0, out_data;

  mesh_link #(.LATENCY(LAT)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  stub_word_t exp_q [$];
  int         t_q [$];
  int cyc = 0, sent = 0, rcvd = 0, lat_checked = 0;
  bit phase2 = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (in_valid && in_ready) begin
      exp_q.push_back(in_data); t_q.push_back(cyc); sent++;
    end
    if (out_valid && out_ready) begin
      stub_word_t e;
      int t;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL word out with nothing sent");
      end else begin
        e = exp_q.pop_front(); t = t_q.pop_front();
        if (out_data != e) begin failures++; $display("FAIL word %0d corrupted", rcvd); end
        if (!phase2) begin
          checks++; lat_checked++;
          if (cyc - t != LAT) begin failures++; $display("FAIL latency %0d", cyc - t); end
        end
      end
      rcvd++;
    end
    if (!in_valid || in_ready) begin
      if (sent < NW && $urandom_range(0, 3) != 0) begin
        stub_word_t w;
        w = stub_word_t'({$urandom, $urandom});
        in_valid <= 1'b1; in_data <= w;
      end else in_valid <= 1'b0;
    end
    if (sent > NW / 2) phase2 = 1;
    out_ready <= phase2 ? ($urandom_range(0, 2) != 0) : 1'b1;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rcvd == NW);
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || out_valid) begin failures++; $display("FAIL words left over"); end
    $display("words %0d, latency checked on %0d", rcvd, lat_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
