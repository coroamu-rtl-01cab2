// tb_far_resp_delayer: every response must come out exactly `latency`
// cycles after it entered, in order and unchanged, for latencies 300 and
// 3000 (the paper's range) and for a burst of back-to-back responses.
module tb_far_resp_delayer;
  import coroamu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  logic [11:0] latency; logic in_valid, in_ready, out_valid, out_ready;
  mem_resp_t in_resp, out_resp;
  far_resp_delayer #(.DEPTH(64)) dut (.*);

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  longint t_in[$]; mem_resp_t d_in[$];
  int n_out = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin t_in.push_back(cyc); d_in.push_back(in_resp); end
    if (out_valid && out_ready) begin
      longint t; mem_resp_t d;
      t = t_in.pop_front(); d = d_in.pop_front();
      checks++;
      if (cyc - t != longint'(latency) || out_resp != d) begin
        failures++; $display("FAIL: delay %0d expected %0d", cyc - t, latency);
      end
      n_out++;
    end
  end

  initial begin
    #1000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(int lat, int n, int gap);
    latency = 12'(lat);
    for (int i = 0; i < n; i++) begin
      in_valid = 1; in_resp.tag = 6'(i); in_resp.write = i[0]; in_resp.rdata = {16{$urandom}};
      @(negedge clk); in_valid = 0;
      repeat (gap) @(negedge clk);
    end
    repeat (lat + 10) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; out_ready = 1; in_resp = '0; latency = 300;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    run(300, 10, 7);
    run(300, 64, 0);       // burst that fills the FIFO
    run(3000, 5, 100);
    run(600, 20, 3);
    check(n_out == 99, "all responses delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
