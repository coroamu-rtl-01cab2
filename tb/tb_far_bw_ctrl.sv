// tb_far_bw_ctrl: measures the rate the bandwidth regulator admits with a
// request always waiting: with rate R bytes/cycle, 64 B requests must pass
// at R/64 per cycle after the initial burst of 128 B (two requests). Then,
// for every rate 1..32 B/cycle, random request and downstream-ready
// patterns are checked cycle by cycle against a separate credit model
// (credit starts at 128, gains R per cycle, capped at 128, a passed 64 B
// request spends 64; a request may pass only with 64 or more).
module tb_far_bw_ctrl;
  import coroamu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  logic [5:0] rate; logic in_valid, in_ready, out_valid, out_ready;
  mem_req_t in_req, out_req;
  far_bw_ctrl #(.BURST_BYTES(128)) dut (.*);
  int passed;
  always @(posedge clk) if (out_valid && out_ready) passed <= passed + 1;

  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic measure(int r, int cycles);
    int expected;
    rate = 6'(r); rst_n = 0; in_valid = 0; repeat (2) @(negedge clk); rst_n = 1;
    passed = 0; in_valid = 1;
    repeat (cycles) @(negedge clk);
    in_valid = 0;
    expected = 2 + (cycles * r) / 64;     // full bucket, then R bytes per cycle
    check(passed >= expected - 1 && passed <= expected, $sformatf("rate %0d: %0d passed, expected %0d", r, passed, expected));
  endtask

  initial begin
    out_ready = 1; in_req = '0; in_req.line = 34'h123; in_req.tag = 6'd5;
    rate = 1; in_valid = 0;
    #1 check(out_req == in_req, "request forwarded unchanged");
    measure(1, 1280);
    measure(8, 800);
    measure(32, 400);
    measure(16, 640);
    // every rate, random traffic, cycle-by-cycle against the credit model
    for (int r = 1; r <= 32; r++) begin
      int tok, bad; bit f;
      rate = 6'(r); rst_n = 0; in_valid = 0; out_ready = 0; repeat (2) @(negedge clk); rst_n = 1;
      tok = 128; bad = 0;
      for (int c = 0; c < 300; c++) begin
        in_valid = ($urandom_range(0, 3) != 0); out_ready = ($urandom_range(0, 4) != 0);
        #1;
        f = in_valid && out_ready && tok >= 64;
        if (out_valid != (in_valid && tok >= 64) || in_ready != (out_ready && tok >= 64)) bad++;
        tok = tok - (f ? 64 : 0) + r; if (tok > 128) tok = 128;
        @(negedge clk);
      end
      check(bad == 0, $sformatf("rate %0d: %0d cycles differ from the credit model", r, bad));
    end
    out_ready = 1;
    // downstream not ready: nothing passes, credit is kept
    rate = 6'd32; rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; passed = 0;
    out_ready = 0; in_valid = 1; repeat (10) @(negedge clk);
    check(passed == 0 && !in_ready, "blocked by downstream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
