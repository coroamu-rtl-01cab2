// tb_amu_aconfig: checks that aconfig loads the handler base and size, that
// both reset to zero and that handler_addr = base + ID * size.
module tb_amu_aconfig;
  import coroamu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  logic cfg_valid; logic [47:0] cfg_base, handler_addr, base_q; logic [15:0] cfg_size, size_q;
  logic [ID_W-1:0] id;
  amu_aconfig dut (.*);
  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    cfg_valid = 0; cfg_base = 0; cfg_size = 0; id = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    check(base_q == 0 && size_q == 0, "reset values");
    for (int t = 0; t < 20; t++) begin
      logic [47:0] b; logic [15:0] s;
      b = {$urandom, $urandom} & 48'hFFFF_FFFF_FFC0; s = 16'($urandom_range(16, 4096));
      @(negedge clk); cfg_valid = 1; cfg_base = b; cfg_size = s;
      @(negedge clk); cfg_valid = 0; cfg_base = '1; cfg_size = '1;
      for (int k = 0; k < 5; k++) begin
        id = ID_W'($urandom); #1;
        check(handler_addr == b + 48'(id) * 48'(s), $sformatf("addr id=%0d", id));
      end
      check(base_q == b && size_q == s, "registers hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
