// tb_amu_finished_list: self-checking test of the Finished List FIFO:
// order and content of completions under random back-pressure, and full
// after exactly 8 entries.
module tb_amu_finished_list;
  import coroamu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic in_valid, in_ready, out_valid, out_ready;
  fin_t in_fin, out_fin;
  amu_finished_list #(.DEPTH(8)) dut (.*);
  fin_t sb[$];
  int n_out = 0;

  initial begin
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic fin_t rnd();
    fin_t r; r.id = ID_W'($urandom); r.pcoff = PCOFF_W'($urandom); r.spm_addr = SPM_ADDR_W'($urandom);
    return r;
  endfunction

  initial begin
    in_valid = 0; out_ready = 0; in_fin = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      in_fin = rnd(); in_valid = 1;
      #1 check(in_ready, "ready while filling");
      @(posedge clk); sb.push_back(in_fin); @(negedge clk);
    end
    in_valid = 0; #1;
    check(!in_ready, "full after 8");
    fork
      for (int i = 0; i < 30; i++) begin
        @(negedge clk); in_valid = 1; in_fin = rnd();
        forever begin
          #1; if (in_ready) break;
          @(negedge clk);
        end
        @(posedge clk);
        sb.push_back(in_fin); #1 in_valid = 0;
      end
      while (n_out < 38) begin
        @(negedge clk); out_ready = ($urandom_range(0, 1) != 0);
        #1;
        if (out_valid && out_ready) begin
          fin_t e; e = sb.pop_front(); check(out_fin == e, "order/data"); n_out++;
        end
      end
    join
    @(posedge clk); #1 out_ready = 0; @(negedge clk);
    check(!out_valid, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
