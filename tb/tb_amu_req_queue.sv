// tb_amu_req_queue: self-checking test of the AMU Request Queue. Pushes
// random instructions while the consumer is randomly ready, checks that
// they leave in order and unchanged, that the queue reports full after
// exactly 16 entries, and that an entry can pass in one cycle.
module tb_amu_req_queue;
  import coroamu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic in_valid, in_ready, out_valid, out_ready;
  amu_instr_t in_instr, out_instr;
  logic [4:0] count;
  amu_req_queue #(.DEPTH(16)) dut (.*);

  amu_instr_t sb[$];
  int n_out = 0;

  initial begin
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic amu_instr_t rnd();
    amu_instr_t r;
    r.op = amu_op_e'($urandom_range(0, 4));
    r.id = ID_W'($urandom);
    r.opnd = {$urandom, $urandom};
    r.spm_addr = SPM_ADDR_W'($urandom);
    return r;
  endfunction

  initial begin
    in_valid = 0; out_ready = 0; in_instr = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    // fill without draining
    for (int i = 0; i < 16; i++) begin
      in_instr = rnd(); in_valid = 1;
      #1 check(in_ready, "ready while filling");
      @(posedge clk); sb.push_back(in_instr);
      @(negedge clk);
    end
    in_valid = 0;
    #1;
    check(!in_ready, "full after 16");
    check(count == 16, "count 16");
    // drain all with random pushes and pops
    fork
      begin
        for (int i = 0; i < 40; i++) begin
          @(negedge clk);
          in_valid = 1; in_instr = rnd();
          forever begin
            #1; if (in_ready) break;
            @(negedge clk);
          end
          @(posedge clk);
          sb.push_back(in_instr);
          #1 in_valid = 0;
        end
      end
      begin
        while (n_out < 56) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 2) != 0);
          #1;
          if (out_valid && out_ready) begin
            amu_instr_t exp;
            exp = sb.pop_front();
            check(out_instr == exp, "order/data");
            n_out++;
          end
        end
        @(posedge clk); #1 out_ready = 0;
      end
    join
    @(negedge clk);
    check(!out_valid && count == 0, "empty at end");
    // pass-through: enqueue on one edge, visible in the next cycle
    in_instr = rnd(); in_valid = 1; @(posedge clk); #1 in_valid = 0;
    check(out_valid && out_instr == in_instr, "one-cycle pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
