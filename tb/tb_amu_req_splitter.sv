// tb_amu_req_splitter: self-checking test of request decomposition and
// aset binding. A 256 B aload must give four 64 B line requests on four
// consecutive cycles (one per cycle) with consecutive memory and SPM lines,
// a 32 B aload one half-line request with word mask F0, aset(7, 2) must
// rebind the next two requests to ID 7 with 'last' only on the final line,
// await/asignal must pass as single requests, and a request must wait
// while the table is not ready. A random phase then sends 300 instructions
// (sizes 8 B .. 4 KB, aset groups of 1..3, await/asignal) with random
// back-pressure and compares every line request with a separate model.
module tb_amu_req_splitter;
  import coroamu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic in_valid, in_ready, out_valid, out_ready;
  amu_instr_t in_instr;
  line_req_t out_req;
  amu_req_splitter dut (.*);

  line_req_t got[$];
  longint    got_t[$];
  longint    cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid && out_ready) begin got.push_back(out_req); got_t.push_back(cyc); end
  end

  initial begin
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [63:0] opnd(logic [15:0] pc, int code, logic [39:0] a);
    return {pc, 4'(code), 4'h0, a};
  endfunction

  task automatic send(amu_op_e op, logic [ID_W-1:0] id, logic [63:0] o, logic [14:0] sa);
    in_instr.op = op; in_instr.id = id; in_instr.opnd = o; in_instr.spm_addr = sa; in_valid = 1;
    forever begin #1; if (in_ready) break; @(negedge clk); end
    @(posedge clk); @(negedge clk); in_valid = 0;
  endtask

  initial begin
    in_valid = 0; out_ready = 1; in_instr = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    // 1: 256 B aload
    send(OP_ALOAD, 9'd5, opnd(16'h0120, 8, 40'h1000), 15'h0200);
    check(got.size() == 4, "256B gives 4 lines");
    for (int i = 0; i < 4 && i < got.size(); i++) begin
      check(got[i].op == OP_ALOAD && got[i].id == 5, "op/id");
      check(got[i].line == 34'h40 + 34'(i), "mem line");
      check(got[i].spm_line == 9'd8 + 9'(i), "spm line");
      check(got[i].wmask == 8'hFF, "full mask");
      check(got[i].pcoff == 16'h0120, "pc offset");
      check(got[i].last == (i == 3), "last flag");
      if (i > 0) check(got_t[i] == got_t[i-1] + 1, "one line per cycle");
    end
    got.delete(); got_t.delete();
    // 2: 32 B aload in the upper half of a line
    send(OP_ALOAD, 9'd6, opnd(16'h0, 5, 40'h2020), 15'h0060);
    check(got.size() == 1 && got[0].wmask == 8'hF0 && got[0].last && got[0].line == 34'h80, "32B half line");
    got.delete();
    // 3: aset(7, 2) then a 64 B aload (id 3) and a 128 B astore (id 4)
    send(OP_ASET, 9'd7, 64'd2, 15'h0);
    check(got.size() == 0, "aset emits nothing");
    send(OP_ALOAD, 9'd3, opnd(16'h00E0, 6, 40'h3000), 15'h0400);
    send(OP_ASTORE, 9'd4, opnd(16'h0, 7, 40'h4000), 15'h0440);
    check(got.size() == 3, "aset group of 3 lines");
    for (int i = 0; i < 3 && i < got.size(); i++) begin
      check(got[i].id == 7, "bound to aset ID");
      check(got[i].last == (i == 2), "group last only at end");
    end
    if (got.size() == 3) check(got[0].op == OP_ALOAD && got[1].op == OP_ASTORE && got[2].line == 34'h101, "group members");
    got.delete();
    // binding is over: next request keeps its own ID
    send(OP_ALOAD, 9'd11, opnd(16'h0, 3, 40'h5008), 15'h0008);
    check(got.size() == 1 && got[0].id == 11 && got[0].wmask == 8'h02 && got[0].last, "binding ended, 8B word 1");
    got.delete();
    // 4: await and asignal
    send(OP_AWAIT, 9'd12, {16'h0300, 48'h0}, 15'h0);
    send(OP_ASIGNAL, 9'd12, 64'h0, 15'h0);
    check(got.size() == 2 && got[0].op == OP_AWAIT && got[0].pcoff == 16'h0300 && got[0].last &&
          got[1].op == OP_ASIGNAL && got[1].id == 12, "await/asignal pass");
    got.delete();
    // 5: back-pressure: nothing leaves while out_ready is low
    out_ready = 0;
    fork send(OP_ALOAD, 9'd13, opnd(16'h0, 7, 40'h6000), 15'h0); join_none
    repeat (5) @(negedge clk);
    check(got.size() == 0 && in_ready == 0, "stall while not ready");
    out_ready = 1;
    repeat (4) @(negedge clk);
    check(got.size() == 2 && got[1].last, "resumes after stall");
    // 6: random instructions against a model
    begin
      line_req_t exp[$]; bit stop; int bind_n; logic [ID_W-1:0] bind_i;
      got.delete(); got_t.delete(); stop = 0; bind_n = 0; bind_i = '0;
      fork
        while (!stop) begin out_ready = ($urandom_range(0, 3) != 0); @(negedge clk); end
      join_none
      for (int it = 0; it < 300; it++) begin
        int kind; kind = $urandom_range(0, 9);
        if (kind == 0 && bind_n == 0) begin
          bind_n = $urandom_range(1, 3); bind_i = ID_W'($urandom_range(1, 1023));
          send(OP_ASET, bind_i, 64'(bind_n), 15'h0);
        end else if (kind == 1) begin
          amu_op_e op; line_req_t e; logic [ID_W-1:0] id; logic [15:0] pc;
          op = $urandom_range(0, 1) ? OP_AWAIT : OP_ASIGNAL; id = ID_W'($urandom_range(1, 1023)); pc = 16'($urandom);
          e = '0; e.op = op; e.id = id; e.pcoff = pc; e.last = 1; exp.push_back(e);
          send(op, id, {pc, 48'h0}, 15'h0);
        end else begin
          amu_op_e op; int code, bytes, nl; logic [39:0] a; logic [14:0] sa; logic [15:0] pc; logic [ID_W-1:0] id;
          op = $urandom_range(0, 1) ? OP_ALOAD : OP_ASTORE;
          code = ($urandom_range(0, 1) != 0) ? $urandom_range(3, 7) : $urandom_range(3, 12);
          bytes = 1 << code; nl = (bytes + 63) / 64;
          a = 40'($urandom) << 6; a = a + 40'((bytes < 64) ? ($urandom_range(0, 64 / bytes - 1) * bytes) : 0);
          sa = 15'($urandom) & ~15'(63); pc = 16'($urandom); id = ID_W'($urandom_range(1, 1023));
          for (int l = 0; l < nl; l++) begin
            line_req_t e; e = '0;
            e.op = op; e.id = (bind_n > 0) ? bind_i : id; e.pcoff = pc; e.spm_addr = sa;
            e.line = 34'(a >> 6) + 34'(l); e.spm_line = 9'(sa >> 6) + 9'(l);
            e.wmask = (bytes >= 64) ? 8'hFF : 8'(((1 << (bytes / 8)) - 1) << ((a % 64) / 8));
            e.last = (l == nl - 1) && (bind_n <= 1);
            exp.push_back(e);
          end
          if (bind_n > 0) bind_n--;
          send(op, id, {pc, 4'(code), 4'h0, a}, sa);
        end
      end
      repeat (10) @(negedge clk);
      stop = 1; out_ready = 1;
      check(got.size() == exp.size(), $sformatf("random: %0d line requests, expected %0d", got.size(), exp.size()));
      for (int i = 0; i < exp.size() && i < got.size(); i++)
        check(got[i] == exp[i], $sformatf("random line request %0d matches the model", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
