// tb_amu_l2_engine: self-checking test of the L2 Request Table with the
// real SPM and a behavioural far memory. Checks: a single-line aload
// completes once with its ID, resume-PC offset and SPM address and leaves
// the line in the SPM; a three-line group completes exactly once and only
// after its last member has arrived and answered, with the primary's PC;
// a sub-line aload writes only its words; an astore writes the SPM line to
// memory under its mask; await causes no memory traffic and completes only
// on asignal; an asignal without await is flagged; the table stops taking
// requests when its 64 entries are in flight. A random phase then
// interleaves the members of 40 groups of 1..4 lines, with the far memory
// and the Finished List side stalling at random, and checks that every group
// completes exactly once, after its last member, with its primary's
// resume-PC offset and SPM address and all its lines in the SPM.
module tb_amu_l2_engine;
  import coroamu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic req_valid, req_ready, mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  line_req_t req; mem_req_t mem_req; mem_resp_t mem_resp;
  logic lw_en, lr_en; logic [SPM_LINE_W-1:0] lw_line, lr_line; logic [7:0] lw_mask;
  logic [LINE_W-1:0] lw_data, lr_data;
  logic fin_valid, fin_ready, asignal_miss; fin_t fin; logic [6:0] inflight;
  logic core_en, core_we; logic [14:0] core_addr; logic [7:0] core_be; logic [63:0] core_wdata, core_rdata;
  logic hold; int n_reads, n_writes;

  amu_l2_engine #(.ENTRIES(64)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid(mem_resp_valid && mem_resp_ready), .mem_resp,
    .spm_lw_en(lw_en), .spm_lw_line(lw_line), .spm_lw_mask(lw_mask), .spm_lw_data(lw_data),
    .spm_lr_en(lr_en), .spm_lr_line(lr_line), .spm_lr_data(lr_data),
    .fin_valid, .fin_ready, .fin, .asignal_miss, .inflight);
  amu_spm spm (.clk, .lw_en, .lw_line, .lw_mask, .lw_data, .lr_en, .lr_line, .lr_data,
    .core_en, .core_we, .core_addr, .core_be, .core_wdata, .core_rdata);
  hbm_model #(.LAT(6)) mem (.clk, .rst_n, .hold, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_ready(mem_resp_ready), .resp(mem_resp), .n_reads, .n_writes);
  assign mem_resp_ready = 1'b1;
  logic fin_stall = 0;
  assign fin_ready = !fin_stall;

  fin_t fins[$]; int n_miss = 0;
  always @(posedge clk) if (rst_n) begin
    if (fin_valid && fin_ready) fins.push_back(fin);
    if (asignal_miss) n_miss <= n_miss + 1;
  end

  initial begin
    #2000000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [63:0] pat(longint l, int w); return {32'(l), 24'h0, 8'(w)}; endfunction

  task automatic send(amu_op_e op, int id, longint line, int sl, logic [7:0] m, int pc, bit last, int sa = 0);
    req.op = op; req.id = ID_W'(id); req.line = 34'(line); req.spm_line = 9'(sl); req.wmask = m;
    req.pcoff = 16'(pc); req.last = last; req.spm_addr = 15'(sa); req_valid = 1;
    forever begin #1; if (req_ready) break; @(negedge clk); end
    @(posedge clk); @(negedge clk); req_valid = 0;
  endtask
  task automatic core_read(int addr, output logic [63:0] d);
    core_en = 1; core_we = 0; core_addr = 15'(addr); @(negedge clk); core_en = 0; d = core_rdata;
  endtask
  task automatic wait_cycles(int n); repeat (n) @(negedge clk); endtask

  initial begin
    logic [63:0] d;
    req_valid = 0; req = '0; hold = 0; core_en = 0; core_we = 0; core_addr = 0; core_be = 0; core_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    // 1: single line aload
    send(OP_ALOAD, 5, 'h40, 8, 8'hFF, 'h120, 1, 'h200);
    wait_cycles(30);
    check(fins.size() == 1 && fins[0].id == 5 && fins[0].pcoff == 16'h120 && fins[0].spm_addr == 15'h200, "single completion");
    for (int w = 0; w < 8; w++) begin core_read(8*64 + 8*w, d); check(d == pat('h40, w), "aload data in SPM"); end
    fins.delete();
    // 2: group of three lines, last one sent late
    send(OP_ALOAD, 7, 'h100, 16, 8'hFF, 'hE0, 0, 'h400);
    send(OP_ALOAD, 7, 'h101, 17, 8'hFF, 'h0, 0);
    wait_cycles(40);
    check(fins.size() == 0, "no completion before the last member");
    check(inflight == 1, "children freed on response, primary kept");
    send(OP_ASTORE, 7, 'h300, 8, 8'h0F, 'h0, 1);     // writes back line 8 (data of step 1), low half
    wait_cycles(30);
    check(fins.size() == 1 && fins[0].id == 7 && fins[0].pcoff == 16'hE0 && fins[0].spm_addr == 15'h400, "group completes once with primary PC");
    check(n_writes == 1, "astore reached memory");
    for (int w = 0; w < 8; w++) check(mem.peek(34'h300)[64*w +: 64] == (w < 4 ? pat('h40, w) : pat('h300, w)), "astore data under mask");
    core_read(17*64 + 8, d); check(d == pat('h101, 1), "second member data");
    fins.delete();
    // 3: 32 B aload into the upper half of SPM line 8
    send(OP_ALOAD, 6, 'h200, 8, 8'hF0, 'h0, 1);
    wait_cycles(30);
    core_read(8*64 + 8*1, d); check(d == pat('h40, 1), "unmasked word kept");
    core_read(8*64 + 8*5, d); check(d == pat('h200, 5), "masked word written");
    check(fins.size() == 1 && fins[0].id == 6, "sub-line completion");
    fins.delete();
    // 4: await / asignal
    begin
      int r0; r0 = n_reads + n_writes;
      send(OP_AWAIT, 9, 0, 0, 8'h0, 'h300, 1);
      wait_cycles(50);
      check(fins.size() == 0 && n_reads + n_writes == r0, "await: no traffic, not finished");
      send(OP_ASIGNAL, 9, 0, 0, 8'h0, 'h0, 1);
      wait_cycles(3);
      check(fins.size() == 1 && fins[0].id == 9 && fins[0].pcoff == 16'h300, "asignal wakes await with its PC");
      fins.delete();
      send(OP_ASIGNAL, 10, 0, 0, 8'h0, 'h0, 1);
      wait_cycles(2);
      check(n_miss == 1 && fins.size() == 0, "asignal without await flagged");
    end
    // 5: fill the table while memory holds its answers
    hold = 1;
    fork
      for (int i = 0; i < 70; i++) send(OP_ALOAD, 100 + i, 'h1000 + i, 64 + i, 8'hFF, i, 1);
    join_none
    wait_cycles(200);
    check(inflight == 64 && !req_ready, "table full at 64");
    hold = 0;
    wait_cycles(600);
    check(fins.size() == 70, "all 70 complete after release");
    begin
      bit ok; ok = 1;
      for (int i = 0; i < fins.size(); i++) if (fins[i].id < 100 || fins[i].id >= 170) ok = 0;
      check(ok, "completion IDs");
    end
    check(inflight == 0, "table empty at end");
    // 6: random interleaved groups with random stalls
    begin
      int nmem [40]; longint gline [40]; int got [40]; bit stop; logic [63:0] d2;
      fins.delete(); stop = 0;
      for (int g = 0; g < 40; g++) begin nmem[g] = $urandom_range(1, 4); gline[g] = 'h8000 + g * 16 + $urandom_range(0, 8); got[g] = 0; end
      fork
        while (!stop) begin hold = ($urandom_range(0, 3) == 0); fin_stall = ($urandom_range(0, 3) == 0); @(negedge clk); end
      join_none
      for (int r = 0; r < 4; r++)
        for (int g = 0; g < 40; g++)
          if (r < nmem[g])
            send(OP_ALOAD, 200 + g, gline[g] + r, 256 + g * 4 + r, 8'hFF, r == 0 ? 'h40 + g : 'h0,
                 r == nmem[g] - 1, r == 0 ? (256 + g * 4) * 64 : 0);
      wait_cycles(800);
      stop = 1; hold = 0; fin_stall = 0;
      wait_cycles(50);
      foreach (fins[i]) begin
        int g; g = int'(fins[i].id) - 200;
        if (g >= 0 && g < 40) begin
          got[g]++;
          check(fins[i].pcoff == 16'('h40 + g) && fins[i].spm_addr == 15'((256 + g * 4) * 64),
                $sformatf("group %0d completion fields", g));
        end else check(0, "unexpected completion ID");
      end
      for (int g = 0; g < 40; g++) begin
        bit ok; ok = 1;
        check(got[g] == 1, $sformatf("group %0d completed once (%0d)", g, got[g]));
        for (int r = 0; r < nmem[g]; r++) begin
          core_read((256 + g * 4 + r) * 64 + 8 * (r % 8), d2);
          if (d2 != pat(gline[g] + r, r % 8)) ok = 0;
        end
        check(ok, $sformatf("group %0d data in SPM", g));
      end
      check(inflight == 0, "table empty after random phase");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
