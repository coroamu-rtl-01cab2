// tb_amu_finished_queue: self-checking test of the Finished Queue pointers:
// in-order delivery to the BTQ, write-back by getfin/bafin at WbPtr (with
// btq_deq only for entries already sent), the empty case, commit freeing,
// full at 16, and a backend redirect that rewinds WbPtr and BafinPtr so
// the entries are sent again. A random phase of 3000 cycles then drives
// enqueue, BTQ ready, execution, commit and redirect at random and compares
// every output in every cycle with a model of the four pointers.
module tb_amu_finished_queue;
  import coroamu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic enq_valid, enq_ready, btq_valid, btq_ready, btq_deq, ex_valid, ex_has, cmt_valid, redirect_valid;
  fin_t enq_fin, btq_fin, ex_fin;
  logic [4:0] ex_ptr, redirect_ptr, count;
  amu_finished_queue #(.DEPTH(16)) dut (.*);

  initial begin
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic fin_t mk(int i);
    fin_t f; f.id = ID_W'(i); f.pcoff = PCOFF_W'(i * 4); f.spm_addr = SPM_ADDR_W'(i * 64); return f;
  endfunction

  task automatic push(int i);
    enq_valid = 1; enq_fin = mk(i); #1 check(enq_ready, "enq ready");
    @(posedge clk); @(negedge clk); enq_valid = 0;
  endtask

  task automatic take_btq(int exp);
    btq_ready = 1; #1 check(btq_valid && btq_fin == mk(exp), $sformatf("btq sends %0d", exp));
    @(posedge clk); @(negedge clk); btq_ready = 0;
  endtask

  task automatic exec(bit exp_has, int exp, bit exp_deq);
    ex_valid = 1; #1;
    check(ex_has == exp_has, "ex_has");
    if (exp_has) check(ex_fin == mk(exp), $sformatf("write-back %0d", exp));
    check(btq_deq == exp_deq, "btq_deq");
    @(posedge clk); @(negedge clk); ex_valid = 0;
  endtask

  initial begin
    enq_valid = 0; btq_ready = 0; ex_valid = 0; cmt_valid = 0; redirect_valid = 0; redirect_ptr = 0; enq_fin = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    exec(0, 0, 0);                       // nothing finished: bafin falls through
    push(1); push(2); push(3);
    take_btq(1); take_btq(2);            // 1 and 2 sent, 3 waiting
    exec(1, 1, 1);                       // write back 1 (was sent)
    check(ex_ptr == 5'd1, "ptr after first write-back");
    exec(1, 2, 1);
    exec(1, 3, 0);                       // 3 never sent: no deq, BafinPtr follows
    #1 check(!btq_valid, "nothing left to send");
    cmt_valid = 1; @(posedge clk); @(negedge clk); cmt_valid = 0;   // commit 1
    // backend redirect: write-backs of 2 and 3 are squashed
    push(4);
    redirect_valid = 1; redirect_ptr = 5'd1; #1 check(!btq_valid, "no send during redirect");
    @(posedge clk); @(negedge clk); redirect_valid = 0;
    take_btq(2); take_btq(3); take_btq(4);                          // resent in order
    exec(1, 2, 1);
    cmt_valid = 1; @(posedge clk); @(negedge clk); cmt_valid = 0;   // commit 2
    #1 check(count == 5'd2, "two entries held (3, 4)");
    // fill to 16
    for (int i = 5; i < 19; i++) push(i);
    #1 check(count == 5'd16 && !enq_ready, "full at 16");
    exec(1, 3, 1);
    #1 check(!enq_ready, "write-back does not free");
    cmt_valid = 1; @(posedge clk); @(negedge clk); cmt_valid = 0;
    #1 check(enq_ready, "commit frees a slot");
    // random phase against a pointer model (absolute indices, no wrap)
    begin
      fin_t mq [int]; int menq, mbaf, mwb, mcmt, nid, n_rdr, n_deq;
      rst_n = 0; enq_valid = 0; btq_ready = 0; ex_valid = 0; cmt_valid = 0; redirect_valid = 0;
      @(negedge clk); rst_n = 1; @(negedge clk);
      menq = 0; mbaf = 0; mwb = 0; mcmt = 0; nid = 1; n_rdr = 0; n_deq = 0;
      for (int c = 0; c < 3000; c++) begin
        bit e_ok, b_fire, x_has, rd; int rptr;
        enq_valid = $urandom_range(0, 2) != 0; enq_fin = mk(nid);
        btq_ready = $urandom_range(0, 1); ex_valid = $urandom_range(0, 3) == 0;
        cmt_valid = (mcmt < mwb) && ($urandom_range(0, 2) == 0);
        rd = ($urandom_range(0, 40) == 0) && !ex_valid;
        rptr = rd ? $urandom_range(mcmt + (cmt_valid ? 1 : 0), mwb) : 0;
        if (rptr < mcmt + (cmt_valid ? 1 : 0)) rd = 0;
        redirect_valid = rd; redirect_ptr = 5'(rptr);
        #1;
        e_ok = (menq - mcmt) != 16;
        x_has = ex_valid && (mwb != menq);
        b_fire = (mbaf != menq) && !rd && btq_ready;
        check(enq_ready == e_ok && count == 5'(menq - mcmt), "random: enq_ready / count");
        check(btq_valid == ((mbaf != menq) && !rd) && (mbaf == menq || btq_fin == mq[mbaf]), "random: BTQ output");
        check(ex_has == x_has && (!x_has || (ex_fin == mq[mwb] && ex_ptr == 5'(mwb))), "random: write-back");
        check(btq_deq == (x_has && mwb != mbaf), "random: btq_deq");
        if (btq_deq) n_deq++;
        // model update
        if (enq_valid && e_ok) begin mq[menq] = mk(nid); menq++; nid = nid % 1000 + 1; end
        if (cmt_valid) mcmt++;
        if (rd) begin mwb = rptr; mbaf = rptr; n_rdr++; end
        else begin
          if (b_fire) mbaf++;
          if (x_has) begin if (mwb == mbaf && !b_fire) mbaf++; mwb++; end
        end
        @(negedge clk);
      end
      enq_valid = 0; btq_ready = 0; ex_valid = 0; cmt_valid = 0; redirect_valid = 0;
      check(n_rdr > 10 && n_deq > 10, "random phase exercised redirects and dequeues");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
