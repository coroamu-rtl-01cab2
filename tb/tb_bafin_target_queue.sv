// tb_bafin_target_queue: self-checking test of the Bafin Target Queue:
// predictions take entries in order, a pre-decode redirect makes the
// entries used after the mispredicted point unused again without losing
// them, deq removes the oldest, a backend flush empties the queue, and the
// queue refuses entries when full (8). A random phase of 3000 cycles
// then compares every output in every cycle with a model of the three
// pointers under random enqueue, prediction, rollback, deq and flush.
module tb_bafin_target_queue;
  import coroamu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic enq_valid, enq_ready, pred_req, pred_valid, fe_redirect_valid, be_flush, deq;
  fin_t enq_fin, pred_fin;
  logic [3:0] pred_ptr, fe_redirect_ptr;
  bafin_target_queue #(.DEPTH(8)) dut (.*);

  initial begin
    #200000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic fin_t mk(int i);
    fin_t f; f.id = ID_W'(i); f.pcoff = PCOFF_W'(i * 8); f.spm_addr = '0; return f;
  endfunction
  task automatic push(int i);
    enq_valid = 1; enq_fin = mk(i); #1 check(enq_ready, "enq ready");
    @(posedge clk); @(negedge clk); enq_valid = 0;
  endtask
  task automatic predict(bit exp_v, int exp, output logic [3:0] p);
    pred_req = 1; #1;
    check(pred_valid == exp_v, "pred valid");
    if (exp_v) check(pred_fin == mk(exp), $sformatf("pred id %0d", exp));
    p = pred_ptr;
    @(posedge clk); @(negedge clk); pred_req = 0;
  endtask
  task automatic pulse_deq();
    deq = 1; @(posedge clk); @(negedge clk); deq = 0;
  endtask

  logic [3:0] p1, p2, p3, px;
  initial begin
    enq_valid = 0; pred_req = 0; fe_redirect_valid = 0; be_flush = 0; deq = 0; fe_redirect_ptr = 0; enq_fin = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    predict(0, 0, px);                          // empty: no target
    push(10); push(11); push(12);
    predict(1, 10, p1); predict(1, 11, p2); predict(1, 12, p3);
    predict(0, 0, px);                          // all used
    // pre-decode found the branch predicted with 11 wrong: 11 and 12 unused again
    fe_redirect_valid = 1; fe_redirect_ptr = p2; #1 check(!pred_valid, "no prediction during redirect");
    @(posedge clk); @(negedge clk); fe_redirect_valid = 0;
    predict(1, 11, px); check(px == p2, "same pointer after rollback");
    pulse_deq();                                // bafin with 10 written back
    predict(1, 12, px);
    pulse_deq(); pulse_deq();
    predict(0, 0, px);                          // empty again
    // deq of an entry no prediction used
    push(20); push(21);
    pulse_deq();
    predict(1, 21, px);
    // backend redirect flushes everything
    push(30);
    be_flush = 1; #1 check(!pred_valid && !enq_ready, "flush blocks"); @(posedge clk); @(negedge clk); be_flush = 0;
    predict(0, 0, px);
    // full at 8
    for (int i = 0; i < 8; i++) push(40 + i);
    enq_valid = 1; #1 check(!enq_ready, "full at 8"); enq_valid = 0;
    predict(1, 40, px);
    // random phase against a pointer model (absolute indices)
    begin
      fin_t mq [int]; int mh, mp, mt, nid, n_rb, n_fl;
      rst_n = 0; enq_valid = 0; pred_req = 0; fe_redirect_valid = 0; be_flush = 0; deq = 0;
      @(negedge clk); rst_n = 1; @(negedge clk);
      mh = 0; mp = 0; mt = 0; nid = 1; n_rb = 0; n_fl = 0;
      for (int c = 0; c < 3000; c++) begin
        bit fe, fl, e_ok, p_ok; int rp, hn, pn;
        enq_valid = $urandom_range(0, 1); enq_fin = mk(nid);
        pred_req = $urandom_range(0, 1); deq = ($urandom_range(0, 2) == 0);
        fl = ($urandom_range(0, 60) == 0); fe = !fl && ($urandom_range(0, 15) == 0) && (mp > mh);
        rp = fe ? $urandom_range(mh, mp) : 0;
        be_flush = fl; fe_redirect_valid = fe; fe_redirect_ptr = 4'(rp);
        #1;
        e_ok = (mt - mh) != 8 && !fl;
        p_ok = (mp != mt) && !fe && !fl;
        check(enq_ready == e_ok, "random: enq_ready");
        check(pred_valid == p_ok && (!p_ok || (pred_fin == mq[mp] && pred_ptr == 4'(mp))), $sformatf("random: prediction in cycle %0d", c));
        if (fl) begin mh = 0; mp = 0; mt = 0; mq.delete(); n_fl++; end
        else begin
          hn = (deq && mh != mt) ? mh + 1 : mh;     // only entries present before this cycle
          if (enq_valid && e_ok) begin mq[mt] = mk(nid); mt++; nid = nid % 1000 + 1; end
          pn = (pred_req && p_ok) ? mp + 1 : mp;
          if (fe) begin pn = rp; n_rb++; end
          if (pn < hn) pn = hn;
          mh = hn; mp = pn;
        end
        @(negedge clk);
      end
      enq_valid = 0; pred_req = 0; fe_redirect_valid = 0; be_flush = 0; deq = 0;
      check(n_rb > 10 && n_fl > 10, "random phase exercised rollbacks and flushes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
