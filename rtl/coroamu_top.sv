// coroamu_top: the CoroAMU hardware added to an out-of-order core and its
// L2 cache, plus the far-memory path of the emulation platform.
//
// Request path: the backend issues asynchronous memory instructions
// (aload/astore/aset/await/asignal) into the 16-entry Request Queue; the
// splitter breaks them into line requests and applies aset binding; the L2
// Request Table groups them by ID, moves data between far memory and the
// 32 KB SPM, and reports every completed group {ID, resume-PC offset, SPM
// address} through the Finished List to the core's 16-entry Finished Queue.
//
// Completion path: the Finished Queue executes getfin/bafin (bafin_exec
// forms the result, with the handler address from the aconfig registers)
// and forwards finished IDs with their resume-PC offsets to the Bafin
// Target Queue, from which the 4-entry Bafin Predict Table predicts each
// bafin with the exact target the backend will resolve.
//
// Far-memory path: Request Table -> bandwidth regulator -> mem_req port;
// mem_resp port -> response delayer -> Request Table.
//
// The rest of the core is outside: its fetch lookups, base predictor
// result, getfin/bafin execution, commits, redirects and SPM loads/stores
// are ports. A backend redirect (be_redirect_valid) restores the Finished
// Queue write-back pointer and flushes the BTQ; a pre-decode redirect
// (fe_redirect_valid) rolls back the BTQ. Each executed bafin trains the
// BPT with its PC. Timing: getfin/bafin resolve in the cycle presented, the
// BPT answers one cycle after a lookup, SPM core reads return one cycle
// after the request.
//
// rst_n is an asynchronous reset for the flip-flops and also disables the
// handshake assertions of the sub-blocks, which is why lint tools see it
// used both synchronously and asynchronously. The aconfig register
// read-back (acfg_base_q, acfg_size_q) and the BPT's p_bafin_pc are wired
// but unused here: they serve a CSR read and the fetch stage's choice of
// the bafin slot, which lie outside this hardware.
module coroamu_top
  import coroamu_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // platform settings
  input  logic [11:0]     cfg_latency,
  input  logic [5:0]      cfg_rate,
  // AMU instruction issue
  input  logic            issue_valid,
  output logic            issue_ready,
  input  amu_instr_t      issue_instr,
  // aconfig
  input  logic            acfg_valid,
  input  logic [47:0]     acfg_base,
  input  logic [15:0]     acfg_size,
  // getfin / bafin execution
  input  logic            ex_valid,
  input  logic            ex_is_bafin,
  input  logic [XLEN-1:0] ex_pc,
  input  logic            ex_pred_taken,
  input  logic [ID_W-1:0] ex_pred_id,
  output logic            ex_has,
  output logic [ID_W-1:0] ex_id,
  output logic [XLEN-1:0] ex_wb_data,
  output logic            ex_taken,
  output logic [XLEN-1:0] ex_target,
  output logic            ex_mispredict,
  output logic [XLEN-1:0] ex_redirect_pc,
  output logic [4:0]      ex_fq_ptr,
  input  logic            cmt_valid,
  input  logic            be_redirect_valid,
  input  logic [4:0]      be_redirect_fq_ptr,
  // frontend
  input  logic            f_valid,
  input  logic [XLEN-1:0] f_pc,
  input  logic            base_taken,
  input  logic [XLEN-1:0] base_target,
  input  logic [4:0]      base_off,
  output logic            p_valid,
  output logic            p_taken,
  output logic [XLEN-1:0] p_target,
  output logic            p_bafin,
  output logic            p_bafin_taken,
  output logic [ID_W-1:0] p_id,
  output logic [3:0]      p_btq_ptr,
  input  logic            fe_redirect_valid,
  input  logic [3:0]      fe_redirect_btq_ptr,
  // core access to the SPM
  input  logic            core_spm_en,
  input  logic            core_spm_we,
  input  logic [SPM_ADDR_W-1:0] core_spm_addr,
  input  logic [7:0]      core_spm_be,
  input  logic [63:0]     core_spm_wdata,
  output logic [63:0]     core_spm_rdata,
  // far memory
  output logic            mem_req_valid,
  input  logic            mem_req_ready,
  output mem_req_t        mem_req,
  input  logic            mem_resp_valid,
  output logic            mem_resp_ready,
  input  mem_resp_t       mem_resp,
  // status
  output logic            asignal_miss,
  output logic [RT_IDX_W:0] rt_inflight,
  output logic [4:0]      fq_count,
  output logic [4:0]      rq_count
);
  // ---------------- request path ----------------
  logic       rq_valid, rq_ready;
  amu_instr_t rq_instr;

  amu_req_queue #(.DEPTH(16)) u_req_queue (
    .clk, .rst_n,
    .in_valid(issue_valid), .in_ready(issue_ready), .in_instr(issue_instr),
    .out_valid(rq_valid), .out_ready(rq_ready), .out_instr(rq_instr),
    .count(rq_count)
  );

  logic      lr_valid, lr_ready;
  line_req_t lr;

  amu_req_splitter u_splitter (
    .clk, .rst_n,
    .in_valid(rq_valid), .in_ready(rq_ready), .in_instr(rq_instr),
    .out_valid(lr_valid), .out_ready(lr_ready), .out_req(lr)
  );

  // ---------------- L2: request table, SPM, finished list ----------------
  logic      e_mem_valid, e_mem_ready;
  mem_req_t  e_mem_req;
  logic      d_resp_valid;
  mem_resp_t d_resp;
  logic      lw_en, lr_en;
  logic [SPM_LINE_W-1:0]     lw_line, lr_line;
  logic [WORDS_PER_LINE-1:0] lw_mask;
  logic [LINE_W-1:0]         lw_data, lr_data;
  logic      efin_valid, efin_ready;
  fin_t      efin;

  amu_l2_engine #(.ENTRIES(RT_ENTRIES)) u_req_table (
    .clk, .rst_n,
    .req_valid(lr_valid), .req_ready(lr_ready), .req(lr),
    .mem_req_valid(e_mem_valid), .mem_req_ready(e_mem_ready), .mem_req(e_mem_req),
    .mem_resp_valid(d_resp_valid), .mem_resp(d_resp),
    .spm_lw_en(lw_en), .spm_lw_line(lw_line), .spm_lw_mask(lw_mask), .spm_lw_data(lw_data),
    .spm_lr_en(lr_en), .spm_lr_line(lr_line), .spm_lr_data(lr_data),
    .fin_valid(efin_valid), .fin_ready(efin_ready), .fin(efin),
    .asignal_miss, .inflight(rt_inflight)
  );

  amu_spm #(.BYTES(SPM_BYTES)) u_spm (
    .clk,
    .lw_en, .lw_line, .lw_mask, .lw_data,
    .lr_en, .lr_line, .lr_data,
    .core_en(core_spm_en), .core_we(core_spm_we), .core_addr(core_spm_addr),
    .core_be(core_spm_be), .core_wdata(core_spm_wdata), .core_rdata(core_spm_rdata)
  );

  logic fl_valid, fl_ready;
  fin_t fl_fin;

  amu_finished_list #(.DEPTH(1 << ID_W)) u_fin_list (
    .clk, .rst_n,
    .in_valid(efin_valid), .in_ready(efin_ready), .in_fin(efin),
    .out_valid(fl_valid), .out_ready(fl_ready), .out_fin(fl_fin)
  );

  // ---------------- far-memory path ----------------
  far_bw_ctrl #(.BURST_BYTES(128)) u_bw (
    .clk, .rst_n, .rate(cfg_rate),
    .in_valid(e_mem_valid), .in_ready(e_mem_ready), .in_req(e_mem_req),
    .out_valid(mem_req_valid), .out_ready(mem_req_ready), .out_req(mem_req)
  );

  far_resp_delayer #(.DEPTH(RT_ENTRIES)) u_delay (
    .clk, .rst_n, .latency(cfg_latency),
    .in_valid(mem_resp_valid), .in_ready(mem_resp_ready), .in_resp(mem_resp),
    .out_valid(d_resp_valid), .out_ready(1'b1), .out_resp(d_resp)
  );

  // ---------------- finished queue and getfin/bafin ----------------
  logic btq_in_valid, btq_in_ready, btq_deq;
  fin_t btq_in_fin;
  fin_t fq_fin;

  amu_finished_queue #(.DEPTH(16)) u_fin_queue (
    .clk, .rst_n,
    .enq_valid(fl_valid), .enq_ready(fl_ready), .enq_fin(fl_fin),
    .btq_valid(btq_in_valid), .btq_ready(btq_in_ready), .btq_fin(btq_in_fin), .btq_deq,
    .ex_valid, .ex_has, .ex_fin(fq_fin), .ex_ptr(ex_fq_ptr),
    .cmt_valid, .redirect_valid(be_redirect_valid), .redirect_ptr(be_redirect_fq_ptr),
    .count(fq_count)
  );

  logic [ID_W-1:0] cfg_id;
  logic [47:0]     handler_addr, acfg_base_q;
  logic [15:0]     acfg_size_q;

  amu_aconfig u_aconfig (
    .clk, .rst_n,
    .cfg_valid(acfg_valid), .cfg_base(acfg_base), .cfg_size(acfg_size),
    .id(cfg_id), .handler_addr, .base_q(acfg_base_q), .size_q(acfg_size_q)
  );

  bafin_exec u_bafin_exec (
    .ex_valid, .ex_is_bafin, .ex_pc, .ex_pred_taken, .ex_pred_id,
    .fq_has(ex_has), .fq_fin, .cfg_id, .handler_addr,
    .wb_data(ex_wb_data), .taken(ex_taken), .target(ex_target),
    .mispredict(ex_mispredict), .redirect_pc(ex_redirect_pc)
  );

  assign ex_id = fq_fin.id;

  // ---------------- BPU: BTQ and BPT ----------------
  logic       bpt_btq_req, btq_p_valid;
  fin_t       btq_p_fin;
  logic [3:0] btq_p_ptr;
  logic [XLEN-1:0] p_bafin_pc;

  bafin_target_queue #(.DEPTH(8)) u_btq (
    .clk, .rst_n,
    .enq_valid(btq_in_valid), .enq_ready(btq_in_ready), .enq_fin(btq_in_fin),
    .pred_req(bpt_btq_req), .pred_valid(btq_p_valid), .pred_fin(btq_p_fin), .pred_ptr(btq_p_ptr),
    .fe_redirect_valid, .fe_redirect_ptr(fe_redirect_btq_ptr),
    .be_flush(be_redirect_valid), .deq(btq_deq)
  );

  bafin_pred_table #(.ENTRIES(4), .BTQ_PTR_W(4)) u_bpt (
    .clk, .rst_n,
    .f_valid, .f_pc, .base_taken, .base_target, .base_off,
    .btq_req(bpt_btq_req), .btq_valid(btq_p_valid), .btq_fin(btq_p_fin), .btq_ptr(btq_p_ptr),
    .p_valid, .p_taken, .p_target, .p_bafin, .p_bafin_taken, .p_bafin_pc, .p_id, .p_btq_ptr,
    .upd_valid(ex_valid && ex_is_bafin), .upd_pc(ex_pc)
  );
endmodule
