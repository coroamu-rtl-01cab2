// amu_l2_engine: the AMU Request Table and its control in the L2 cache.
//
// Every line request from the core takes one table entry holding the fields
// of the paper's table: ID, SIZE (word mask), TYPE (load, store, wait), SPM
// address, REF NUM, Parent Entry and Resume PC. Requests that share an ID
// form a group: the first one to arrive while no open group of that ID
// exists becomes the primary entry and keeps the Resume PC; later ones are
// children that point to it (Parent Entry) and increase its REF NUM. Each
// response raises the primary's response counter; a child entry is freed
// once counted. When the group's last request has arrived and every
// constituent has answered, the primary sends one completion {ID, resume-PC
// offset, SPM address} to the Finished List and is freed.
//
// await allocates a wait-type primary that issues no memory traffic;
// asignal takes no entry, finds the pending await entry of its ID and
// completes it as if a response had come (asignal_miss pulses if none).
//
// Memory side: pending load/store entries are issued one at a time, lowest
// entry first. An aload issues a line read and writes the returned line into
// the SPM under its word mask; an astore reads its SPM line (one cycle) and
// issues a masked line write. The entry index is the memory tag. Responses
// are always accepted. One request is accepted, one memory request issued,
// one response taken and one completion sent per cycle at most.
//
// Grouping, REF NUM / Parent Entry, await and asignal follow the paper; the
// table size, the completion rule (last seen and count == REF NUM), the
// freeing policy and the issue order are this design's own choices.
module amu_l2_engine
  import coroamu_pkg::*;
#(
  parameter int unsigned ENTRIES = RT_ENTRIES
) (
  input  logic        clk,
  input  logic        rst_n,
  // line requests from the core
  input  logic        req_valid,
  output logic        req_ready,
  input  line_req_t   req,
  // far memory
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_resp_valid,
  input  mem_resp_t   mem_resp,
  // SPM line ports
  output logic        spm_lw_en,
  output logic [SPM_LINE_W-1:0]     spm_lw_line,
  output logic [WORDS_PER_LINE-1:0] spm_lw_mask,
  output logic [LINE_W-1:0]         spm_lw_data,
  output logic        spm_lr_en,
  output logic [SPM_LINE_W-1:0]     spm_lr_line,
  input  logic [LINE_W-1:0]         spm_lr_data,
  // completions to the Finished List
  output logic        fin_valid,
  input  logic        fin_ready,
  output fin_t        fin,
  // status
  output logic        asignal_miss,
  output logic [$clog2(ENTRIES):0] inflight
);
  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned CW = 16;

  typedef enum logic [1:0] {T_LOAD = 2'd0, T_STORE = 2'd1, T_WAIT = 2'd2} rt_type_e;

  typedef struct packed {
    logic                      valid;
    logic                      primary;
    logic                      closed;     // last constituent seen
    logic                      pend;       // memory request not yet issued
    rt_type_e                  rtype;
    logic [ID_W-1:0]           id;
    logic [MADDR_W-7:0]        line;
    logic [SPM_LINE_W-1:0]     spm_line;
    logic [WORDS_PER_LINE-1:0] wmask;      // SIZE
    logic [SPM_ADDR_W-1:0]     spm_addr;
    logic [PCOFF_W-1:0]        pcoff;      // Resume PC
    logic [CW-1:0]             ref_num;
    logic [CW-1:0]             resp_cnt;
    logic [IW-1:0]             parent;
  } rt_entry_t;

  rt_entry_t rt_q [ENTRIES];

  // ---------------- searches ----------------
  logic          free_found, prim_found, wait_found, pend_found, done_found;
  logic [IW-1:0] free_idx, prim_idx, wait_idx, pend_idx, done_idx;
  logic          is_mem_req;

  assign is_mem_req = (req.op == OP_ALOAD) || (req.op == OP_ASTORE);

  always_comb begin
    free_found = 1'b0; free_idx = '0;
    prim_found = 1'b0; prim_idx = '0;
    wait_found = 1'b0; wait_idx = '0;
    pend_found = 1'b0; pend_idx = '0;
    done_found = 1'b0; done_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!rt_q[i].valid) begin
        free_found = 1'b1; free_idx = IW'(i);
      end
      if (rt_q[i].valid && rt_q[i].primary && !rt_q[i].closed &&
          rt_q[i].rtype != T_WAIT && rt_q[i].id == req.id) begin
        prim_found = 1'b1; prim_idx = IW'(i);
      end
      if (rt_q[i].valid && rt_q[i].rtype == T_WAIT && rt_q[i].resp_cnt == '0 &&
          rt_q[i].id == req.id) begin
        wait_found = 1'b1; wait_idx = IW'(i);
      end
      if (rt_q[i].valid && rt_q[i].pend) begin
        pend_found = 1'b1; pend_idx = IW'(i);
      end
      if (rt_q[i].valid && rt_q[i].primary && rt_q[i].closed &&
          rt_q[i].resp_cnt == rt_q[i].ref_num) begin
        done_found = 1'b1; done_idx = IW'(i);
      end
    end
  end

  assign req_ready = (req.op == OP_ASIGNAL) || free_found;

  logic req_fire, alloc, child;
  assign req_fire = req_valid && req_ready;
  assign alloc    = req_fire && (req.op != OP_ASIGNAL);
  assign child    = alloc && is_mem_req && prim_found;

  // ---------------- issue stage ----------------
  logic          iss_valid;
  logic [IW-1:0] iss_idx;
  logic          pick;

  assign pick = pend_found && (!iss_valid || mem_req_ready);

  assign spm_lr_en   = pick && (rt_q[pend_idx].rtype == T_STORE);
  assign spm_lr_line = rt_q[pend_idx].spm_line;

  always_comb begin
    mem_req_valid = iss_valid;
    mem_req.write = (rt_q[iss_idx].rtype == T_STORE);
    mem_req.line  = rt_q[iss_idx].line;
    mem_req.tag   = iss_idx;
    mem_req.wmask = rt_q[iss_idx].wmask;
    mem_req.wdata = spm_lr_data;
  end

  // ---------------- responses ----------------
  logic [IW-1:0] rsp_idx, rsp_prim;
  assign rsp_idx  = mem_resp.tag;
  assign rsp_prim = rt_q[rsp_idx].primary ? rsp_idx : rt_q[rsp_idx].parent;

  assign spm_lw_en   = mem_resp_valid && !mem_resp.write;
  assign spm_lw_line = rt_q[rsp_idx].spm_line;
  assign spm_lw_mask = rt_q[rsp_idx].wmask;
  assign spm_lw_data = mem_resp.rdata;

  // ---------------- completion ----------------
  assign fin_valid    = done_found;
  assign fin.id       = rt_q[done_idx].id;
  assign fin.pcoff    = rt_q[done_idx].pcoff;
  assign fin.spm_addr = rt_q[done_idx].spm_addr;

  assign asignal_miss = req_fire && (req.op == OP_ASIGNAL) && !wait_found;

  always_comb begin
    inflight = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (rt_q[i].valid && rt_q[i].rtype != T_WAIT) inflight = inflight + 1'b1;
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) rt_q[i] <= '0;
      iss_valid <= 1'b0;
      iss_idx   <= '0;
    end else begin
      // issue
      if (iss_valid && mem_req_ready) iss_valid <= 1'b0;
      if (pick) begin
        iss_valid <= 1'b1;
        iss_idx   <= pend_idx;
        rt_q[pend_idx].pend <= 1'b0;
      end
      // response: count at the primary, free a child
      if (mem_resp_valid) begin
        rt_q[rsp_prim].resp_cnt <= rt_q[rsp_prim].resp_cnt + 1'b1;
        if (!rt_q[rsp_idx].primary) rt_q[rsp_idx].valid <= 1'b0;
      end
      // asignal completes the matching await entry
      if (req_fire && req.op == OP_ASIGNAL && wait_found)
        rt_q[wait_idx].resp_cnt <= CW'(1);
      // completion
      if (done_found && fin_ready) rt_q[done_idx].valid <= 1'b0;
      // allocation
      if (alloc) begin
        rt_q[free_idx].valid    <= 1'b1;
        rt_q[free_idx].primary  <= !child;
        rt_q[free_idx].closed   <= child ? 1'b0 : req.last;
        rt_q[free_idx].pend     <= is_mem_req;
        rt_q[free_idx].rtype    <= (req.op == OP_ALOAD)  ? T_LOAD :
                                   (req.op == OP_ASTORE) ? T_STORE : T_WAIT;
        rt_q[free_idx].id       <= req.id;
        rt_q[free_idx].line     <= req.line;
        rt_q[free_idx].spm_line <= req.spm_line;
        rt_q[free_idx].wmask    <= req.wmask;
        rt_q[free_idx].spm_addr <= req.spm_addr;
        rt_q[free_idx].pcoff    <= child ? '0 : req.pcoff;
        rt_q[free_idx].ref_num  <= child ? '0 : CW'(1);
        rt_q[free_idx].resp_cnt <= '0;
        rt_q[free_idx].parent   <= child ? prim_idx : '0;
        if (child) begin
          rt_q[prim_idx].ref_num <= rt_q[prim_idx].ref_num + 1'b1;
          if (req.last) rt_q[prim_idx].closed <= 1'b1;
        end
      end
    end
  end

  // a response must name an entry that has been issued and not yet answered
  a_resp_valid: assert property (@(posedge clk) disable iff (!rst_n)
                  mem_resp_valid |-> (rt_q[mem_resp.tag].valid && !rt_q[mem_resp.tag].pend));
  // a request offered to memory stays stable until taken
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
                  (mem_req_valid && !mem_req_ready) |=> (mem_req_valid && $stable(mem_req.tag)));
endmodule
