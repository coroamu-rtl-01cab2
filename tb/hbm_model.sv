// hbm_model: behavioural model of the far memory (the HBM stacks of the
// emulation platform) for testbenches only. Not synthesizable RTL.
//
// Accepts one line request per cycle while `hold` is low, keeps written
// lines in an associative array and answers every request in order LAT
// cycles later (LAT = 1 gives the next cycle). A line never written
// reads as pattern(line): word w of line L is {L[31:0], 24'h0, 8'(w)}.
// Masked writes update only the 8-byte words selected. Counters report the
// reads and writes served and the largest number outstanding.
module hbm_model
  import coroamu_pkg::*;
#(
  parameter int unsigned LAT = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      hold,
  input  logic      req_valid,
  output logic      req_ready,
  input  mem_req_t  req,
  output logic      resp_valid,
  input  logic      resp_ready,
  output mem_resp_t resp,
  output int        n_reads,
  output int        n_writes
);
  logic [LINE_W-1:0] mem [logic [MADDR_W-7:0]];
  mem_resp_t q_resp[$];
  longint    q_time[$];
  longint    now;

  function automatic logic [LINE_W-1:0] pattern(logic [MADDR_W-7:0] l);
    logic [LINE_W-1:0] r;
    for (int w = 0; w < WORDS_PER_LINE; w++) r[64*w +: 64] = {l[31:0], 24'h0, 8'(w)};
    return r;
  endfunction

  function automatic logic [LINE_W-1:0] peek(logic [MADDR_W-7:0] l);
    return mem.exists(l) ? mem[l] : pattern(l);
  endfunction

  assign req_ready  = !hold;
  assign resp_valid = (q_resp.size() != 0) && (q_time[0] <= now) && !hold;
  assign resp       = (q_resp.size() != 0) ? q_resp[0] : '0;

  always @(posedge clk) begin
    if (!rst_n) begin
      now <= 0; n_reads <= 0; n_writes <= 0;
      q_resp.delete(); q_time.delete();
    end else begin
      now <= now + 1;
      if (resp_valid && resp_ready) begin
        void'(q_resp.pop_front()); void'(q_time.pop_front());
      end
      if (req_valid && req_ready) begin
        mem_resp_t r;
        logic [LINE_W-1:0] cur;
        r.write = req.write; r.tag = req.tag; r.rdata = '0;
        cur = peek(req.line);
        if (req.write) begin
          for (int w = 0; w < WORDS_PER_LINE; w++)
            if (req.wmask[w]) cur[64*w +: 64] = req.wdata[64*w +: 64];
          mem[req.line] = cur;
          n_writes <= n_writes + 1;
        end else begin
          r.rdata = cur;
          n_reads <= n_reads + 1;
        end
        q_resp.push_back(r);
        q_time.push_back(now + longint'(LAT));
      end
    end
  end
endmodule
