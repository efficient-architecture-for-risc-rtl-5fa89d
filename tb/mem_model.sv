// mem_model: behavioural memory for the load/store unit testbenches.
//
// A byte array of MEMB bytes (addresses wrap modulo MEMB) served one MLEN
// line per request. Load requests read the line when they are accepted and
// answer after a random delay of 2..MAXLAT cycles; among the answers that
// are due, one is picked at random each cycle, so responses come back out
// of order. Store requests write their masked bytes when accepted and are
// acknowledged the same way, out of order. Request ready is random unless
// `fast` is set (then always ready and answers in request order after a
// fixed delay). Counters report requests and out-of-order answers.
//
// The paper's memory system (shared L2 and DDR4) is not part of the design;
// this model only reproduces its interface behaviour (tags, reordering).
module mem_model
  import earth_pkg::*;
#(
  parameter int MEMB   = 65536,
  parameter int MAXLAT = 12
) (
  input  logic              clk,
  input  logic              fast,
  input  logic              ld_req_valid,
  output logic              ld_req_ready,
  input  logic [AW-1:0]     ld_req_addr,
  input  logic [TAGW-1:0]   ld_req_tag,
  output logic              ld_resp_valid,
  output logic [TAGW-1:0]   ld_resp_tag,
  output logic [MLEN-1:0]   ld_resp_data,
  input  logic              st_req_valid,
  output logic              st_req_ready,
  input  logic [AW-1:0]     st_req_addr,
  input  logic [MLEN-1:0]   st_req_data,
  input  logic [MLENB-1:0]  st_req_mask,
  input  logic [TAGW-1:0]   st_req_tag,
  output logic              st_ack_valid,
  output logic [TAGW-1:0]   st_ack_tag
);
  typedef struct {
    int              tag;
    longint          due;
    logic [MLEN-1:0] data;
  } pend_t;

  logic [7:0] mem [MEMB];
  pend_t  lq[$], sq[$];
  longint now = 0;
  int n_ld = 0, n_st = 0, n_ld_ooo = 0, n_st_ooo = 0;

  function automatic int pick(ref pend_t q[$], input longint t, input bit inorder);
    int due[$];
    foreach (q[i]) if (q[i].due <= t) due.push_back(i);
    if (due.size() == 0) return -1;
    if (inorder) return due[0];
    return due[$urandom_range(0, due.size() - 1)];
  endfunction

  initial begin
    ld_req_ready = 0;
    st_req_ready = 0;
    ld_resp_valid = 0;
    st_ack_valid = 0;
    ld_resp_tag = '0;
    st_ack_tag = '0;
    ld_resp_data = '0;
  end

  always @(negedge clk) begin
    int j;
    now++;
    ld_req_ready = fast ? 1'b1 : $urandom_range(0, 3) != 0;
    st_req_ready = fast ? 1'b1 : $urandom_range(0, 3) != 0;
    ld_resp_valid = 0;
    j = pick(lq, now, fast);
    if (j >= 0) begin
      ld_resp_valid = 1;
      ld_resp_tag   = TAGW'(lq[j].tag);
      ld_resp_data  = lq[j].data;
      if (j != 0) n_ld_ooo++;
      lq.delete(j);
    end
    st_ack_valid = 0;
    j = pick(sq, now, fast);
    if (j >= 0) begin
      st_ack_valid = 1;
      st_ack_tag   = TAGW'(sq[j].tag);
      if (j != 0) n_st_ooo++;
      sq.delete(j);
    end
  end

  always @(posedge clk) begin
    if (ld_req_valid && ld_req_ready) begin
      pend_t p;
      p.tag = int'(ld_req_tag);
      p.due = now + (fast ? 3 : $urandom_range(2, MAXLAT));
      for (int b = 0; b < MLENB; b++) p.data[b*8 +: 8] = mem[(int'(ld_req_addr) + b) % MEMB];
      lq.push_back(p);
      n_ld++;
    end
    if (st_req_valid && st_req_ready) begin
      pend_t p;
      p.tag = int'(st_req_tag);
      p.due = now + (fast ? 3 : $urandom_range(2, MAXLAT));
      p.data = '0;
      for (int b = 0; b < MLENB; b++)
        if (st_req_mask[b]) mem[(int'(st_req_addr) + b) % MEMB] = st_req_data[b*8 +: 8];
      sq.push_back(p);
      n_st++;
    end
  end
endmodule
