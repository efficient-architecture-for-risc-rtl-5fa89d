// earth_top: vector memory-access unit with its row/column register file.
//
// Connects the vector load/store unit to the row/column-accessible register
// file. The frontend's instruction queues, the memory side (LdReq/LdResp,
// StReq/StAck, one MLEN line per request) and a register port for the
// vector datapath (vu_*) are the top's ports. The datapath port is a row
// port that is served whenever the load/store unit is not using the register
// file in that cycle (vu_wr_ready / vu_rd_ready); the load/store unit's
// writes are never stalled. A datapath read returns vu_rd_out_valid and the
// register one cycle after it is granted.
//
// The blocks and their connections follow the paper's block diagram of the
// memory-access unit; the datapath port and its lower priority stand in for
// the vector datapath, which is outside this design.
module earth_top
  import earth_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ld_instr_valid,
  output logic              ld_instr_ready,
  input  vinstr_t           ld_instr,
  input  logic              st_instr_valid,
  output logic              st_instr_ready,
  input  vinstr_t           st_instr,
  output logic              ld_req_valid,
  input  logic              ld_req_ready,
  output logic [AW-1:0]     ld_req_addr,
  output logic [TAGW-1:0]   ld_req_tag,
  input  logic              ld_resp_valid,
  input  logic [TAGW-1:0]   ld_resp_tag,
  input  logic [MLEN-1:0]   ld_resp_data,
  output logic              st_req_valid,
  input  logic              st_req_ready,
  output logic [AW-1:0]     st_req_addr,
  output logic [MLEN-1:0]   st_req_data,
  output logic [MLENB-1:0]  st_req_mask,
  output logic [TAGW-1:0]   st_req_tag,
  input  logic              st_ack_valid,
  input  logic [TAGW-1:0]   st_ack_tag,
  // vector datapath register port
  input  logic              vu_wr_valid,
  output logic              vu_wr_ready,
  input  logic [4:0]        vu_wr_vreg,
  input  logic [VLEN-1:0]   vu_wr_data,
  input  logic [VLENB-1:0]  vu_wr_mask,
  input  logic              vu_rd_valid,
  output logic              vu_rd_ready,
  input  logic [4:0]        vu_rd_vreg,
  output logic              vu_rd_out_valid,
  output logic [VLEN-1:0]   vu_rd_data,
  output logic              busy,
  output logic              ld_coalesced
);
  logic    l_wv, l_rv, l_rr;
  vrf_wr_t l_w;
  vrf_rd_t l_r;
  logic    ld_busy, st_busy;
  logic    rd_ov;
  logic [VLEN-1:0] rd_d;

  logic    f_wv, f_rv;
  vrf_wr_t f_w;
  vrf_rd_t f_r;
  logic    rd_by_vu;    // the read returning this cycle was the datapath's

  vlsu u_vlsu (
    .clk(clk), .rst_n(rst_n),
    .ld_instr_valid(ld_instr_valid), .ld_instr_ready(ld_instr_ready), .ld_instr(ld_instr),
    .st_instr_valid(st_instr_valid), .st_instr_ready(st_instr_ready), .st_instr(st_instr),
    .ld_req_valid(ld_req_valid), .ld_req_ready(ld_req_ready), .ld_req_addr(ld_req_addr), .ld_req_tag(ld_req_tag),
    .ld_resp_valid(ld_resp_valid), .ld_resp_tag(ld_resp_tag), .ld_resp_data(ld_resp_data),
    .st_req_valid(st_req_valid), .st_req_ready(st_req_ready), .st_req_addr(st_req_addr),
    .st_req_data(st_req_data), .st_req_mask(st_req_mask), .st_req_tag(st_req_tag),
    .st_ack_valid(st_ack_valid), .st_ack_tag(st_ack_tag),
    .vrf_wr_valid(l_wv), .vrf_wr(l_w),
    .vrf_rd_valid(l_rv), .vrf_rd_ready(l_rr), .vrf_rd(l_r),
    .vrf_rd_out_valid(rd_ov && !rd_by_vu), .vrf_rd_data(rd_d),
    .ld_busy(ld_busy), .st_busy(st_busy), .ld_coalesced(ld_coalesced));

  // Register-file port arbitration: the load/store unit first.
  assign vu_wr_ready = !l_wv;
  assign l_rr        = 1'b1;
  assign vu_rd_ready = !l_rv;

  always_comb begin
    f_wv = l_wv || vu_wr_valid;
    f_w  = l_w;
    if (!l_wv) begin
      f_w      = '0;
      f_w.vreg = vu_wr_vreg;
      f_w.data = vu_wr_data;
      f_w.mask = vu_wr_mask;
    end
    f_rv = l_rv || vu_rd_valid;
    f_r  = l_r;
    if (!l_rv) begin
      f_r      = '0;
      f_r.vreg = vu_rd_vreg;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_by_vu <= 1'b0;
    else        rd_by_vu <= vu_rd_valid && !l_rv;
  end

  rcvrf u_rcvrf (
    .clk(clk), .rst_n(rst_n), .wr_valid(f_wv), .wr(f_w), .rd_valid(f_rv), .rd(f_r),
    .rd_out_valid(rd_ov), .rd_data(rd_d));

  assign vu_rd_out_valid = rd_ov && rd_by_vu;
  assign vu_rd_data      = rd_d;
  assign busy            = ld_busy || st_busy;
endmodule
