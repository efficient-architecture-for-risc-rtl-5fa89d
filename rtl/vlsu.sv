// vlsu: vector load/store unit.
//
// Load side:  VLIQ -> LAS -> (LIFQ entry + LdReq) ... LdResp -> LROB ->
//             in-order drain -> LSDO load path -> register-file write.
// Store side: VSIQ -> SAS -> SIFQ -> register-file read -> LSDO store path
//             -> StReq ... StAck -> SAU -> SIFQ retire.
// A load mop is issued when both a LIFQ entry and the memory request channel
// are free; the entry index is the request tag. Responses may return in any
// order; the LROB holds them until the LIFQ head's data is present, then the
// head is popped into the LSDO and one cycle later its register write comes
// out (vrf_wr_valid, never stalled: the unit has priority at the register
// write port). Stores are sent in order and their entries retire in order as
// acknowledgements arrive in any order.
//
// Loads and stores proceed independently; ordering between a load and an
// older store to the same address is left to the issuer. Requires MLEN ==
// VLEN.
module vlsu
  import earth_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // instructions from the frontend
  input  logic              ld_instr_valid,
  output logic              ld_instr_ready,
  input  vinstr_t           ld_instr,
  input  logic              st_instr_valid,
  output logic              st_instr_ready,
  input  vinstr_t           st_instr,
  // LdReq / LdResp
  output logic              ld_req_valid,
  input  logic              ld_req_ready,
  output logic [AW-1:0]     ld_req_addr,
  output logic [TAGW-1:0]   ld_req_tag,
  input  logic              ld_resp_valid,
  input  logic [TAGW-1:0]   ld_resp_tag,
  input  logic [MLEN-1:0]   ld_resp_data,
  // StReq / StAck
  output logic              st_req_valid,
  input  logic              st_req_ready,
  output logic [AW-1:0]     st_req_addr,
  output logic [MLEN-1:0]   st_req_data,
  output logic [MLENB-1:0]  st_req_mask,
  output logic [TAGW-1:0]   st_req_tag,
  input  logic              st_ack_valid,
  input  logic [TAGW-1:0]   st_ack_tag,
  // register file
  output logic              vrf_wr_valid,
  output vrf_wr_t           vrf_wr,
  output logic              vrf_rd_valid,
  input  logic              vrf_rd_ready,
  output vrf_rd_t           vrf_rd,
  input  logic              vrf_rd_out_valid,
  input  logic [VLEN-1:0]   vrf_rd_data,
  // status
  output logic              ld_busy,
  output logic              st_busy,
  output logic              ld_coalesced   // a load mop with more than one strided element issued
);
  initial assert (MLEN == VLEN) else $error("vlsu: MLEN must equal VLEN");

  // ---------------- load side ----------------
  logic    liq_v, liq_r;
  vinstr_t liq_i;
  logic    las_mv, las_mr, las_busy;
  mop_t    las_mop;
  logic    lq_ar, lq_hv, lq_pop;
  mop_t    lq_hmop;
  logic [TAGW-1:0] lq_atag, lq_htag;
  logic    rob_hr;
  logic [MLEN-1:0] rob_hd;
  logic    l_out_v;

  vmem_iq u_vliq (
    .clk(clk), .rst_n(rst_n), .in_valid(ld_instr_valid), .in_ready(ld_instr_ready), .in_instr(ld_instr),
    .out_valid(liq_v), .out_ready(liq_r), .out_instr(liq_i));

  addr_seq u_las (
    .clk(clk), .rst_n(rst_n), .in_valid(liq_v), .in_ready(liq_r), .in_instr(liq_i),
    .mop_valid(las_mv), .mop_ready(las_mr), .mop(las_mop), .busy(las_busy));

  assign ld_req_valid = las_mv && lq_ar;
  assign ld_req_addr  = las_mop.addr;
  assign ld_req_tag   = lq_atag;
  assign las_mr       = lq_ar && ld_req_ready;

  lifq u_lifq (
    .clk(clk), .rst_n(rst_n), .alloc_valid(las_mv && ld_req_ready), .alloc_ready(lq_ar),
    .alloc_mop(las_mop), .alloc_tag(lq_atag), .head_valid(lq_hv), .head_mop(lq_hmop),
    .head_tag(lq_htag), .pop(lq_pop));

  lrob u_lrob (
    .clk(clk), .rst_n(rst_n), .resp_valid(ld_resp_valid), .resp_tag(ld_resp_tag),
    .resp_data(ld_resp_data), .head_tag(lq_htag), .head_ready(rob_hr), .head_data(rob_hd),
    .release_head(lq_pop));

  assign lq_pop = lq_hv && rob_hr;

  // ---------------- store side ----------------
  logic    siq_v, siq_r;
  vinstr_t siq_i;
  logic    sas_mv, sas_mr, sas_busy;
  mop_t    sas_mop;
  logic    s_lsdo_v, s_lsdo_ov;
  mop_t    s_lsdo_mop, s_lsdo_omop;
  logic [MLEN-1:0]  s_lsdo_d, s_lsdo_od;
  logic [MLENB-1:0] s_lsdo_om;
  logic    sq_hv, sq_retire, sq_busy;
  logic [TAGW-1:0] sq_htag;

  vmem_iq u_vsiq (
    .clk(clk), .rst_n(rst_n), .in_valid(st_instr_valid), .in_ready(st_instr_ready), .in_instr(st_instr),
    .out_valid(siq_v), .out_ready(siq_r), .out_instr(siq_i));

  addr_seq u_sas (
    .clk(clk), .rst_n(rst_n), .in_valid(siq_v), .in_ready(siq_r), .in_instr(siq_i),
    .mop_valid(sas_mv), .mop_ready(sas_mr), .mop(sas_mop), .busy(sas_busy));

  sifq u_sifq (
    .clk(clk), .rst_n(rst_n),
    .alloc_valid(sas_mv), .alloc_ready(sas_mr), .alloc_mop(sas_mop),
    .vrf_rd_valid(vrf_rd_valid), .vrf_rd_ready(vrf_rd_ready), .vrf_rd(vrf_rd),
    .vrf_rd_out_valid(vrf_rd_out_valid), .vrf_rd_data(vrf_rd_data),
    .lsdo_valid(s_lsdo_v), .lsdo_mop(s_lsdo_mop), .lsdo_data(s_lsdo_d),
    .lsdo_out_valid(s_lsdo_ov), .lsdo_out_data(s_lsdo_od), .lsdo_out_mask(s_lsdo_om),
    .st_req_valid(st_req_valid), .st_req_ready(st_req_ready), .st_req_addr(st_req_addr),
    .st_req_data(st_req_data), .st_req_mask(st_req_mask), .st_req_tag(st_req_tag),
    .head_valid(sq_hv), .head_tag(sq_htag), .retire(sq_retire), .busy(sq_busy));

  sau u_sau (
    .clk(clk), .rst_n(rst_n), .ack_valid(st_ack_valid), .ack_tag(st_ack_tag),
    .head_valid(sq_hv), .head_tag(sq_htag), .retire(sq_retire));

  // ---------------- data organizer ----------------
  lsdo u_lsdo (
    .clk(clk), .rst_n(rst_n),
    .ld_in_valid(lq_pop), .ld_mop(lq_hmop), .ld_data(rob_hd),
    .ld_out_valid(l_out_v), .ld_out(vrf_wr),
    .st_in_valid(s_lsdo_v), .st_mop(s_lsdo_mop), .st_data(s_lsdo_d),
    .st_out_valid(s_lsdo_ov), .st_out_mop(s_lsdo_omop), .st_out_data(s_lsdo_od),
    .st_out_mask(s_lsdo_om));

  assign vrf_wr_valid = l_out_v;
  assign ld_busy      = liq_v || las_busy || lq_hv || l_out_v;
  assign st_busy      = siq_v || sas_busy || sq_busy;
  assign ld_coalesced = ld_req_valid && ld_req_ready && las_mop.kind == M_STRIDED && las_mop.nelem > 1;

  a_st_omop: assert property (@(posedge clk) disable iff (!rst_n)
                              s_lsdo_ov |-> s_lsdo_omop.addr == st_req_addr);
endmodule
