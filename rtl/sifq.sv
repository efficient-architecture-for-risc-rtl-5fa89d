// sifq: store in-flight queue.
//
// Store mops from the store address sequencer are allocated at the tail.
// Entries between the head and the issue pointer have been sent to memory
// and wait for their acknowledgement; entries between the issue pointer and
// the tail still have to be sent. Issue is one mop at a time:
//   S_IDLE -> read the register data (row read; column read of the segment's
//             fields for a segment mop) when the register file grants it
//   S_RD   -> the data is back: hand it with the mop to the data organizer
//   S_LS   -> capture the organized line and byte mask
//   S_REQ  -> hold the store request until memory takes it; the request tag
//             is the entry index
// so the best rate is one store mop every four cycles (this design's choice;
// the paper gives no rate). The head entry is retired by the acknowledgement
// unit when its acknowledgement has come back.
//
// lsdo_data is the register-file read data passed straight on to the data
// organizer: the queue holds only control, never the store data itself, so
// those outputs come from inputs without a register in between.
module sifq
  import earth_pkg::*;
#(
  parameter int unsigned DEPTH = QDEPTH,
  localparam int unsigned TW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // from SAS
  input  logic              alloc_valid,
  output logic              alloc_ready,
  input  mop_t              alloc_mop,
  // register file read
  output logic              vrf_rd_valid,
  input  logic              vrf_rd_ready,
  output vrf_rd_t           vrf_rd,
  input  logic              vrf_rd_out_valid,
  input  logic [VLEN-1:0]   vrf_rd_data,
  // data organizer, store path
  output logic              lsdo_valid,
  output mop_t              lsdo_mop,
  output logic [MLEN-1:0]   lsdo_data,
  input  logic              lsdo_out_valid,
  input  logic [MLEN-1:0]   lsdo_out_data,
  input  logic [MLENB-1:0]  lsdo_out_mask,
  // store request to memory
  output logic              st_req_valid,
  input  logic              st_req_ready,
  output logic [AW-1:0]     st_req_addr,
  output logic [MLEN-1:0]   st_req_data,
  output logic [MLENB-1:0]  st_req_mask,
  output logic [TW-1:0]     st_req_tag,
  // retirement (from SAU)
  output logic              head_valid,
  output logic [TW-1:0]     head_tag,
  input  logic              retire,
  output logic              busy
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_LS, S_REQ} state_e;

  mop_t          ent [DEPTH];
  logic [TW:0]   hp, ip, tp;
  state_e        st;
  mop_t          cur;
  logic [MLEN-1:0]  rq_data;
  logic [MLENB-1:0] rq_mask;

  assign alloc_ready = !(hp[TW] != tp[TW] && hp[TW-1:0] == tp[TW-1:0]);
  assign head_valid  = hp != ip;
  assign head_tag    = hp[TW-1:0];
  assign cur         = ent[ip[TW-1:0]];
  assign busy        = hp != tp;

  always_comb begin
    vrf_rd          = '0;
    vrf_rd.col      = cur.kind == M_SEG;
    vrf_rd.vreg     = cur.vreg;
    vrf_rd.vbyte    = cur.vbyte;
    vrf_rd.eew_log  = cur.eew_log;
    vrf_rd.emul_log = cur.emul_log;
    vrf_rd.f0       = cur.f0;
    vrf_rd.nfld     = cur.nelem;
  end
  assign vrf_rd_valid = st == S_IDLE && ip != tp;

  assign lsdo_valid = st == S_RD && vrf_rd_out_valid;
  assign lsdo_mop   = cur;
  assign lsdo_data  = vrf_rd_data[MLEN-1:0];

  assign st_req_valid = st == S_REQ;
  assign st_req_addr  = cur.addr;
  assign st_req_data  = rq_data;
  assign st_req_mask  = rq_mask;
  assign st_req_tag   = ip[TW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hp <= '0;
      ip <= '0;
      tp <= '0;
      st <= S_IDLE;
    end else begin
      if (alloc_valid && alloc_ready) tp <= tp + 1'b1;
      if (retire && head_valid)       hp <= hp + 1'b1;
      unique case (st)
        S_IDLE: if (vrf_rd_valid && vrf_rd_ready) st <= S_RD;
        S_RD:   if (vrf_rd_out_valid) st <= S_LS;
        S_LS:   if (lsdo_out_valid) st <= S_REQ;
        S_REQ:  if (st_req_ready) begin
                  st <= S_IDLE;
                  ip <= ip + 1'b1;
                end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_valid && alloc_ready) ent[tp[TW-1:0]] <= alloc_mop;
    if (st == S_LS && lsdo_out_valid) begin
      rq_data <= lsdo_out_data;
      rq_mask <= lsdo_out_mask;
    end
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 st_req_valid && !st_req_ready |=> st_req_valid && $stable(st_req_addr));
endmodule
