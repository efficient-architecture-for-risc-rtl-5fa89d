// rcvrf: row/column-accessible vector register file.
//
// The 32 vector registers are kept in a shifted_vrf: ELEN block j of register
// i is in bank (i + j) mod NBANKS, row (floor(i/NBANKS)*VLEN/ELEN + i mod
// NBANKS) mod NROWS. Consecutive blocks of one register fall in consecutive
// banks, and the same block of eight consecutive registers falls in eight
// different banks, so either can be accessed in one cycle.
//
//  * Row access (one register): all blocks share one row; a block shifter
//    rotates by vreg mod NBANKS so that block 0 of the register meets bank
//    (vreg mod NBANKS).
//  * Column access (one element, or a range of segment fields, across the
//    registers vreg, vreg+EMUL, ...): element byte offset vbyte selects ELEN
//    block j = vbyte/(ELEN/8) and byte b inside it. Register vreg+q sits in
//    bank (vreg + q + j) mod NBANKS at its own row. On a write the packed
//    fields (field f0 at byte 0) are first spread by a DROM scatter with the
//    constant stride EMUL*ELEN/8 and offset b + f0*EMUL*ELEN/8, so that field
//    f lands in block f*EMUL at byte b; the block shifter then rotates by
//    (vreg + j) mod NBANKS. A read runs the other way: block shifter, then a
//    DROM gather with the same stride, which returns the fields packed from
//    byte 0.
//
// Timing: a write request takes effect one cycle after it is presented (a row
// write goes through a register so that row and column writes stay in
// order), i.e. it is visible to a read requested two cycles after it. A read
// returns rd_out_valid/rd_data one cycle after rd_valid; it sees the register
// contents of the cycle in which it was requested (no bypass).
module rcvrf
  import earth_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  input  vrf_wr_t          wr,
  input  logic             rd_valid,
  input  vrf_rd_t          rd,
  output logic             rd_out_valid,
  output logic [VLEN-1:0]  rd_data
);
  localparam int unsigned NROWS = VLEN * NVREG / (ELEN * NBANKS);
  localparam int unsigned RW    = $clog2(NROWS);
  localparam int unsigned EB    = ELEN / 8;            // bytes per block
  localparam int unsigned NC    = NBANKS * EB;         // bytes in a column access
  localparam int unsigned NCW   = $clog2(NC);
  localparam int unsigned NBLK  = VLEN / ELEN;         // blocks per register
  localparam int unsigned BKW   = $clog2(NBANKS);

  initial assert (NBLK <= NBANKS) else $error("rcvrf: VLEN/ELEN must not exceed NBANKS");

  function automatic logic [RW-1:0] row_of(input logic [4:0] v);
    return RW'(vrf_row(int'(v), NROWS));
  endfunction

  // ---------------- write side ----------------
  logic              c_v;
  logic [NC-1:0][7:0] c_d;
  logic [NC-1:0]      c_m;

  // Column write: DROM scatter with stride EMUL*ELEN/8.
  logic [NC-1:0][7:0] wr_bytes;
  logic [NCW:0]       w_stride;
  logic [NCW-1:0]     w_off;
  assign wr_bytes = wr.data[NC*8-1:0];
  assign w_stride = (NCW+1)'(EB) << wr.emul_log;
  assign w_off    = NCW'(wr.vbyte % EB) + NCW'((NCW+4)'(wr.f0) * (NCW+4)'(EB) << wr.emul_log);

  drom #(.N(NC), .CW(NCW)) u_wr_drom (
    .clk(clk), .rst_n(rst_n), .in_valid(wr_valid && wr.col), .scatter(1'b1),
    .data_in(wr_bytes), .stride(w_stride), .eew_log(wr.eew_log), .offset(w_off),
    .nelem(wr.nfld), .out_valid(c_v), .data_out(c_d), .mask_out(c_m));

  logic    w_v;
  vrf_wr_t w_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) w_v <= 1'b0;
    else        w_v <= wr_valid;
  end
  always_ff @(posedge clk) begin
    if (wr_valid) w_q <= wr;
  end

  logic [NBANKS-1:0][ELEN-1:0] w_log_d, w_bank_d;   // logical block order, bank order
  logic [NBANKS-1:0][EB-1:0]   w_log_m, w_bank_m;
  logic [BKW-1:0]              w_amt;
  logic [BKW-1:0]              w_j;
  logic [NBANKS-1:0]           b_wen;
  logic [NBANKS-1:0][RW-1:0]   b_wrow;

  always_comb begin
    w_log_d = '0;
    w_log_m = '0;
    w_j     = BKW'(w_q.vbyte / EB);
    if (w_q.col) begin
      for (int q = 0; q < NBANKS; q++) begin
        w_log_d[q] = c_d[q*EB +: EB];
        w_log_m[q] = c_m[q*EB +: EB];
      end
      w_amt = BKW'(w_q.vreg) + w_j;
    end else begin
      for (int q = 0; q < NBLK; q++) begin
        w_log_d[q] = w_q.data[q*ELEN +: ELEN];
        w_log_m[q] = w_q.mask[q*EB +: EB];
      end
      w_amt = BKW'(w_q.vreg);
    end
    for (int k = 0; k < NBANKS; k++) begin
      logic [BKW-1:0] q;
      q = BKW'(k) - w_amt;                    // logical position held by bank k
      b_wen[k]  = w_v && (w_bank_m[k] != '0);
      b_wrow[k] = w_q.col ? row_of(w_q.vreg + 5'(q)) : row_of(w_q.vreg);
    end
  end

  block_shifter #(.NB(NBANKS), .BW(ELEN)) u_wr_bsh (
    .amt(w_amt), .dir(1'b0), .din(w_log_d), .dout(w_bank_d));
  block_shifter #(.NB(NBANKS), .BW(EB)) u_wr_bsh_m (
    .amt(w_amt), .dir(1'b0), .din(w_log_m), .dout(w_bank_m));

  // ---------------- storage ----------------
  logic [NBANKS-1:0][RW-1:0]   b_rrow;
  logic [NBANKS-1:0][ELEN-1:0] b_rdata;

  shifted_vrf #(.NBANKS(NBANKS), .ELEN(ELEN), .NROWS(NROWS)) u_vrf (
    .clk(clk), .wr_en(b_wen), .wr_row(b_wrow), .wr_be(w_bank_m), .wr_data(w_bank_d),
    .rd_row(b_rrow), .rd_data(b_rdata));

  // ---------------- read side ----------------
  logic [BKW-1:0]              r_amt;
  logic [NBANKS-1:0][ELEN-1:0] r_log;
  logic [NC-1:0][7:0]          r_bytes;

  always_comb begin
    logic [BKW-1:0] j;
    j = BKW'(rd.vbyte / EB);
    r_amt = rd.col ? BKW'(rd.vreg) + j : BKW'(rd.vreg);
    for (int k = 0; k < NBANKS; k++) begin
      logic [BKW-1:0] q;
      q = BKW'(k) - r_amt;
      b_rrow[k] = rd.col ? row_of(rd.vreg + 5'(q)) : row_of(rd.vreg);
    end
    for (int q = 0; q < NBANKS; q++) r_bytes[q*EB +: EB] = r_log[q];
  end

  block_shifter #(.NB(NBANKS), .BW(ELEN)) u_rd_bsh (
    .amt(r_amt), .dir(1'b1), .din(b_rdata), .dout(r_log));

  logic [NCW:0]   r_stride;
  logic [NCW-1:0] r_off;
  logic           g_v;
  logic [NC-1:0][7:0] g_d;
  logic [NC-1:0]  g_m;
  assign r_stride = (NCW+1)'(EB) << rd.emul_log;
  assign r_off    = NCW'(rd.vbyte % EB) + NCW'((NCW+4)'(rd.f0) * (NCW+4)'(EB) << rd.emul_log);

  drom #(.N(NC), .CW(NCW)) u_rd_drom (
    .clk(clk), .rst_n(rst_n), .in_valid(rd_valid && rd.col), .scatter(1'b0),
    .data_in(r_bytes), .stride(r_stride), .eew_log(rd.eew_log), .offset(r_off),
    .nelem(rd.nfld), .out_valid(g_v), .data_out(g_d), .mask_out(g_m));

  logic            r_v, r_col;
  logic [VLEN-1:0] r_row;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_v <= 1'b0;
    else        r_v <= rd_valid;
  end
  always_ff @(posedge clk) begin
    if (rd_valid) begin
      r_col <= rd.col;
      for (int q = 0; q < NBLK; q++) r_row[q*ELEN +: ELEN] <= r_log[q];
    end
  end

  assign rd_out_valid = r_v;
  always_comb begin
    rd_data = r_row;
    if (r_col) begin
      rd_data = '0;
      rd_data[NC*8-1:0] = g_d;
    end
  end

  a_col_latency: assert property (@(posedge clk) disable iff (!rst_n) g_v |-> r_v && r_col);
endmodule
