// lsdo: Load/Store Data Organizer.
//
// Turns memory lines into register data and back for one memory operation
// (mop) per cycle in each direction.
//
// Load path (line -> register), one cycle:
//   unit-stride : bytes [offset, offset+n) of the line are rotated to the
//                 register position vbyte; Reverser and DROM are bypassed.
//   strided     : Reverser (negative stride only) -> DROM gather, which packs
//                 the nelem elements at byte 0 -> rotation to vbyte.
//   segment     : the fields of the segment are rotated down to byte 0; the
//                 column write into the register file spreads them (that
//                 DROM is in the register file).
// The result is a register-file write request (row, or column for segments).
//
// Store path (register -> line), one cycle, the same blocks in reverse order:
//   Byte Shifter -> DROM scatter (strided) -> Reverser (negative stride).
//   unit-stride : register bytes from vbyte are rotated to the line offset.
//   strided     : register bytes from vbyte are rotated to byte 0, scattered
//                 to stride-separated positions and reversed if negative.
//   segment     : the packed fields (from a column read) are rotated to the
//                 line offset.
// The result is line data plus a byte mask for the store request.
//
// The two paths are separate pipelines with a DROM each so that loads and
// stores can proceed together (the paper draws the two flows separately and
// does not say whether they share hardware). Bypassed data is registered too,
// so every kind has the same one-cycle latency.
module lsdo
  import earth_pkg::*;
#(
  parameter int unsigned N = MLENB
) (
  input  logic              clk,
  input  logic              rst_n,
  // load: ordered response and its mop
  input  logic              ld_in_valid,
  input  mop_t              ld_mop,
  input  logic [N-1:0][7:0] ld_data,
  output logic              ld_out_valid,
  output vrf_wr_t           ld_out,
  // store: register data for a store mop
  input  logic              st_in_valid,
  input  mop_t              st_mop,
  input  logic [N-1:0][7:0] st_data,
  output logic              st_out_valid,
  output mop_t              st_out_mop,
  output logic [N-1:0][7:0] st_out_data,
  output logic [N-1:0]      st_out_mask
);
  localparam int unsigned BW = $clog2(N);

  function automatic logic [N-1:0] range_mask(input logic [BW-1:0] off, input logic [CW:0] nelem,
                                              input logic [1:0] eew_log);
    logic [BW+4:0] lo, hi;
    lo = (BW+5)'(off);
    hi = lo + ((BW+5)'(nelem) << eew_log);
    for (int p = 0; p < N; p++) range_mask[p] = ((BW+5)'(p) >= lo) && ((BW+5)'(p) < hi);
  endfunction

  // =================== load ===================
  logic              l_strided;
  logic [N-1:0][7:0] l_rev;
  logic [N-1:0]      l_rev_m;
  logic              l_drom_v;
  logic [N-1:0][7:0] l_drom_d;
  logic [N-1:0]      l_drom_m;

  assign l_strided = ld_mop.kind == M_STRIDED;

  reverser #(.N(N)) u_ld_rev (
    .en(ld_mop.neg), .eew_log(ld_mop.eew_log), .data_in(ld_data), .mask_in('1),
    .data_out(l_rev), .mask_out(l_rev_m));

  drom #(.N(N), .CW(BW)) u_ld_drom (
    .clk(clk), .rst_n(rst_n), .in_valid(ld_in_valid && l_strided), .scatter(1'b0),
    .data_in(l_rev), .stride(ld_mop.stride), .eew_log(ld_mop.eew_log),
    .offset(ld_mop.offset), .nelem(ld_mop.nelem),
    .out_valid(l_drom_v), .data_out(l_drom_d), .mask_out(l_drom_m));

  logic              l_v;
  mop_t              l_mop;
  logic [N-1:0][7:0] l_data;   // bypass register

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) l_v <= 1'b0;
    else        l_v <= ld_in_valid;
  end
  always_ff @(posedge clk) begin
    if (ld_in_valid) begin
      l_mop  <= ld_mop;
      l_data <= ld_data;
    end
  end

  logic [BW-1:0]     l_amt;
  logic [N-1:0][7:0] l_sh_in, l_sh_out;
  logic [N-1:0]      l_m_in, l_m_out;

  always_comb begin
    unique case (l_mop.kind)
      M_STRIDED: begin
        l_amt   = l_mop.vbyte;
        l_sh_in = l_drom_d;
        l_m_in  = l_drom_m;
      end
      M_SEG: begin
        l_amt   = BW'(0) - l_mop.offset;
        l_sh_in = l_data;
        l_m_in  = range_mask(l_mop.offset, l_mop.nelem, l_mop.eew_log);
      end
      default: begin
        l_amt   = l_mop.vbyte - l_mop.offset;
        l_sh_in = l_data;
        l_m_in  = range_mask(l_mop.offset, l_mop.nelem, l_mop.eew_log);
      end
    endcase
  end

  byte_shifter #(.N(N)) u_ld_bsh (
    .amt(l_amt), .data_in(l_sh_in), .mask_in(l_m_in), .data_out(l_sh_out), .mask_out(l_m_out));

  assign ld_out_valid = l_v;
  always_comb begin
    ld_out          = '0;
    ld_out.col      = (l_mop.kind == M_SEG);
    ld_out.vreg     = l_mop.vreg;
    ld_out.vbyte    = l_mop.vbyte;
    ld_out.eew_log  = l_mop.eew_log;
    ld_out.emul_log = l_mop.emul_log;
    ld_out.f0       = l_mop.f0;
    ld_out.nfld     = l_mop.nelem;
    for (int p = 0; p < N; p++) begin
      ld_out.data[8*p +: 8] = l_m_out[p] ? l_sh_out[p] : 8'h00;
      ld_out.mask[p]        = l_m_out[p];
    end
  end

  // drom output must line up with the bypass register
  a_ld_align: assert property (@(posedge clk) disable iff (!rst_n)
                               l_drom_v |-> l_v && l_mop.kind == M_STRIDED);

  // =================== store ===================
  logic [BW-1:0]     s_amt;
  logic [N-1:0][7:0] s_sh;
  logic [N-1:0]      s_shm;

  always_comb begin
    unique case (st_mop.kind)
      M_STRIDED: s_amt = BW'(0) - st_mop.vbyte;
      M_SEG:     s_amt = st_mop.offset;
      default:   s_amt = st_mop.offset - st_mop.vbyte;
    endcase
  end

  byte_shifter #(.N(N)) u_st_bsh (
    .amt(s_amt), .data_in(st_data), .mask_in('1), .data_out(s_sh), .mask_out(s_shm));

  logic              s_drom_v;
  logic [N-1:0][7:0] s_drom_d;
  logic [N-1:0]      s_drom_m;

  drom #(.N(N), .CW(BW)) u_st_drom (
    .clk(clk), .rst_n(rst_n), .in_valid(st_in_valid && st_mop.kind == M_STRIDED), .scatter(1'b1),
    .data_in(s_sh), .stride(st_mop.stride), .eew_log(st_mop.eew_log),
    .offset(st_mop.offset), .nelem(st_mop.nelem),
    .out_valid(s_drom_v), .data_out(s_drom_d), .mask_out(s_drom_m));

  logic              s_v;
  mop_t              s_mop;
  logic [N-1:0][7:0] s_data;
  logic [N-1:0]      s_mask;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s_v <= 1'b0;
    else        s_v <= st_in_valid;
  end
  always_ff @(posedge clk) begin
    if (st_in_valid) begin
      s_mop  <= st_mop;
      s_data <= s_sh;
      s_mask <= range_mask(st_mop.offset, st_mop.nelem, st_mop.eew_log);
    end
  end

  logic [N-1:0][7:0] s_rev;
  logic [N-1:0]      s_rev_m;

  reverser #(.N(N)) u_st_rev (
    .en(s_mop.neg), .eew_log(s_mop.eew_log), .data_in(s_drom_d), .mask_in(s_drom_m),
    .data_out(s_rev), .mask_out(s_rev_m));

  assign st_out_valid = s_v;
  assign st_out_mop   = s_mop;
  always_comb begin
    for (int p = 0; p < N; p++) begin
      if (s_mop.kind == M_STRIDED) begin
        st_out_data[p] = s_rev[p];
        st_out_mask[p] = s_rev_m[p];
      end else begin
        st_out_data[p] = s_mask[p] ? s_data[p] : 8'h00;
        st_out_mask[p] = s_mask[p];
      end
    end
  end
endmodule
