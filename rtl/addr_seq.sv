// addr_seq: load/store address sequencer (used as LAS and as SAS).
//
// Splits one vector memory instruction into memory operations (mops), one per
// cycle, each a single request for one aligned MLEN line:
//  * unit-stride and strided: a mop takes as many consecutive elements as
//    lie in the same aligned line as its first element, stopping also at the
//    end of the destination register and at vl. The sequencer keeps the
//    address a of the next element and evaluates a + t*stride for every
//    t = 1 .. MLENB-1 in parallel (multiplications by constants, i.e.
//    shift-and-add); the count of leading candidates that stay in a's line
//    is the coalescing factor. Strides with |stride| < EEWB (including 0)
//    are not coalesced: one element per mop. A negative stride sets the
//    mop's neg bit and gives the first element's offset in the reversed line.
//  * segment (segment-wise, as the paper's implementation): a mop covers the
//    fields of one segment that lie in one line; a segment that crosses a
//    line boundary becomes two mops, the second starting at field f0.
// Indexed accesses are not handled here.
//
// Handshake: in_valid/in_ready take an instruction when the sequencer is
// idle; mop_valid/mop_ready hand out mops. An instruction with vl = 0 makes
// no mop. Addresses are assumed element-aligned.
module addr_seq
  import earth_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  vinstr_t in_instr,
  output logic    mop_valid,
  input  logic    mop_ready,
  output mop_t    mop,
  output logic    busy
);
  localparam int unsigned NT = MLENB;        // candidates per cycle
  localparam int unsigned VBW = VLW + 3;     // byte index into a register group

  vinstr_t        ins;
  logic           act;
  logic [VLW-1:0] e;          // element (or segment) index
  logic [2:0]     f0;         // next field (segment)
  logic [AW-1:0]  a;          // address of element e (segment e for segments)

  // ---------------- combinational split ----------------
  logic              seg;
  logic [CW:0]       eewb;
  logic signed [AW-1:0] s;     // element stride (unit: EEWB)
  logic [AW-1:0]     s_abs;
  logic              neg;
  logic [AW-1:0]     cand [NT+1];
  logic [CW:0]       k_line;
  logic [VBW-1:0]    vb_tot;
  logic [4:0]        vreg;
  logic [CW-1:0]     vbyte;
  logic [CW:0]       n_reg;
  logic [VLW-1:0]    n_rem;
  logic [CW:0]       k;
  logic              last;
  logic [AW-1:0]     fa;        // address of field f0 (segment)
  logic [CW:0]       n_fld;
  logic [3:0]        nf;

  always_comb begin
    seg    = ins.kind == K_SEG_UNIT || ins.kind == K_SEG_STRIDED;
    eewb   = (CW+1)'(1) << ins.eew_log;
    nf     = 4'(ins.nf_m1) + 4'd1;
    unique case (ins.kind)
      K_UNIT:     s = AW'(eewb);
      K_SEG_UNIT: s = AW'(eewb) * AW'(nf);
      default:    s = ins.stride;
    endcase
    neg    = s < 0;
    s_abs  = neg ? AW'(-s) : AW'(s);

    // candidates a + t*s, t = 0 .. NT
    for (int t = 0; t <= NT; t++) cand[t] = a + AW'(s * t);
    k_line = 1;
    for (int t = 1; t < NT; t++) begin
      if (k_line == (CW+1)'(t) && cand[t][AW-1:CW] == a[AW-1:CW]) k_line = (CW+1)'(t + 1);
    end

    vb_tot = VBW'(e) << ins.eew_log;
    vreg   = ins.vd + 5'(vb_tot / VLENB);
    vbyte  = CW'(vb_tot % VLENB);
    n_reg  = (CW+1)'(((CW+2)'(VLENB) - (CW+2)'(vbyte)) >> ins.eew_log);
    n_rem  = ins.vl - e;

    // unit / strided coalescing factor
    k = k_line;
    if (s_abs < AW'(eewb)) k = 1;
    if (n_reg < k) k = n_reg;
    if (n_rem < VLW'(k)) k = (CW+1)'(n_rem);

    // segment: fields of segment e from field f0 that share a line
    fa    = a + (AW'(f0) << ins.eew_log);
    n_fld = (CW+1)'(((CW+2)'(MLENB) - (CW+2)'(fa[CW-1:0])) >> ins.eew_log);
    if (n_fld > (CW+1)'(nf - 4'(f0))) n_fld = (CW+1)'(nf - 4'(f0));

    mop          = '0;
    mop.store    = ins.store;
    mop.eew_log  = ins.eew_log;
    mop.emul_log = ins.emul_log;
    mop.vreg     = vreg;
    mop.vbyte    = vbyte;
    if (seg) begin
      mop.kind   = M_SEG;
      mop.addr   = {fa[AW-1:CW], {CW{1'b0}}};
      mop.offset = fa[CW-1:0];
      mop.nelem  = n_fld;
      mop.f0     = f0;
      mop.stride = eewb;
      last       = (e == ins.vl - 1'b1) && (4'(f0) + 4'(n_fld) == nf);
    end else begin
      mop.kind   = (ins.kind == K_UNIT) ? M_UNIT : M_STRIDED;
      mop.addr   = {a[AW-1:CW], {CW{1'b0}}};
      mop.neg    = neg && ins.kind == K_STRIDED;
      mop.offset = mop.neg ? CW'(MLENB) - CW'(eewb) - a[CW-1:0] : a[CW-1:0];
      mop.nelem  = k;
      mop.stride = (s_abs > AW'(MLENB)) ? (CW+1)'(MLENB) : (CW+1)'(s_abs);
      last       = (n_rem == VLW'(k));
    end
  end

  assign in_ready  = !act;
  assign mop_valid = act;
  assign busy      = act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0;
      e   <= '0;
      f0  <= '0;
      a   <= '0;
      ins <= '0;
    end else if (!act) begin
      if (in_valid && in_instr.vl != '0) begin
        act <= 1'b1;
        ins <= in_instr;
        e   <= '0;
        f0  <= '0;
        a   <= in_instr.base;
      end
    end else if (mop_ready) begin
      if (last) begin
        act <= 1'b0;
      end else if (seg) begin
        if (4'(f0) + 4'(n_fld) == nf) begin
          f0 <= '0;
          e  <= e + 1'b1;
          a  <= a + AW'(s);
        end else begin
          f0 <= f0 + 3'(n_fld);
        end
      end else begin
        e <= e + VLW'(k);
        a <= cand[k];
      end
    end
  end

  a_k_nonzero: assert property (@(posedge clk) disable iff (!rst_n) mop_valid |-> mop.nelem != 0);
endmodule
