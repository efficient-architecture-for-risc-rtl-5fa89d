// scg: Shift Count Generation.
//
// For a strided access described by its byte stride, element bytes (EEWB =
// 2^eew_log), the byte offset of the first element and the element count, it
// gives every byte position i on the compact side its shift distance
//     shiftCnt_i = (stride - EEWB) * floor(i / EEWB) + offset
// and a valid bit. Compact byte i sits at distance shiftCnt_i from its
// stride-separated position i + shiftCnt_i. As in the paper's figure, the
// per-element positions P_m = (stride - EEWB) * m + offset are formed first
// (a multiply by a constant m is a handful of shifted adds) and a mux per
// byte then picks P_{i/EEWB} according to EEWB.
//
// A byte is valid when it belongs to one of the nelem elements and its target
// stays inside the N-byte line. A stride smaller than EEWB only makes sense
// for a single element; the difference is then taken as 0.
// Combinational.
module scg #(
  parameter int unsigned N  = 64,
  parameter int unsigned CW = 6
) (
  input  logic [CW:0]            stride,
  input  logic [1:0]             eew_log,
  input  logic [CW-1:0]          offset,
  input  logic [CW:0]            nelem,
  output logic [N-1:0][CW-1:0]   cnt,
  output logic [N-1:0]           cnt_valid
);
  localparam int unsigned PWD = 2 * CW + 3;

  logic [CW:0]           eewb;
  logic [CW:0]           diff;
  logic [N-1:0][PWD-1:0] pos;      // P_m
  logic [CW+4:0]         nbytes;

  always_comb begin
    eewb   = (CW+1)'(1) << eew_log;
    diff   = (stride > eewb) ? stride - eewb : '0;
    nbytes = (CW+5)'(nelem) << eew_log;
    for (int m = 0; m < N; m++) begin
      pos[m] = PWD'(diff) * PWD'(m) + PWD'(offset);
    end
    for (int i = 0; i < N; i++) begin
      logic [PWD-1:0] p;
      unique case (eew_log)
        2'd0:    p = pos[i];
        2'd1:    p = pos[i / 2];
        2'd2:    p = pos[i / 4];
        default: p = pos[i / 8];
      endcase
      cnt[i]       = p[CW-1:0];
      cnt_valid[i] = ((CW+5)'(i) < nbytes) && ((PWD'(i) + p) < PWD'(N));
    end
  end
endmodule
