// reverser: element-order reversal of an N-byte line.
//
// A negative-stride access visits its elements at falling addresses. With en
// set, the element at byte position p moves to position N - EEWB - p (EEWB =
// 2^eew_log), so the visited elements appear at rising positions and the
// positive-stride gather/scatter can handle them. The bytes inside an element
// keep their order: out[p] = in[(N-1-p) XOR (EEWB-1)]. The transform is its
// own inverse, so the store path uses the same block. The paper gives the
// Reverser's job, not its insides; element-order reversal is this design's
// choice and needs element-aligned addresses. The byte mask is reversed
// alongside. Combinational.
module reverser #(
  parameter int unsigned N = 64
) (
  input  logic              en,
  input  logic [1:0]        eew_log,
  input  logic [N-1:0][7:0] data_in,
  input  logic [N-1:0]      mask_in,
  output logic [N-1:0][7:0] data_out,
  output logic [N-1:0]      mask_out
);
  localparam int unsigned BW = $clog2(N);
  always_comb begin
    for (int p = 0; p < N; p++) begin
      logic [BW-1:0] src;
      src = BW'(N - 1 - p) ^ BW'((1 << eew_log) - 1);
      data_out[p] = en ? data_in[src] : data_in[p];
      mask_out[p] = en ? mask_in[src] : mask_in[p];
    end
  end
endmodule
