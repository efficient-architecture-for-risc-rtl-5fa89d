// byte_shifter: circular byte rotation of an N-byte word and its byte mask.
//
// Byte p of the input appears at byte (p + amt) mod N of the output. The load
// path uses it to move data from its line position (or from byte 0 after a
// gather) to its position in the register; the store path does the opposite.
// The paper says only that it aligns data to an offset; a rotation is this
// design's choice. Combinational.
module byte_shifter #(
  parameter int unsigned N = 64,
  localparam int unsigned BW = $clog2(N)
) (
  input  logic [BW-1:0]     amt,
  input  logic [N-1:0][7:0] data_in,
  input  logic [N-1:0]      mask_in,
  output logic [N-1:0][7:0] data_out,
  output logic [N-1:0]      mask_out
);
  always_comb begin
    for (int p = 0; p < N; p++) begin
      logic [BW-1:0] src;
      src = BW'(p) - amt;
      data_out[p] = data_in[src];
      mask_out[p] = mask_in[src];
    end
  end
endmodule
