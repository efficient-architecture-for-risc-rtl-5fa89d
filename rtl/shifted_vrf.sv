// shifted_vrf: banked storage of the vector register file.
//
// NBANKS banks, each ELEN bits wide and NROWS deep (NROWS = VLEN*32 /
// (ELEN*NBANKS)). The mapping of register i, ELEN block j to bank
// (i + j) mod NBANKS and row (floor(i/NBANKS)*VLEN/ELEN + i mod NBANKS) mod
// NROWS is applied by the caller (see rcvrf); this block provides what that
// mapping needs: every bank has its own row address, so one access can reach
// a different row in each bank. That is what makes both a whole register
// (row access) and the same block of eight consecutive registers (column
// access) readable in one cycle.
//
// Interface: one write port (per-bank enable, row, byte enables, data) and
// one read port (per-bank row, data). Writes take effect at the clock edge;
// reads are combinational. Register contents are not reset.
module shifted_vrf #(
  parameter int unsigned NBANKS = 8,
  parameter int unsigned ELEN   = 64,
  parameter int unsigned NROWS  = 32,
  localparam int unsigned RW = $clog2(NROWS),
  localparam int unsigned EB = ELEN / 8
) (
  input  logic                       clk,
  input  logic [NBANKS-1:0]          wr_en,
  input  logic [NBANKS-1:0][RW-1:0]  wr_row,
  input  logic [NBANKS-1:0][EB-1:0]  wr_be,
  input  logic [NBANKS-1:0][ELEN-1:0] wr_data,
  input  logic [NBANKS-1:0][RW-1:0]  rd_row,
  output logic [NBANKS-1:0][ELEN-1:0] rd_data
);
  for (genvar k = 0; k < NBANKS; k++) begin : g_bank
    logic [ELEN-1:0] mem [NROWS];
    always_ff @(posedge clk) begin
      if (wr_en[k]) begin
        for (int b = 0; b < EB; b++) begin
          if (wr_be[k][b]) mem[wr_row[k]][8*b +: 8] <= wr_data[k][8*b +: 8];
        end
      end
    end
    assign rd_data[k] = mem[rd_row[k]];
  end
endmodule
