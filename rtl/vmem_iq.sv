// vmem_iq: vector memory instruction queue (used as VLIQ and VSIQ).
//
// A FIFO of DEPTH instructions between the frontend and an address
// sequencer, with valid/ready on both sides. An entry written in one cycle
// can be read in the next. The paper names these queues; their depth and
// handshake are this design's choice.
module vmem_iq
  import earth_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  vinstr_t in_instr,
  output logic    out_valid,
  input  logic    out_ready,
  output vinstr_t out_instr
);
  localparam int unsigned PW = $clog2(DEPTH);

  vinstr_t         q [DEPTH];
  logic [PW-1:0]   rp, wp;
  logic [PW:0]     cnt;
  logic            push, pop;

  assign in_ready  = cnt != (PW+1)'(DEPTH);
  assign out_valid = cnt != '0;
  assign out_instr = q[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp  <= '0;
      wp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) q[wp] <= in_instr;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt <= (PW+1)'(DEPTH));
endmodule
