// drom: Data ReOrganization Module.
//
// Gathers stride-separated bytes of an N-byte word into contiguous bytes from
// byte 0 (scatter = 0), or scatters contiguous bytes from byte 0 out to
// stride-separated positions (scatter = 1). The access is described by the
// byte stride, element bytes 2^eew_log, byte offset of the first element on
// the spread-out side, and the element count.
//
// How it works, as in the paper's DROM: the SCG computes one shift count per
// compact byte. A first SSN scatters those counts to the positions the bytes
// occupy on the spread-out side; for a gather this tells every source byte
// whether it is wanted and how far it must move, i.e. the node control of the
// GSN. The node control and the data are held in the Node Ctrl Buffer and the
// Data Buffer (one register stage); in the next cycle the GSN gathers the
// buffered data. For a scatter the first SSN's output is the byte mask of the
// result, and a second SSN scatters the buffered compact data using the
// buffered counts. The paper draws that last SSN dashed, which suggests the
// same SSN used twice; a second instance is this design's choice so that an
// operation can enter every cycle.
//
// Timing: out_valid/data_out/mask_out follow in_valid by exactly one cycle;
// one operation per cycle. data_out is 0 where mask_out is 0.
module drom #(
  parameter int unsigned N  = 64,
  parameter int unsigned CW = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                scatter,
  input  logic [N-1:0][7:0]   data_in,
  input  logic [CW:0]         stride,
  input  logic [1:0]          eew_log,
  input  logic [CW-1:0]       offset,
  input  logic [CW:0]         nelem,
  output logic                out_valid,
  output logic [N-1:0][7:0]   data_out,
  output logic [N-1:0]        mask_out
);
  localparam int unsigned EC = 1 + CW + CW;  // SSN element carrying a count
  localparam int unsigned ED = 1 + CW + 8;   // element carrying a data byte

  // ---- stage 1: SCG and control scatter ----
  logic [N-1:0][CW-1:0] cnt;
  logic [N-1:0]         cnt_v;
  logic [N-1:0][EC-1:0] c_elem;
  logic [N-1:0]         ctl_v;     // spread-side byte is part of the access
  logic [N-1:0][CW-1:0] ctl_cnt;   // and its distance to the compact side

  scg #(.N(N), .CW(CW)) u_scg (
    .stride(stride), .eew_log(eew_log), .offset(offset), .nelem(nelem),
    .cnt(cnt), .cnt_valid(cnt_v));

  for (genvar i = 0; i < N; i++) begin : g_celem
    assign c_elem[i] = {cnt_v[i], cnt[i], cnt[i]};
  end

  ssn #(.N(N), .CW(CW), .PW(CW)) u_ssn_ctrl (
    .in_elem(c_elem), .out_valid(ctl_v), .out_pay(ctl_cnt));

  // ---- Node Ctrl Buffer and Data Buffer ----
  logic                 b_valid, b_scatter;
  logic [N-1:0][7:0]    b_data;
  logic [N-1:0]         b_nv;      // node control: valid per column
  logic [N-1:0][CW-1:0] b_ncnt;    // node control: count per column
  logic [N-1:0]         b_mask;    // scatter result mask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid <= 1'b0;
    end else begin
      b_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      b_scatter <= scatter;
      b_data    <= data_in;
      b_nv      <= scatter ? cnt_v : ctl_v;
      b_ncnt    <= scatter ? cnt   : ctl_cnt;
      b_mask    <= ctl_v;
    end
  end

  // ---- stage 2: gather (GSN) or scatter (SSN) of the buffered data ----
  logic [N-1:0][ED-1:0] d_elem;
  logic [N-1:0]         g_v, s_v;
  logic [N-1:0][7:0]    g_d, s_d;

  for (genvar i = 0; i < N; i++) begin : g_delem
    assign d_elem[i] = {b_nv[i], b_ncnt[i], b_data[i]};
  end

  gsn #(.N(N), .CW(CW), .PW(8)) u_gsn (.in_elem(d_elem), .out_valid(g_v), .out_pay(g_d));
  ssn #(.N(N), .CW(CW), .PW(8)) u_ssn_data (.in_elem(d_elem), .out_valid(s_v), .out_pay(s_d));

  assign out_valid = b_valid;
  assign data_out  = b_scatter ? s_d : g_d;
  assign mask_out  = b_scatter ? b_mask : g_v;

  // The scatter mask from the control pass must match where the data lands.
  a_mask_match: assert property (@(posedge clk) disable iff (!rst_n)
                                 b_valid && b_scatter |-> s_v == b_mask);
endmodule
