// vmem_iq_tb: self-checking test of the instruction queue (VLIQ/VSIQ).
// Random pushes and pops are compared with a reference queue: order, data,
// the full flag (in_ready low exactly when DEPTH entries are held) and the
// empty flag. The queue must sustain one push and one pop per cycle.
//
// The queue and its depth are this design's choice; the paper only names it.
module vmem_iq_tb;
  import earth_pkg::*;
  localparam int DEPTH = 4;
  logic    clk = 0, rst_n = 0;
  logic    in_valid, in_ready, out_valid, out_ready;
  vinstr_t in_instr, out_instr;
  vinstr_t model[$];
  int checks = 0, failures = 0, n_full = 0;

  vmem_iq #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    out_ready = 0;
    in_instr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      in_valid  = 1'($urandom);
      out_ready = (c / 2000) % 2 == 1 ? 1'b1 : 1'($urandom_range(0, 3) == 0);
      in_instr  = vinstr_t'({$urandom, $urandom, $urandom, $urandom});
      #1;
      checks++;
      if (in_ready != (model.size() < DEPTH)) failures++;
      if (!in_ready) n_full++;
      checks++;
      if (out_valid != (model.size() > 0)) failures++;
      if (out_valid && model.size() > 0) begin
        checks++;
        if (out_instr != model[0]) failures++;
      end
      @(posedge clk);
      if (out_valid && out_ready && model.size() > 0) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_instr);
    end
    checks++;
    if (n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
