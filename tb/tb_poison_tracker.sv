// tb_poison_tracker: replays the example of the source's barrier figure:
// A unverified, B verified, C = f(A, B), D = g(C). The barrier on D must hold
// until A is verified, then pass; a failed check makes the barrier report
// failure; the unverified-tensor counter raises the stall at its limit.
module tb_poison_tracker;
  logic clk = 0, rst_n = 1;
  logic ev_rd_start = 0, ev_verify = 0, ev_ok = 0, prop_valid = 0, bar_valid = 0;
  logic [8:0] ev_id, prop_out, bar_id; logic [3:0] prop_in_vld; logic [8:0] prop_in [4];
  logic bar_pass, bar_fail, limit_stall, fail; logic [9:0] unverified; logic [511:0] poison;
  int checks = 0, failures = 0;
  localparam int A = 1, B = 2, C = 3, D = 4;
  poison_tracker dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic start(input int id);
    @(negedge clk); ev_rd_start = 1; ev_id = 9'(id); @(negedge clk); ev_rd_start = 0;
  endtask
  task automatic verify(input int id, input bit ok);
    @(negedge clk); ev_verify = 1; ev_ok = ok; ev_id = 9'(id); @(negedge clk); ev_verify = 0;
  endtask
  task automatic kernel(input int o, input int i0, input int i1);
    @(negedge clk); prop_valid = 1; prop_out = 9'(o); prop_in_vld = 4'b0011;
    prop_in[0] = 9'(i0); prop_in[1] = 9'(i1); prop_in[2] = 0; prop_in[3] = 0;
    @(negedge clk); prop_valid = 0;
  endtask
  initial begin
    ev_id = 0; prop_out = 0; bar_id = 0; prop_in_vld = 0; for (int k = 0; k < 4; k++) prop_in[k] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    start(A); start(B); verify(B, 1);
    chk(unverified == 1 && poison[A] && !poison[B], "A unverified, B verified");
    kernel(C, A, B); kernel(D, C, C);
    chk(poison[C] && poison[D], "poison propagated to C and D");
    bar_valid = 1; bar_id = D; #1;
    chk(!bar_pass && !bar_fail, "barrier holds D");
    verify(A, 1); #1;
    chk(unverified == 0 && !poison[A] && !poison[D] && bar_pass, "barrier passes after A verified");
    bar_valid = 0;
    // unverified limit
    for (int i = 0; i < 16; i++) start(100 + i);
    chk(limit_stall && unverified == 16, "limit reached");
    verify(100, 1); #1; chk(!limit_stall, "limit released");
    // failure
    verify(101, 0);
    bar_valid = 1; bar_id = B; #1;
    chk(fail && bar_fail && !bar_pass, "failure blocks communication");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
