// tb_aes128_core: checks the AES-128 core against the FIPS-197 appendix
// C.1 vector and the appendix B vector, and checks the 10-cycle latency.
module tb_aes128_core;
  logic clk = 0, rst_n = 1, start = 0;
  logic [127:0] key, pt, ct;
  logic busy, done;
  int checks = 0, failures = 0;
  aes128_core dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts

  task automatic run(input logic [127:0] k, input logic [127:0] p, input logic [127:0] exp);
    int cyc;
    @(negedge clk); key = k; pt = p; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (ct !== exp) begin failures++; $display("FAIL ct=%h exp=%h", ct, exp); end
    checks++;
    if (cyc != 11) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734,
        128'h3925841d02dc09fbdc118597196a0b32);
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
