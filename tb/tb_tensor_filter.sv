// tb_tensor_filter: feeds miss samples and checks which tensors the filter
// emits: a unit-stride stream, two interleaved streams told apart by VN, a
// stride-4 stream, an unevenly spaced group (rejected), mixed bitmap bits
// (rejected), and the emitted base/last/len/stride/VN/XOR-MAC fields.
module tb_tensor_filter;
  import tee_pkg::*;
  logic clk = 0, rst_n = 1, in_valid = 0, in_bm = 0, out_valid, out_reject;
  addr_t in_va; vn_t in_vn; mac_t in_mac; meta_entry_t out_entry;
  int checks = 0, failures = 0, n_out = 0, n_rej = 0;
  meta_entry_t got [$];
  tensor_filter dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  always @(posedge clk) begin
    if (out_valid) begin n_out++; got.push_back(out_entry); end
    if (out_reject) n_rej++;
  end
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic smp(input addr_t va, input vn_t vn, input mac_t m, input logic bm);
    @(negedge clk); in_valid = 1; in_va = va; in_vn = vn; in_mac = m; in_bm = bm;
    @(negedge clk); in_valid = 0;
  endtask
  initial begin
    meta_entry_t e;
    in_va = 0; in_vn = 0; in_mac = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 4; i++) smp(64'h4000 + 64'(i) * 64, 7, 56'h11 << i, 0);
    @(negedge clk);
    chk(n_out == 1, "stream detected");
    e = got.pop_front();
    chk(e.base == 64'h4000 && e.last == 64'h40c0 && e.len == 4 && e.stride == 1 && e.vn == 7,
        "stream fields");
    chk(e.mac == (56'h11 ^ 56'h22 ^ 56'h44 ^ 56'h88), "XOR MAC");
    // interleaved streams with different VNs
    for (int i = 0; i < 4; i++) begin
      smp(64'h8000 + 64'(i) * 64, 3, 0, 1);
      smp(64'h9000 + 64'(i) * 256, 4, 0, 1);
    end
    @(negedge clk);
    chk(n_out == 3, "two interleaved tensors");
    e = got.pop_front(); chk(e.base == 64'h8000 && e.stride == 1 && e.vn == 3 && e.bs == 1, "first interleaved");
    e = got.pop_front(); chk(e.base == 64'h9000 && e.stride == 4 && e.vn == 4 && e.last == 64'h9300, "strided");
    // uneven spacing is rejected
    smp(64'hA000, 5, 0, 0); smp(64'hA040, 5, 0, 0); smp(64'hA0C0, 5, 0, 0); smp(64'hA100, 5, 0, 0);
    @(negedge clk);
    chk(n_out == 3 && n_rej == 1, "uneven group rejected");
    // mixed bitmap bits are rejected
    smp(64'hB000, 6, 0, 0); smp(64'hB040, 6, 0, 1); smp(64'hB080, 6, 0, 0); smp(64'hB0C0, 6, 0, 0);
    @(negedge clk);
    chk(n_out == 3 && n_rej == 2, "mixed bitmap rejected");
    // twelve concurrent single samples overflow the ten entries without error
    for (int i = 0; i < 12; i++) smp(64'h100000 * 64'(i + 1), 56'(100 + i), 0, 0);
    for (int i = 1; i < 4; i++) smp(64'h100000 * 12 + 64'(i) * 64, 56'(111), 0, 0);
    @(negedge clk);
    chk(n_out == 4, "newest stream still detected after replacement");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
