// tb_meta_table: inserts tensor runs and checks lookup classification
// (hit_in, hit_boundary, miss, edges) against a direct computation, the two
// 1-D merge directions, overlap replacement, write/invalidate, and that
// free entries are used before round-robin replacement.
module tb_meta_table;
  import tee_pkg::*;
  localparam int N = 512;
  logic clk = 0, rst_n = 1;
  addr_t lk_va, q_va; lookup_e lk_res; logic [8:0] lk_idx, inval_idx, wr_idx, ins_idx_o;
  meta_entry_t lk_entry, q_entry, wr_entry, ins_entry;
  logic lk_first, lk_last, q_hit, inval = 0, wr = 0, ins = 0, ins_merged;
  logic [9:0] n_valid;
  int checks = 0, failures = 0;
  meta_table dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic meta_entry_t mk(input addr_t b, input int len, input int stride, input vn_t vn);
    meta_entry_t e; e = '0; e.valid = 1; e.base = b; e.len = len; e.stride = stride;
    e.last = b + addr_t'((len - 1) * stride * 64); e.vn = vn; e.mac = mac_t'(b) * 3; return e;
  endfunction

  task automatic do_ins(input meta_entry_t e);
    @(negedge clk); ins = 1; ins_entry = e; @(negedge clk); ins = 0;
  endtask

  task automatic expect_lk(input addr_t va, input lookup_e r, input vn_t vn, input bit f, input bit l);
    lk_va = va; #1;
    chk(lk_res == r, $sformatf("class of %h: %0d exp %0d", va, lk_res, r));
    if (r != LK_MISS) chk(lk_entry.vn == vn, $sformatf("vn of %h", va));
    if (r == LK_HIT_IN) chk(lk_first == f && lk_last == l, $sformatf("edges of %h", va));
  endtask

  initial begin
    meta_entry_t e;
    lk_va = 0; q_va = 0; inval_idx = 0; wr_idx = 0; wr_entry = '0; ins_entry = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // streaming tensor A: 8 lines from 0x10000, stride 1, VN 5
    do_ins(mk(64'h10000, 8, 1, 5));
    expect_lk(64'h10000, LK_HIT_IN, 5, 1, 0);
    expect_lk(64'h10040, LK_HIT_IN, 5, 0, 0);
    expect_lk(64'h101c0, LK_HIT_IN, 5, 0, 1);
    expect_lk(64'h10200, LK_HIT_BND, 5, 0, 0);
    expect_lk(64'h10240, LK_MISS, 0, 0, 0);
    expect_lk(64'h0ffc0, LK_MISS, 0, 0, 0);
    // strided tensor B: 4 lines stride 4 from 0x20000, VN 9
    do_ins(mk(64'h20000, 4, 4, 9));
    expect_lk(64'h20100, LK_HIT_IN, 9, 0, 0);
    expect_lk(64'h20040, LK_MISS, 0, 0, 0);
    expect_lk(64'h20400, LK_HIT_BND, 9, 0, 0);
    chk(n_valid == 2, "two entries");
    // merge below: run right after A with same VN extends A
    do_ins(mk(64'h10200, 4, 1, 5));
    @(negedge clk);
    chk(n_valid == 2, "merged, no new entry");
    expect_lk(64'h102c0, LK_HIT_IN, 5, 0, 1);
    expect_lk(64'h10000, LK_HIT_IN, 5, 1, 0);
    chk(lk_entry.mac == ((56'h10000 * 3) ^ (56'h10200 * 3)), "merged MAC is the XOR of both runs");
    // merge above: run ending right before B
    do_ins(mk(64'h1fe00, 2, 4, 9));
    chk(n_valid == 2, "merged above");
    expect_lk(64'h1fe00, LK_HIT_IN, 9, 1, 0);
    chk(lk_entry.mac == ((56'h20000 * 3) ^ (56'h1fe00 * 3)), "MAC after merging above");
    // different VN does not merge
    do_ins(mk(64'h10300, 2, 1, 6));
    chk(n_valid == 3, "no merge with other VN");
    // overlap replacement: a transfer descriptor covering A
    do_ins(mk(64'h0f000, 256, 1, 7));
    chk(n_valid == 2, "A and its neighbour dropped, descriptor added");
    expect_lk(64'h10040, LK_HIT_IN, 7, 0, 0);
    q_va = 64'h10080; #1;
    chk(q_hit && q_entry.vn == 7 && q_entry.len == 256, "query port");
    // write and invalidate
    e = lk_entry; e.vn = 8; e.uf = 1;
    @(negedge clk); wr = 1; wr_idx = lk_idx; wr_entry = e; @(negedge clk); wr = 0;
    expect_lk(64'h10040, LK_HIT_IN, 8, 0, 0);
    @(negedge clk); inval = 1; inval_idx = lk_idx; @(negedge clk); inval = 0;
    expect_lk(64'h10040, LK_MISS, 0, 0, 0);
    chk(n_valid == 1, "invalidated");
    // fill the table, then one more replaces round-robin
    for (int i = 0; i < N; i++) do_ins(mk(64'h1000_0000 + 64'(i) * 64'h10000, 2, 1, 64'(100 + 2*i)));
    chk(n_valid == N, "table full");
    do_ins(mk(64'h7000_0000, 2, 1, 3));
    chk(n_valid == N, "still full after replacement");
    expect_lk(64'h7000_0000, LK_HIT_IN, 3, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
