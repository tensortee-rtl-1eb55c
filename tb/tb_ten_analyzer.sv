// tb_ten_analyzer: drives core reads and writes against behavioural
// off-chip VN/MAC and bitmap stores and checks the VN given for each request
// and the table effects: detection by the filter after 4 misses, boundary
// extension (and a refuted boundary guess), hit_in, a complete tensor write
// (start, in, finish, VN+1, tensor MAC = XOR of the write MACs, off-chip VNs),
// an Assert3 violation invalidating the entry, installation from a transfer
// descriptor, merging of a run that ends right before an existing entry, and
// EnTMF = 0 forcing the off-chip path.
module tb_ten_analyzer;
  import tee_pkg::*;
  logic clk = 0, rst_n = 1, en_tmf = 1;
  logic req_valid = 0, req_ready, req_write = 0, rsp_valid, chk_valid, chk_ok, wmac_valid = 0;
  addr_t req_va, vnf_req_va, vnu_va, bm_req_blk, mq_va;
  vn_t rsp_vn, chk_vn, vnf_rsp_vn, vnu_vn; lookup_e rsp_class; mac_t wmac, vnf_rsp_mac;
  logic vnf_req_valid, vnf_req_ready = 1, vnf_rsp_valid = 0, vnu_valid, vnu_ready = 1;
  logic bm_req_valid, bm_req_ready = 1, bm_req_write, bm_rsp_valid = 0; line_t bm_wdata, bm_rdata;
  logic mq_hit, ti_valid = 0, ti_ready; meta_entry_t mq_entry; tensor_meta_t ti_meta; ta_stats_t stats;
  int checks = 0, failures = 0;
  vn_t  vstore [addr_t];
  mac_t mstore [addr_t];
  line_t bstore [addr_t];
  ten_analyzer dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts

  // off-chip metadata store, 4-cycle latency
  always @(posedge clk) begin
    if (vnu_valid) vstore[vnu_va >> 6] = vnu_vn;
  end
  initial forever begin
    @(posedge clk);
    if (vnf_req_valid) begin
      automatic addr_t l = vnf_req_va >> 6;
      repeat (3) @(posedge clk);
      vnf_rsp_vn <= vstore.exists(l) ? vstore[l] : '0;
      vnf_rsp_mac <= mstore.exists(l) ? mstore[l] : '0;
      vnf_rsp_valid <= 1;
      @(posedge clk); vnf_rsp_valid <= 0;
    end
  end
  initial forever begin
    @(posedge clk);
    if (bm_req_valid) begin
      automatic addr_t b = bm_req_blk;
      if (bm_req_write) bstore[b] = bm_wdata;
      else begin
        repeat (2) @(posedge clk);
        bm_rdata <= bstore.exists(b) ? bstore[b] : '0; bm_rsp_valid <= 1;
        @(posedge clk); bm_rsp_valid <= 0;
      end
    end
  end

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic rd(input addr_t va, output vn_t v, output lookup_e c);
    @(negedge clk); while (!req_ready) @(negedge clk);
    req_valid = 1; req_write = 0; req_va = va; @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    v = rsp_vn; c = rsp_class;
    while (!req_ready) @(negedge clk);
  endtask

  task automatic rd_bnd(input addr_t va, output vn_t v, output bit ok, output vn_t cv);
    @(negedge clk); while (!req_ready) @(negedge clk);
    req_valid = 1; req_write = 0; req_va = va; @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    v = rsp_vn;
    while (!chk_valid) @(negedge clk);
    ok = chk_ok; cv = chk_vn;
  endtask

  task automatic wr_line(input addr_t va, input mac_t m, output vn_t v);
    @(negedge clk); while (!req_ready) @(negedge clk);
    req_valid = 1; req_write = 1; req_va = va; @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    v = rsp_vn;
    @(negedge clk); wmac_valid = 1; wmac = m; @(negedge clk); wmac_valid = 0;
    while (!req_ready) @(negedge clk);
  endtask

  initial begin
    vn_t v, cv; lookup_e c; bit ok; mac_t macx; addr_t A, B, C;
    req_va = 0; wmac = 0; mq_va = 0; ti_meta = '0; vnf_rsp_vn = 0; vnf_rsp_mac = 0; bm_rdata = 0;
    A = 64'h100000; B = 64'h200000; C = 64'h400000;
    for (int i = 0; i < 16; i++) begin
      vstore[(A >> 6) + i] = 5; mstore[(A >> 6) + i] = 56'(i * 7 + 1);
      vstore[(B >> 6) + i] = (i < 4) ? 9 : 10;
      vstore[(C >> 6) + i] = 12;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    // detection
    for (int i = 0; i < 4; i++) begin
      rd(A + 64'(i) * 64, v, c);
      chk(c == LK_MISS && v == 5, $sformatf("miss %0d", i));
    end
    repeat (3) @(negedge clk);
    chk(stats.detect == 1, "tensor detected after 4 misses");
    // boundary growth
    for (int i = 4; i < 8; i++) begin
      rd_bnd(A + 64'(i) * 64, v, ok, cv);
      chk(v == 5 && ok && cv == 5, $sformatf("boundary %0d", i));
    end
    chk(stats.extend == 4, "four extensions");
    rd(A + 64'h80, v, c); chk(c == LK_HIT_IN && v == 5, "hit_in after growth");
    mq_va = A; #1;
    macx = 0; for (int i = 0; i < 8; i++) macx ^= 56'(i * 7 + 1);
    chk(mq_hit && mq_entry.len == 8 && mq_entry.mac == macx, "tensor MAC of detected lines");
    // full tensor write
    macx = 0;
    for (int i = 0; i < 8; i++) begin
      wr_line(A + 64'(i) * 64, 56'h1000 + 56'(i), v);
      macx ^= 56'h1000 + 56'(i);
      chk(v == 6, $sformatf("write VN line %0d", i));
    end
    chk(stats.upd_start == 1 && stats.upd_finish == 1 && stats.assert_fail == 0, "update start/finish");
    rd(A + 64'h40, v, c); chk(c == LK_HIT_IN && v == 6, "VN incremented on chip");
    chk(vstore[(A >> 6) + 3] == 6 && vstore[(A >> 6) + 7] == 6, "off-chip VNs updated");
    #1; chk(mq_entry.vn == 6 && mq_entry.mac == macx && !mq_entry.uf, "tensor MAC of the update");
    // Assert3: a middle line written when no update is in progress
    wr_line(A + 64'hc0, 56'h5, v);
    chk(v == 7 && stats.assert_fail == 1, "Assert3 violation");
    rd(A + 64'hc0, v, c); chk(c == LK_MISS && v == 7, "entry invalidated, off-chip VN used");
    // refuted boundary guess
    for (int i = 0; i < 4; i++) rd(B + 64'(i) * 64, v, c);
    repeat (3) @(negedge clk);
    rd_bnd(B + 64'h100, v, ok, cv);
    chk(v == 9 && !ok && cv == 10 && stats.bnd_wrong == 1, "refuted boundary guess");
    // merge: lines 4..7 first, then 0..3 which end right below them
    for (int i = 4; i < 8; i++) rd(C + 64'(i) * 64, v, c);
    for (int i = 0; i < 4; i++) rd(C + 64'(i) * 64, v, c);
    repeat (3) @(negedge clk);
    chk(stats.merge == 1, "merge happened");
    mq_va = C + 64'h140; #1; chk(mq_hit && mq_entry.base == C && mq_entry.len == 8, "merged entry");
    // install from transfer descriptor
    @(negedge clk); ti_valid = 1; ti_meta = '{base: 64'h300000, len: 16, vn: 20, mac: 56'hABC};
    @(negedge clk); ti_valid = 0;
    repeat (10) @(negedge clk);
    rd(64'h300140, v, c); chk(c == LK_HIT_IN && v == 20 && stats.install == 1, "installed tensor");
    // EnTMF off
    en_tmf = 0;
    rd(64'h300140, v, c); chk(c == LK_MISS, "EnTMF=0 uses off-chip VN");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
