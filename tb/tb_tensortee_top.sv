// tb_tensortee_top: end-to-end run of the whole design at its default sizes
// (512-entry Meta Table, 512 NPU tensors, 40-cycle AES and MAC), modelled on
// one step of CPU/NPU collaborative training:
//   1. the CPU reads a weight tensor (detection: misses, filter, boundary
//      growth) and rewrites it (tensor update, VN+1);
//   2. the weights go CPU->NPU (trusted + direct channel), the NPU reads them
//      with delayed verification and computes a gradient tensor from them;
//   3. the gradient goes NPU->CPU, held at the verification barrier until
//      the weights are verified, and the CPU reads it through the installed
//      Meta Table entry;
//   4. corner cases: a refuted boundary guess, an Assert3 violation, a merge,
//      EnTMF off, an instruction fetch, the unverified-tensor limit, a refused
//      transfer and tampered device memory blocking a transfer.
// All memories, the off-chip VN/MAC store, the bitmap store and the link are
// behavioural models here. Plaintexts, ciphertexts and MACs are checked with
// the reference model; every mechanism is counted and must have occurred.
module tb_tensortee_top;
  import tee_pkg::*;
  import tb_ref_pkg::*;
  localparam logic [127:0] KE = 128'h000102030405060708090a0b0c0d0e0f;
  localparam logic [127:0] KM = 128'h0f0e0d0c0b0a09080706050403020100;
  localparam logic [127:0] KT = 128'h8899aabbccddeeff0011223344556677;
  logic clk = 0, rst_n = 1, en_tmf = 1;
  logic [127:0] key_enc = KE, key_mac = KM, key_tc = KT;
  // CPU side
  logic c_req_valid = 0, c_req_ready, c_req_write = 0, c_rsp_valid; addr_t c_req_va; line_t c_req_wdata, c_rsp_data;
  mac_t c_rsp_mac; vn_t c_rsp_vn; lookup_e c_rsp_class;
  logic hm_req_valid, hm_req_ready = 1, hm_req_write, hm_rsp_valid = 0; addr_t hm_req_addr; line_t hm_wdata, hm_rdata;
  logic vnf_req_valid, vnf_req_ready = 1, vnf_rsp_valid = 0, vnu_valid, vnu_ready = 1; addr_t vnf_req_va, vnu_va;
  vn_t vnf_rsp_vn, vnu_vn; mac_t vnf_rsp_mac;
  logic bm_req_valid, bm_req_ready = 1, bm_req_write, bm_rsp_valid = 0; addr_t bm_req_blk; line_t bm_wdata, bm_rdata;
  // NPU side
  logic n_req_valid = 0, n_req_ready, n_rsp_valid, n_rsp_poison, n_rsp_err, n_wr_done; npu_kind_e n_req_kind;
  logic [8:0] n_req_id, n_reg_id, prop_out, x_id; len_t n_req_idx, x_lines; addr_t n_req_addr, n_reg_dev, x_cpu_va, x_dev;
  line_t n_req_wdata, n_rsp_data;
  logic n_reg_valid = 0, n_reg_ready, prop_valid = 0, limit_stall, verify_fail; tensor_meta_t n_reg_meta;
  logic [3:0] prop_in_vld; logic [8:0] prop_in [4]; logic [511:0] poison;
  logic dm_req_valid, dm_req_ready = 1, dm_req_write, dm_rsp_valid = 0; addr_t dm_req_addr; line_t dm_wdata, dm_rdata; mac_t dm_rmac;
  logic x_valid = 0, x_ready, x_dir, x_done, x_err;
  logic tc_c2n_valid, tc_n2c_valid; logic [255:0] tc_c2n_data, tc_n2c_data; logic [63:0] tc_c2n_seq, tc_n2c_seq;
  logic dh_rd_valid, dh_rd_ready = 1, dh_rd_rsp_valid = 0, dh_wr_valid, dh_wr_ready = 1; addr_t dh_rd_addr, dh_wr_addr;
  line_t dh_rd_rsp_data, dh_wr_data;
  logic dd_rd_valid, dd_rd_ready = 1, dd_rd_rsp_valid = 0, dd_wr_valid, dd_wr_ready = 1; addr_t dd_rd_addr, dd_wr_addr;
  line_t dd_rd_rsp_data, dd_wr_data;
  ta_stats_t ta_stats; tm_stats_t tm_stats; top_stats_t top_stats;

  tensortee_top dut (.*,
    .tc_c2n_in_valid(tc_c2n_valid), .tc_c2n_in_data(tc_c2n_data), .tc_c2n_in_seq(tc_c2n_seq),
    .tc_n2c_in_valid(tc_n2c_valid), .tc_n2c_in_data(tc_n2c_data), .tc_n2c_in_seq(tc_n2c_seq));

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  int checks = 0, failures = 0, n_poison_prop = 0, n_limit = 0, n_x_err = 0;

  // ---------------------------------------------------- behavioural memories
  line_t hmem [addr_t]; line_t dmem [addr_t]; mac_t dmac [addr_t];
  vn_t vstore [addr_t]; mac_t mstore [addr_t]; line_t bstore [addr_t];

  always @(posedge clk) begin
    if (hm_req_valid && hm_req_write) hmem[hm_req_addr] = hm_wdata;
    if (dm_req_valid && dm_req_write) dmem[dm_req_addr] = dm_wdata;
    if (dh_wr_valid) hmem[dh_wr_addr] = dh_wr_data;
    if (dd_wr_valid) dmem[dd_wr_addr] = dd_wr_data;
    if (vnu_valid) vstore[vnu_va >> 6] = vnu_vn;
    if (bm_req_valid && bm_req_write) bstore[bm_req_blk] = bm_wdata;
    if (limit_stall) n_limit++;
  end
  `define RD_PORT(V, A, RV, RD, MEMX, LAT) \
    initial forever begin \
      @(posedge clk); \
      if (V) begin \
        automatic addr_t a = A; \
        repeat (LAT) @(posedge clk); \
        RD <= MEMX.exists(a) ? MEMX[a] : '0; RV <= 1; @(posedge clk); RV <= 0; \
      end \
    end
  `RD_PORT(hm_req_valid && !hm_req_write, hm_req_addr, hm_rsp_valid, hm_rdata, hmem, 6)
  `RD_PORT(dh_rd_valid, dh_rd_addr, dh_rd_rsp_valid, dh_rd_rsp_data, hmem, 6)
  `RD_PORT(dd_rd_valid, dd_rd_addr, dd_rd_rsp_valid, dd_rd_rsp_data, dmem, 6)
  `RD_PORT(bm_req_valid && !bm_req_write, bm_req_blk, bm_rsp_valid, bm_rdata, bstore, 6)
  initial forever begin
    @(posedge clk);
    if (dm_req_valid && !dm_req_write) begin
      automatic addr_t a = dm_req_addr;
      repeat (6) @(posedge clk);
      dm_rdata <= dmem.exists(a) ? dmem[a] : '0; dm_rmac <= dmac.exists(a) ? dmac[a] : '0;
      dm_rsp_valid <= 1; @(posedge clk); dm_rsp_valid <= 0;
    end
  end
  initial forever begin
    @(posedge clk);
    if (vnf_req_valid) begin
      automatic addr_t l = vnf_req_va >> 6;
      repeat (6) @(posedge clk);
      vnf_rsp_vn <= vstore.exists(l) ? vstore[l] : '0; vnf_rsp_mac <= mstore.exists(l) ? mstore[l] : '0;
      vnf_rsp_valid <= 1; @(posedge clk); vnf_rsp_valid <= 0;
    end
  end

  // ------------------------------------------------------------ helpers
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  // place a CPU tensor in host memory as the SGX-like path would have
  task automatic cpu_tensor(input addr_t va, input int n, input vn_t vn, output line_t p []);
    p = new[n];
    for (int i = 0; i < n; i++) begin
      automatic addr_t a = va + 64'(i) * 64;
      p[i] = rand_line();
      hmem[a] = line_crypt(KE, a, vn, p[i]);
      vstore[a >> 6] = vn; mstore[a >> 6] = line_mac(KM, a, vn, hmem[a]);
    end
  endtask
  task automatic c_rd(input addr_t va, output line_t d, output lookup_e c);
    @(negedge clk); while (!c_req_ready) @(negedge clk);
    c_req_valid = 1; c_req_write = 0; c_req_va = va; @(negedge clk); c_req_valid = 0;
    while (!c_rsp_valid) @(negedge clk);
    d = c_rsp_data; c = c_rsp_class;
  endtask
  task automatic c_wr(input addr_t va, input line_t w, output vn_t v);
    @(negedge clk); while (!c_req_ready) @(negedge clk);
    c_req_valid = 1; c_req_write = 1; c_req_va = va; c_req_wdata = w; @(negedge clk); c_req_valid = 0;
    while (!c_rsp_valid) @(negedge clk);
    v = c_rsp_vn;
  endtask
  task automatic n_req(input npu_kind_e k, input int id, input int idx, input addr_t a, input line_t w, output line_t d);
    @(negedge clk); while (!n_req_ready) @(negedge clk);
    n_req_valid = 1; n_req_kind = k; n_req_id = 9'(id); n_req_idx = len_t'(idx); n_req_addr = a; n_req_wdata = w;
    @(negedge clk); n_req_valid = 0;
    while (!(n_rsp_valid || n_wr_done)) @(negedge clk);
    d = n_rsp_data;
  endtask
  task automatic n_reg(input int id, input addr_t base, input int len, input vn_t vn, input addr_t dev);
    @(negedge clk); while (!n_reg_ready) @(negedge clk);
    n_reg_valid = 1; n_reg_id = 9'(id); n_reg_meta = '{base: base, len: len, vn: vn, mac: '0}; n_reg_dev = dev;
    @(negedge clk); n_reg_valid = 0;
  endtask
  task automatic xfer(input bit dir, input int id, input addr_t va, input int lines, input addr_t dev, output bit err);
    @(negedge clk); while (!x_ready) @(negedge clk);
    x_valid = 1; x_dir = dir; x_id = 9'(id); x_cpu_va = va; x_lines = len_t'(lines); x_dev = dev;
    @(negedge clk); x_valid = 0;
    while (!x_done) @(negedge clk);
    err = x_err; if (err) n_x_err++;
  endtask

  localparam addr_t W = 64'h100000, G = 64'h200000, V = 64'h300000, M = 64'h400000;
  localparam addr_t WDEV = 64'h800000, GDEV = 64'h900000;

  initial begin
    line_t pw [], pv [], pm [], q [8], g [8], d; lookup_e c; vn_t v; bit err;
    c_req_va = 0; c_req_wdata = 0; n_req_kind = NK_READ; n_req_id = 0; n_req_idx = 0; n_req_addr = 0; n_req_wdata = 0;
    n_reg_id = 0; n_reg_meta = '0; n_reg_dev = 0; prop_out = 0; prop_in_vld = 0; for (int k = 0; k < 4; k++) prop_in[k] = 0;
    x_dir = 0; x_id = 0; x_cpu_va = 0; x_lines = 0; x_dev = 0;
    hm_rdata = 0; dm_rdata = 0; dm_rmac = 0; bm_rdata = 0; vnf_rsp_vn = 0; vnf_rsp_mac = 0; dh_rd_rsp_data = 0; dd_rd_rsp_data = 0;
    cpu_tensor(W, 8, 1, pw);
    repeat (3) @(negedge clk); rst_n = 1;

    // 1. CPU reads the weights: 4 misses, detection, 4 boundary hits
    for (int i = 0; i < 8; i++) begin
      c_rd(W + 64'(i) * 64, d, c);
      chk(d == pw[i], $sformatf("CPU read W[%0d]", i));
      chk(c == (i < 4 ? LK_MISS : LK_HIT_BND), $sformatf("class W[%0d] = %0d", i, c));
    end
    c_rd(W + 64'h40, d, c); chk(c == LK_HIT_IN && d == pw[1], "hit_in after detection");
    // optimizer step rewrites all weights
    for (int i = 0; i < 8; i++) begin
      q[i] = rand_line();
      c_wr(W + 64'(i) * 64, q[i], v);
      chk(v == 2 && hmem[W + 64'(i) * 64] == line_crypt(KE, W + 64'(i) * 64, 2, q[i]), $sformatf("CPU write W[%0d]", i));
    end
    repeat (20) @(negedge clk);   // the analyzer finishes its update after the response
    chk(ta_stats.upd_finish == 1 && vstore[(W >> 6) + 5] == 2, "tensor update finished, VNs consistent");

    // 2. weights to the NPU
    xfer(0, 3, W, 8, WDEV, err);
    chk(!err, "CPU->NPU transfer");
    for (int i = 0; i < 8; i++) chk(dmem[WDEV + 64'(i) * 64] == hmem[W + 64'(i) * 64], "ciphertext copied unchanged");
    n_reg(4, G, 8, 0, GDEV);           // gradient tensor, counter base = its CPU address
    for (int k = 0; k < 3; k++) begin
      n_req(NK_READ, 3, 7 - k, 0, 0, d);
      chk(d == q[7 - k] && n_rsp_poison, "NPU reads weights before verification");
    end
    // kernel: gradient = f(weights) while the weights are still unverified
    @(negedge clk); prop_valid = 1; prop_out = 4; prop_in_vld = 4'b0001; prop_in[0] = 3; @(negedge clk); prop_valid = 0;
    if (poison[4]) n_poison_prop++;
    chk(poison[4], "poison propagated to the gradient");
    for (int i = 0; i < 8; i++) begin
      g[i] = rand_line();
      n_req(NK_WRITE, 4, i, 0, g[i], d);
    end
    // 3. gradient to the CPU: waits at the barrier until the weights verify
    fork
      xfer(1, 4, G, 8, GDEV, err);
      begin
        repeat (200) @(negedge clk);
        for (int k = 3; k < 8; k++) begin
          n_req(NK_READ, 3, 7 - k, 0, 0, d);
          chk(d == q[7 - k], "NPU reads remaining weights");
        end
      end
    join
    chk(!err && top_stats.barrier_wait > 100, $sformatf("barrier held the transfer %0d cycles", top_stats.barrier_wait));
    chk(tm_stats.verify_ok == 1 && !verify_fail, "weights verified");
    for (int i = 0; i < 8; i++) begin
      c_rd(G + 64'(i) * 64, d, c);
      chk(d == g[i] && c == LK_HIT_IN, $sformatf("CPU reads gradient G[%0d] through installed entry", i));
    end

    // 4. corner cases
    cpu_tensor(V, 5, 5, pv);
    vstore[(V >> 6) + 4] = 6; hmem[V + 64'h100] = line_crypt(KE, V + 64'h100, 6, pv[4]);
    for (int i = 0; i < 5; i++) begin
      c_rd(V + 64'(i) * 64, d, c);
      chk(d == pv[i], $sformatf("V[%0d] plaintext (boundary guess refuted for 4)", i));
    end
    chk(top_stats.vn_redo == 1, "read decrypted again after refuted guess");
    c_wr(W + 64'h80, q[2], v);
    repeat (20) @(negedge clk);
    chk(ta_stats.assert_fail == 1, "Assert3 violation invalidates W");
    cpu_tensor(M, 8, 9, pm);
    for (int i = 4; i < 8; i++) c_rd(M + 64'(i) * 64, d, c);
    for (int i = 0; i < 4; i++) c_rd(M + 64'(i) * 64, d, c);
    repeat (4) @(negedge clk);
    c_rd(M + 64'h140, d, c); chk(c == LK_HIT_IN && d == pm[5] && ta_stats.merge >= 1, "merged entry");
    en_tmf = 0;
    c_rd(M + 64'h140, d, c); chk(c == LK_MISS && d == pm[5], "EnTMF off");
    en_tmf = 1;
    xfer(0, 5, 64'h7770000, 4, 64'hA00000, err); chk(err, "transfer of an unknown tensor refused");
    // instruction fetch, verified before use
    d = rand_line();
    dmem[64'hB00000] = line_crypt(KE, 64'hB00000, 0, d); dmac[64'hB00000] = line_mac(KM, 64'hB00000, 0, dmem[64'hB00000]);
    begin
      line_t r; n_req(NK_INST, 0, 0, 64'hB00000, 0, r);
      chk(r == d && !n_rsp_err && !n_rsp_poison, "instruction fetch");
    end
    // unverified-tensor limit
    for (int t = 0; t < 16; t++) begin
      n_reg(100 + t, 64'hC000000 + 64'(t) * 64'h1000, 2, 0, 64'hC000000 + 64'(t) * 64'h1000);
      n_req(NK_READ, 100 + t, 0, 0, 0, d);
    end
    @(negedge clk);
    chk(limit_stall, "unverified-tensor limit reached");
    // tampering: flip a bit of the weights in device memory, reread, try to send
    dmem[WDEV + 64'h40][100] = ~dmem[WDEV + 64'h40][100];
    for (int i = 0; i < 8; i++) n_req(NK_READ, 3, i, 0, 0, d);
    @(negedge clk);
    chk(verify_fail && tm_stats.verify_fail == 1, "tampering detected");
    xfer(1, 3, W, 8, WDEV, err); chk(err, "barrier blocks communication after a failed check");

    // every mechanism happened
    chk(ta_stats.hit_in > 0,      "mechanism hit_in");
    chk(ta_stats.hit_bnd > 0,     "mechanism hit_boundary");
    chk(ta_stats.miss > 0,        "mechanism miss");
    chk(ta_stats.detect > 0,      "mechanism filter detection");
    chk(ta_stats.extend > 0,      "mechanism boundary extension");
    chk(ta_stats.bnd_wrong > 0,   "mechanism refuted boundary");
    chk(ta_stats.merge > 0,       "mechanism merge");
    chk(ta_stats.upd_start > 0,   "mechanism update start");
    chk(ta_stats.upd_finish > 0,  "mechanism update finish");
    chk(ta_stats.assert_fail > 0, "mechanism assertion invalidation");
    chk(ta_stats.install > 0,     "mechanism transfer install");
    chk(tm_stats.verify_ok > 0,   "mechanism delayed verification");
    chk(tm_stats.verify_fail > 0, "mechanism verification failure");
    chk(tm_stats.inst_lines > 0,  "mechanism instruction fetch");
    chk(tm_stats.commit > 0,      "mechanism NPU tensor write commit");
    chk(top_stats.c2n > 0 && top_stats.n2c > 0, "mechanism transfers both ways");
    chk(top_stats.barrier_wait > 0, "mechanism barrier stall");
    chk(n_x_err >= 2,             "mechanism refused transfer");
    chk(n_poison_prop > 0,        "mechanism poison propagation");
    chk(n_limit > 0,              "mechanism unverified limit");
    $display("mechanisms: hit_in=%0d hit_bnd=%0d miss=%0d detect=%0d extend=%0d bnd_wrong=%0d merge=%0d upd=%0d/%0d assert=%0d install=%0d verify=%0d/%0d inst=%0d c2n=%0d n2c=%0d barrier_wait=%0d",
      ta_stats.hit_in, ta_stats.hit_bnd, ta_stats.miss, ta_stats.detect, ta_stats.extend, ta_stats.bnd_wrong,
      ta_stats.merge, ta_stats.upd_start, ta_stats.upd_finish, ta_stats.assert_fail, ta_stats.install,
      tm_stats.verify_ok, tm_stats.verify_fail, tm_stats.inst_lines, top_stats.c2n, top_stats.n2c, top_stats.barrier_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
