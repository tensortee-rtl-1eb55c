// tb_ten_manager: device memory is a behavioural array filled with lines
// encrypted by the reference model. Checks: a tensor read in shuffled order
// returns correct plaintext line by line (poison flagged) without waiting for
// the tensor check, and the tensor MAC check passes after the last line;
// a tampered line makes the check fail; instruction fetches are released only
// when their line MAC matches; a tensor write pass encrypts with VN+1 and
// commits the new VN and XOR tensor MAC, which a later read pass verifies.
module tb_ten_manager;
  import tee_pkg::*;
  import tb_ref_pkg::*;
  localparam logic [127:0] KE = 128'h00112233445566778899aabbccddeeff, KM = 128'hfedcba98765432100123456789abcdef;
  logic clk = 0, rst_n = 1;
  logic [127:0] key_enc = KE, key_mac = KM;
  logic reg_valid = 0; logic [8:0] reg_id, tq_id, req_id, ev_id; tensor_meta_t reg_meta, tq_meta; addr_t reg_dev, tq_dev;
  logic req_valid = 0, req_ready; npu_kind_e req_kind; len_t req_idx; addr_t req_addr; line_t req_wdata, rsp_data;
  logic rsp_valid, rsp_poison, rsp_err, wr_done, ev_rd_start, ev_verify, ev_ok;
  logic dm_req_valid, dm_req_ready = 1, dm_req_write, dm_rsp_valid = 0; addr_t dm_req_addr; line_t dm_wdata, dm_rdata; mac_t dm_rmac;
  tm_stats_t stats;
  int checks = 0, failures = 0, n_verify = 0, n_ok = 0, n_start = 0;
  line_t dmem [addr_t]; mac_t dmac [addr_t];
  ten_manager dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  always @(posedge clk) begin
    if (ev_verify) begin n_verify++; if (ev_ok) n_ok++; end
    if (ev_rd_start) n_start++;
  end
  initial forever begin
    @(posedge clk);
    if (dm_req_valid) begin
      automatic addr_t a = dm_req_addr;
      if (dm_req_write) dmem[a] = dm_wdata;
      else begin
        repeat (4) @(posedge clk);
        dm_rdata <= dmem.exists(a) ? dmem[a] : '0; dm_rmac <= dmac.exists(a) ? dmac[a] : '0;
        dm_rsp_valid <= 1; @(posedge clk); dm_rsp_valid <= 0;
      end
    end
  end
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic req(input npu_kind_e k, input int id, input int idx, input addr_t a, input line_t w, output int lat);
    @(negedge clk); while (!req_ready) @(negedge clk);
    req_valid = 1; req_kind = k; req_id = 9'(id); req_idx = len_t'(idx); req_addr = a; req_wdata = w;
    @(negedge clk); req_valid = 0; lat = 1;
    while (!(rsp_valid || wr_done)) begin @(negedge clk); lat++; end
  endtask
  initial begin
    line_t P [4]; mac_t tm; int lat, lat0; int order [4] = '{2, 0, 3, 1};
    reg_id = 0; tq_id = 0; req_id = 0; reg_meta = '0; reg_dev = 0; req_kind = NK_READ; req_idx = 0; req_addr = 0;
    req_wdata = 0; dm_rdata = 0; dm_rmac = 0;
    tm = 0;
    for (int i = 0; i < 4; i++) begin
      P[i] = rand_line();
      dmem[64'h80000 + 64'(i) * 64] = line_crypt(KE, 64'h1000 + 64'(i) * 64, 3, P[i]);
      tm ^= line_mac(KM, 64'h1000 + 64'(i) * 64, 3, dmem[64'h80000 + 64'(i) * 64]);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); reg_valid = 1; reg_id = 5; reg_meta = '{base: 64'h1000, len: 4, vn: 3, mac: tm}; reg_dev = 64'h80000;
    @(negedge clk); reg_valid = 0;
    for (int k = 0; k < 4; k++) begin
      req(NK_READ, 5, order[k], 0, 0, lat);
      chk(rsp_data == P[order[k]] && rsp_poison, $sformatf("plaintext of line %0d", order[k]));
      if (k == 0) begin
        lat0 = lat;
        chk(n_start == 1 && n_verify == 0, "data released before the tensor check");
      end
      chk(lat == lat0, "no stall between lines");
      chk(lat == 4 + 1 + 2 + 41 + 1, $sformatf("read latency %0d", lat));
    end
    @(negedge clk);
    chk(n_verify == 1 && n_ok == 1 && ev_id == 5, "tensor verified after the last line");
    // tamper with line 1
    dmem[64'h80040][7] = ~dmem[64'h80040][7];
    for (int k = 0; k < 4; k++) req(NK_READ, 5, k, 0, 0, lat);
    @(negedge clk);
    chk(n_verify == 2 && n_ok == 1 && stats.verify_fail == 1, "tampering detected");
    // instruction fetch
    P[0] = rand_line();
    dmem[64'h9000] = line_crypt(KE, 64'h9000, 0, P[0]);
    dmac[64'h9000] = line_mac(KM, 64'h9000, 0, dmem[64'h9000]);
    req(NK_INST, 0, 0, 64'h9000, 0, lat);
    chk(rsp_data == P[0] && !rsp_err && !rsp_poison, "instruction released after MAC check");
    dmac[64'h9000] ^= 56'h1;
    req(NK_INST, 0, 0, 64'h9000, 0, lat);
    chk(rsp_err && rsp_data == '0, "tampered instruction withheld");
    // write pass on tensor 7 (2 lines, VN 7)
    @(negedge clk); reg_valid = 1; reg_id = 7; reg_meta = '{base: 64'h5000, len: 2, vn: 7, mac: 0}; reg_dev = 64'hA0000;
    @(negedge clk); reg_valid = 0;
    tm = 0;
    for (int i = 0; i < 2; i++) begin
      P[i] = rand_line();
      req(NK_WRITE, 7, i, 0, P[i], lat);
      chk(dmem[64'hA0000 + 64'(i) * 64] == line_crypt(KE, 64'h5000 + 64'(i) * 64, 8, P[i]), "write ciphertext with VN+1");
      tm ^= line_mac(KM, 64'h5000 + 64'(i) * 64, 8, dmem[64'hA0000 + 64'(i) * 64]);
    end
    tq_id = 7; #1;
    chk(tq_meta.vn == 8 && tq_meta.mac == tm && stats.commit == 1, "committed VN and tensor MAC");
    req(NK_READ, 7, 1, 0, 0, lat); chk(rsp_data == P[1], "read back");
    req(NK_READ, 7, 0, 0, 0, lat); @(negedge clk);
    chk(n_verify == 3 && n_ok == 2, "written tensor verifies");
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
