// tb_trust_channel: two channel ends (CPU side TX_DIR=0, NPU side TX_DIR=1)
// connected back to back. Random metadata is sent both ways and must arrive
// intact; the link payload must differ from the plaintext and equal the
// reference keystream XOR; a replayed message and a flipped pad bit must
// raise rx_err.
module tb_trust_channel;
  import tee_pkg::*;
  import tb_ref_pkg::*;
  localparam logic [127:0] K = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  logic clk = 0, rst_n = 1;
  logic [127:0] key = K;
  logic a_tx_valid = 0, a_tx_ready, b_tx_valid = 0, b_tx_ready;
  tensor_meta_t a_tx_meta, b_tx_meta, a_rx_meta, b_rx_meta;
  logic a_lv, b_lv, a_rx_valid, b_rx_valid, a_rx_err, b_rx_err;
  logic [255:0] a_ld, b_ld, inj_d; logic [63:0] a_ls, b_ls, inj_s; logic inj = 0;
  int checks = 0, failures = 0;
  trust_channel #(.TX_DIR(1'b0)) u_a (.clk, .rst_n, .key, .tx_valid(a_tx_valid), .tx_ready(a_tx_ready),
    .tx_meta(a_tx_meta), .link_tx_valid(a_lv), .link_tx_data(a_ld), .link_tx_seq(a_ls),
    .link_rx_valid(b_lv), .link_rx_data(b_ld), .link_rx_seq(b_ls),
    .rx_valid(a_rx_valid), .rx_meta(a_rx_meta), .rx_err(a_rx_err));
  trust_channel #(.TX_DIR(1'b1)) u_b (.clk, .rst_n, .key, .tx_valid(b_tx_valid), .tx_ready(b_tx_ready),
    .tx_meta(b_tx_meta), .link_tx_valid(b_lv), .link_tx_data(b_ld), .link_tx_seq(b_ls),
    .link_rx_valid(inj ? 1'b1 : a_lv), .link_rx_data(inj ? inj_d : a_ld), .link_rx_seq(inj ? inj_s : a_ls),
    .rx_valid(b_rx_valid), .rx_meta(b_rx_meta), .rx_err(b_rx_err));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    tensor_meta_t m; logic [255:0] seen_d; logic [63:0] seen_s;
    a_tx_meta = '0; b_tx_meta = '0; inj_d = 0; inj_s = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 4; n++) begin
      m = '{base: {$urandom, $urandom}, len: $urandom, vn: {$urandom, $urandom}, mac: {$urandom, $urandom}};
      @(negedge clk); while (!a_tx_ready) @(negedge clk);
      a_tx_valid = 1; a_tx_meta = m; @(negedge clk); a_tx_valid = 0;
      while (!a_lv) @(negedge clk);
      seen_d = a_ld; seen_s = a_ls;
      chk(seen_d != {m, 48'h0}, "link carries ciphertext");
      chk(seen_d == ({m, 48'h0} ^ {aes_enc(K, {64'(n), 32'h0, 30'h0, 1'b0, 1'b0}),
                                    aes_enc(K, {64'(n), 32'h0, 30'h0, 1'b0, 1'b1})}), "keystream");
      while (!b_rx_valid) @(negedge clk);
      chk(b_rx_meta == m && !b_rx_err, "CPU to NPU metadata");
      // reverse direction
      m.vn = m.vn + 1;
      @(negedge clk); b_tx_valid = 1; b_tx_meta = m; @(negedge clk); b_tx_valid = 0;
      while (!a_rx_valid) @(negedge clk);
      chk(a_rx_meta == m && !a_rx_err, "NPU to CPU metadata");
    end
    // replay the last CPU->NPU message
    @(negedge clk); inj = 1; inj_d = seen_d; inj_s = seen_s; @(negedge clk); inj = 0;
    while (!b_rx_valid) @(negedge clk);
    chk(b_rx_err, "replay detected");
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
