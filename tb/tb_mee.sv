// tb_mee: encrypts and decrypts random lines through the engine and compares
// ciphertext, plaintext and MAC with the reference model; checks that the
// decrypt latency is max(AES_LAT, MAC_LAT)+1 and the encrypt latency is
// AES_LAT+MAC_LAT+1 cycles, with the source's 40-cycle AES and MAC.
module tb_mee;
  import tee_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 1;
  logic [127:0] key_enc = 128'h0f1e2d3c4b5a69788796a5b4c3d2e1f0, key_mac = 128'h1234567890abcdef0011223344556677;
  logic req_valid = 0, req_ready, req_encrypt = 0, rsp_valid, rsp_ready = 1;
  addr_t req_addr; vn_t req_vn; line_t req_data, rsp_data; mac_t rsp_mac;
  int checks = 0, failures = 0;
  mee dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts

  task automatic xfer(input logic enc, input addr_t a, input vn_t v, input line_t d,
                      output line_t o, output mac_t m, output int lat);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_encrypt = enc; req_addr = a; req_vn = v; req_data = d;
    @(negedge clk); req_valid = 0; lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    o = rsp_data; m = rsp_mac;
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    line_t p, c, d; mac_t m1, m2; int lat; addr_t a; vn_t v;
    req_addr = '0; req_vn = '0; req_data = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 6; n++) begin
      a = {$urandom, $urandom} & ~64'h3f; v = {$urandom, $urandom}; p = rand_line();
      xfer(1'b1, a, v, p, c, m1, lat);
      chk(c == line_crypt(key_enc, a, v, p), "ciphertext");
      chk(m1 == line_mac(key_mac, a, v, c), "encrypt MAC");
      chk(lat == 81, $sformatf("encrypt latency %0d", lat));
      xfer(1'b0, a, v, c, d, m2, lat);
      chk(d == p, "round trip");
      chk(m2 == m1, "decrypt MAC");
      chk(lat == 41, $sformatf("decrypt latency %0d", lat));
      xfer(1'b0, a, v + 1, c, d, m2, lat);
      chk(d != p && m2 != m1, "stale VN gives other plaintext and MAC");
    end
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
