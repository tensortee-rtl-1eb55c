// mee: memory encryption engine for one 64-byte cacheline.
//
// Counter-mode encryption as in the source description: the keystream is
// AES(K_enc, counter) with the counter built from the line address and the
// version number (VN), and ciphertext = keystream XOR plaintext, so encryption
// and decryption are the same operation. The line is four 16-byte blocks, so
// four AES cores produce the four keystream blocks in parallel, block number
// j in the counter (tee_pkg::ctr_block).
//
// The line MAC is MAC = Hash(K_mac, (C, addr, VN)). The hash is not specified
// by the source; this design folds the four ciphertext blocks (each rotated by
// 32*j bits) together with the counter of block 0 and encrypts the fold with
// K_mac, keeping the top 56 bits. It is a placeholder keyed hash, not a
// cryptographically strong MAC.
//
// Interface: valid/ready request {encrypt, addr, vn, data}; valid/ready
// response {data, mac}. For encrypt the MAC covers the produced ciphertext,
// for decrypt it covers the incoming ciphertext (to be compared by the
// caller). Timing: the keystream is released AES_LAT cycles after the request
// is taken and the MAC MAC_LAT cycles after its input is known (40 and 40 in
// the source's configuration). A decrypt computes both at once and responds
// after max(AES_LAT, MAC_LAT)+1 cycles; an encrypt needs the ciphertext
// first and responds after AES_LAT+MAC_LAT+1 cycles. One line at a time.
module mee #(
  parameter int unsigned AES_LAT = 40,
  parameter int unsigned MAC_LAT = 40
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [127:0]         key_enc,
  input  logic [127:0]         key_mac,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_encrypt,
  input  tee_pkg::addr_t       req_addr,
  input  tee_pkg::vn_t         req_vn,
  input  tee_pkg::line_t       req_data,
  output logic                 rsp_valid,
  input  logic                 rsp_ready,
  output tee_pkg::line_t       rsp_data,
  output tee_pkg::mac_t        rsp_mac
);
  import tee_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_PAD, S_MAC, S_RSP} state_e;
  state_e st_q;

  logic        enc_q;
  addr_t       addr_q;
  vn_t         vn_q;
  line_t       data_q;
  logic [7:0]  cnt_q;     // cycles in the current stage
  logic [3:0]  pad_done_q;
  logic        mac_done_q;
  blk_t        pad_q [4];
  blk_t        mac_blk_q;

  logic [3:0]  pad_busy, pad_done;
  blk_t        pad_ct [4];
  logic        mac_start, mac_busy, mac_done;
  blk_t        mac_ct, mac_in;
  logic        pad_start;

  function automatic blk_t fold(input line_t c, input addr_t a, input vn_t v);
    blk_t x;
    x = ctr_block(a, v, 2'd0);
    for (int j = 0; j < 4; j++) begin
      blk_t b;
      b = c[LINE_W-1-128*j -: 128];
      x = x ^ ((b << (32*j)) | (b >> ((128 - 32*j) % 128)));
    end
    return x;
  endfunction

  for (genvar j = 0; j < 4; j++) begin : g_pad
    aes128_core u_aes (
      .clk, .rst_n, .start(pad_start), .key(key_enc),
      .pt(ctr_block(req_addr, req_vn, 2'(j))),
      .busy(pad_busy[j]), .done(pad_done[j]), .ct(pad_ct[j])
    );
  end

  aes128_core u_mac (
    .clk, .rst_n, .start(mac_start), .key(key_mac), .pt(mac_in),
    .busy(mac_busy), .done(mac_done), .ct(mac_ct)
  );

  line_t xored;
  always_comb
    for (int j = 0; j < 4; j++) xored[LINE_W-1-128*j -: 128] = data_q[LINE_W-1-128*j -: 128] ^ pad_q[j];

  assign req_ready = (st_q == S_IDLE) && !(|pad_busy) && !mac_busy;
  assign pad_start = req_valid && req_ready;
  // decrypt: MAC over the incoming ciphertext starts with the keystream
  // encrypt: MAC over the fresh ciphertext starts when the keystream is ready
  assign mac_start = (pad_start && !req_encrypt) ||
                     (st_q == S_PAD && enc_q && pad_done_q == 4'hf && cnt_q >= 8'(AES_LAT - 1));
  assign mac_in    = (st_q == S_IDLE) ? fold(req_data, req_addr, req_vn) : fold(xored, addr_q, vn_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      enc_q      <= 1'b0;
      addr_q     <= '0;
      vn_q       <= '0;
      data_q     <= '0;
      cnt_q      <= '0;
      pad_done_q <= '0;
      mac_done_q <= 1'b0;
      mac_blk_q  <= '0;
      rsp_valid  <= 1'b0;
      rsp_data   <= '0;
      for (int j = 0; j < 4; j++) pad_q[j] <= '0;
    end else begin
      for (int j = 0; j < 4; j++)
        if (pad_done[j]) begin pad_q[j] <= pad_ct[j]; pad_done_q[j] <= 1'b1; end
      if (mac_done) begin mac_blk_q <= mac_ct; mac_done_q <= 1'b1; end
      case (st_q)
        S_IDLE: if (pad_start) begin
          st_q <= S_PAD; enc_q <= req_encrypt; addr_q <= req_addr; vn_q <= req_vn;
          data_q <= req_data; cnt_q <= '0; pad_done_q <= '0; mac_done_q <= 1'b0;
        end
        S_PAD: begin
          if (cnt_q != 8'hff) cnt_q <= cnt_q + 8'd1;
          if (enc_q) begin
            if (mac_start) begin st_q <= S_MAC; cnt_q <= '0; end
          end else if (pad_done_q == 4'hf && (mac_done_q || mac_done) &&
                       cnt_q >= 8'((AES_LAT > MAC_LAT ? AES_LAT : MAC_LAT) - 1)) begin
            st_q <= S_RSP; rsp_valid <= 1'b1; rsp_data <= xored;
          end
        end
        S_MAC: begin
          if (cnt_q != 8'hff) cnt_q <= cnt_q + 8'd1;
          if ((mac_done_q || mac_done) && cnt_q >= 8'(MAC_LAT - 1)) begin
            st_q <= S_RSP; rsp_valid <= 1'b1; rsp_data <= xored;
          end
        end
        S_RSP: if (rsp_ready) begin rsp_valid <= 1'b0; st_q <= S_IDLE; end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign rsp_mac = mac_blk_q[127 -: MAC_W];

endmodule
