// trust_channel: one end of the trusted metadata channel between the CPU
// and NPU enclaves.
//
// Tensor metadata (address, length, VN, tensor MAC: 208 bits) travels over
// the untrusted link encrypted with the key both enclaves share after
// attestation. Each message is padded to two 128-bit blocks and XORed with
// the keystream AES(K, {seq, 0, dir, j}), j = 0, 1, where seq counts the
// messages sent in this direction and dir tells the two directions apart, so
// no keystream is ever reused. The receiver keeps its own counter, decrypts,
// and flags `rx_err` when the sequence number is not the expected one
// (replay or loss) or the 48 pad bits are not zero (a crude tamper check:
// the source does not say how the channel is authenticated).
//
// The end sends with direction bit TX_DIR and receives messages sent with
// the opposite bit. Transmit: valid/ready; the message appears on `link_tx_*`
// (one-cycle valid) about 22 cycles later (two AES passes). Receive: a
// `link_rx_valid` beat yields `rx_valid` about 22 cycles later. Transmit and
// receive each have an AES core and run independently.
module trust_channel #(
  parameter bit TX_DIR = 1'b0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [127:0]           key,
  input  logic                   tx_valid,
  output logic                   tx_ready,
  input  tee_pkg::tensor_meta_t  tx_meta,
  output logic                   link_tx_valid,
  output logic [255:0]           link_tx_data,
  output logic [63:0]            link_tx_seq,
  input  logic                   link_rx_valid,
  input  logic [255:0]           link_rx_data,
  input  logic [63:0]            link_rx_seq,
  output logic                   rx_valid,
  output tee_pkg::tensor_meta_t  rx_meta,
  output logic                   rx_err
);
  import tee_pkg::*;
  localparam int unsigned MW = $bits(tensor_meta_t);

  function automatic logic [127:0] ks_in(input logic [63:0] seq, input logic dir, input logic j);
    return {seq, 32'h0, 30'h0, dir, j};
  endfunction

  // ------------------------------------------------------------ transmit --
  logic        t_busy_q, t_blk_q, t_start, a_busy_t, a_done_t;
  logic [255:0] t_msg_q;
  logic [63:0] t_seq_q;
  logic [127:0] t_ct;
  assign tx_ready = !t_busy_q && !a_busy_t;
  assign t_start  = (tx_valid && tx_ready) || (t_busy_q && a_done_t && !t_blk_q);
  aes128_core u_tx_aes (.clk, .rst_n, .start(t_start), .key,
    .pt(ks_in(t_seq_q, TX_DIR, t_busy_q)), .busy(a_busy_t), .done(a_done_t), .ct(t_ct));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_busy_q <= 1'b0; t_blk_q <= 1'b0; t_msg_q <= '0; t_seq_q <= '0;
      link_tx_valid <= 1'b0; link_tx_data <= '0; link_tx_seq <= '0;
    end else begin
      link_tx_valid <= 1'b0;
      if (tx_valid && tx_ready) begin
        t_busy_q <= 1'b1; t_blk_q <= 1'b0; t_msg_q <= {tx_meta, {(256-MW){1'b0}}};
      end else if (t_busy_q && a_done_t) begin
        if (!t_blk_q) begin
          t_msg_q[255:128] <= t_msg_q[255:128] ^ t_ct;
          t_blk_q <= 1'b1;
        end else begin
          link_tx_valid <= 1'b1;
          link_tx_data  <= {t_msg_q[255:128], t_msg_q[127:0] ^ t_ct};
          link_tx_seq   <= t_seq_q;
          t_seq_q  <= t_seq_q + 64'd1;
          t_busy_q <= 1'b0;
        end
      end
    end
  end

  // ------------------------------------------------------------- receive --
  logic        r_busy_q, r_blk_q, r_start, a_busy_r, a_done_r, r_seqok_q;
  logic [255:0] r_msg_q;
  logic [63:0] r_seq_q;
  logic [127:0] r_ct;
  logic [255:0] r_plain;
  assign r_start = (link_rx_valid && !r_busy_q) || (r_busy_q && a_done_r && !r_blk_q);
  aes128_core u_rx_aes (.clk, .rst_n, .start(r_start), .key,
    .pt(ks_in(r_seq_q, ~TX_DIR, r_busy_q)), .busy(a_busy_r), .done(a_done_r), .ct(r_ct));
  assign r_plain = {r_msg_q[255:128], r_msg_q[127:0] ^ r_ct};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_busy_q <= 1'b0; r_blk_q <= 1'b0; r_msg_q <= '0; r_seq_q <= '0; r_seqok_q <= 1'b0;
      rx_valid <= 1'b0; rx_meta <= '0; rx_err <= 1'b0;
    end else begin
      rx_valid <= 1'b0;
      if (link_rx_valid && !r_busy_q) begin
        r_busy_q <= 1'b1; r_blk_q <= 1'b0; r_msg_q <= link_rx_data;
        r_seqok_q <= (link_rx_seq == r_seq_q);
      end else if (r_busy_q && a_done_r) begin
        if (!r_blk_q) begin
          r_msg_q[255:128] <= r_msg_q[255:128] ^ r_ct;
          r_blk_q <= 1'b1;
        end else begin
          rx_valid <= 1'b1;
          rx_meta  <= r_plain[255 -: MW];
          rx_err   <= !r_seqok_q || (r_plain[255-MW:0] != '0);
          r_seq_q  <= r_seq_q + 64'd1;
          r_busy_q <= 1'b0;
        end
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) link_rx_valid |-> !r_busy_q);

endmodule
