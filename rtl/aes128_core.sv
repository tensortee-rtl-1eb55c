// aes128_core: AES-128 block encryption (FIPS-197), one round per clock.
//
// The memory encryption engines and the trusted metadata channel all need a
// 128-bit block cipher; the source description names AES-128 with a 40-cycle
// latency but does not describe the engine, so this is a plain iterative
// implementation: the initial AddRoundKey is applied when `start` is taken,
// then rounds 1..10 run one per cycle with the round key expanded on the fly.
// The result is valid on `ct` when `done` pulses, 10 cycles after `start`;
// the 40-cycle figure is met by the latency padding in the users (see mee).
// `start` is ignored while `busy`. Only encryption is needed: counter mode
// decrypts with the same keystream.
module aes128_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] key,
  input  logic [127:0] pt,
  output logic         busy,
  output logic         done,
  output logic [127:0] ct
);
  import tee_pkg::*;

  logic [127:0] state_q, rkey_q;
  logic [3:0]   round_q;
  logic [7:0]   rcon_q;

  function automatic logic [7:0] xt(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  // byte k of a 128-bit block, k = 4*column + row, byte 0 is the MSB
  function automatic logic [7:0] byte_of(input logic [127:0] s, input int k);
    return s[127-8*k -: 8];
  endfunction

  logic [127:0] sb_sr, mc, nkey, nstate;
  logic [31:0]  kt;

  always_comb begin
    // SubBytes + ShiftRows
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        sb_sr[127-8*(4*c+r) -: 8] = sbox(byte_of(state_q, 4*((c + r) % 4) + r));
    // MixColumns
    for (int c = 0; c < 4; c++) begin
      logic [7:0] a0, a1, a2, a3;
      a0 = byte_of(sb_sr, 4*c);     a1 = byte_of(sb_sr, 4*c+1);
      a2 = byte_of(sb_sr, 4*c+2);   a3 = byte_of(sb_sr, 4*c+3);
      mc[127-32*c -: 32] = {xt(a0) ^ xt(a1) ^ a1 ^ a2 ^ a3,
                            a0 ^ xt(a1) ^ xt(a2) ^ a2 ^ a3,
                            a0 ^ a1 ^ xt(a2) ^ xt(a3) ^ a3,
                            xt(a0) ^ a0 ^ a1 ^ a2 ^ xt(a3)};
    end
    // next round key
    kt = {sbox(rkey_q[23:16]) ^ rcon_q, sbox(rkey_q[15:8]), sbox(rkey_q[7:0]), sbox(rkey_q[31:24])};
    nkey[127:96] = rkey_q[127:96] ^ kt;
    nkey[95:64]  = rkey_q[95:64]  ^ nkey[127:96];
    nkey[63:32]  = rkey_q[63:32]  ^ nkey[95:64];
    nkey[31:0]   = rkey_q[31:0]   ^ nkey[63:32];
    nstate = ((round_q == 4'd10) ? sb_sr : mc) ^ nkey;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= '0;
      rkey_q  <= '0;
      round_q <= '0;
      rcon_q  <= 8'h01;
      busy    <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          state_q <= pt ^ key;
          rkey_q  <= key;
          round_q <= 4'd1;
          rcon_q  <= 8'h01;
          busy    <= 1'b1;
        end
      end else begin
        state_q <= nstate;
        rkey_q  <= nkey;
        rcon_q  <= xt(rcon_q);
        round_q <= round_q + 4'd1;
        if (round_q == 4'd10) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign ct = state_q;

endmodule
