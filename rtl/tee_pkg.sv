// tee_pkg: widths, record types and helper functions shared by the TensorTEE
// memory-protection logic.
//
// Sizes that the design takes from its source description: 64-bit tensor
// addresses, 56-bit version numbers (VN) and MACs, a 10-bit stride, 64-byte
// cachelines, 512 Meta Table entries, a 10-entry Tensor Filter holding 4
// addresses per entry, a 6 KB bitmap cache and 512 NPU tensor poison bits.
// The length field of a table entry (LEN_W) and the NPU tensor id width are
// this design's own choices.
//
// The package also builds the AES S-box at elaboration time from the
// multiplicative inverse in GF(2^8) followed by the AES affine map, so no
// table has to be typed in.
package tee_pkg;

  localparam int unsigned VA_W     = 64;   // tensor address width
  localparam int unsigned VN_W     = 56;   // version number width
  localparam int unsigned MAC_W    = 56;   // MAC width
  localparam int unsigned STRIDE_W = 10;   // stride, in cachelines
  localparam int unsigned LEN_W    = 32;   // number of cachelines of an entry
  localparam int unsigned LINE_B   = 64;   // cacheline bytes
  localparam int unsigned LINE_W   = 512;  // cacheline bits
  localparam int unsigned LINE_SH  = 6;    // log2(LINE_B)

  typedef logic [VA_W-1:0]     addr_t;
  typedef logic [VN_W-1:0]     vn_t;
  typedef logic [MAC_W-1:0]    mac_t;
  typedef logic [STRIDE_W-1:0] stride_t;
  typedef logic [LEN_W-1:0]    len_t;
  typedef logic [LINE_W-1:0]   line_t;
  typedef logic [127:0]        blk_t;

  // One Meta Table entry (CPU side). uf/bs are the two flag bits.
  typedef struct packed {
    logic    valid;
    addr_t   base;     // VA of the first cacheline of the tensor
    addr_t   last;     // VA of the last cacheline covered
    len_t    len;      // number of cachelines covered
    stride_t stride;   // distance between consecutive lines, in lines
    vn_t     vn;       // shared version number
    mac_t    mac;      // tensor MAC (XOR of line MACs) of the last update
    logic    uf;       // updating flag
    logic    bs;       // bitmap state before the current update
    len_t    upd_cnt;  // lines flipped during the current update
    mac_t    upd_mac;  // MAC being accumulated during the current update
  } meta_entry_t;

  // Result class of a Meta Table lookup.
  typedef enum logic [1:0] {
    LK_MISS     = 2'd0,
    LK_HIT_IN   = 2'd1,
    LK_HIT_BND  = 2'd2
  } lookup_e;

  // Tensor metadata carried by the trusted channel.
  typedef struct packed {
    addr_t base;
    len_t  len;
    vn_t   vn;
    mac_t  mac;
  } tensor_meta_t;

  // Event counters of the TenAnalyzer.
  typedef struct packed {
    logic [31:0] hit_in;
    logic [31:0] hit_bnd;
    logic [31:0] miss;
    logic [31:0] extend;      // boundary hit confirmed, entry grown
    logic [31:0] bnd_wrong;   // boundary guess refuted by the off-chip VN
    logic [31:0] detect;      // tensor emitted by the filter
    logic [31:0] merge;       // insert absorbed by a neighbour
    logic [31:0] upd_start;   // write hit an edge, tensor update begins
    logic [31:0] upd_finish;  // tensor update complete, VN incremented
    logic [31:0] assert_fail; // entry invalidated by Assert1/2/3
    logic [31:0] install;     // entry written from a transfer descriptor
  } ta_stats_t;

  // NPU memory request kinds.
  typedef enum logic [1:0] {
    NK_READ  = 2'd0,   // tensor data read, delayed verification
    NK_WRITE = 2'd1,   // tensor data write
    NK_INST  = 2'd2    // instruction fetch, verified before release
  } npu_kind_e;

  // Event counters of the NPU Ten-Manager.
  typedef struct packed {
    logic [31:0] rd_lines;
    logic [31:0] wr_lines;
    logic [31:0] inst_lines;
    logic [31:0] verify_ok;
    logic [31:0] verify_fail;
    logic [31:0] inst_fail;
    logic [31:0] commit;      // tensor write finished, VN and MAC replaced
  } tm_stats_t;

  // Counters of the top level: transfers and the read-side VN repair.
  typedef struct packed {
    logic [31:0] c2n;           // CPU-to-NPU tensor transfers completed
    logic [31:0] n2c;           // NPU-to-CPU tensor transfers completed
    logic [31:0] xfer_err;      // transfers refused or failed
    logic [31:0] barrier_wait;  // cycles a transfer waited at the barrier
    logic [31:0] vn_redo;       // CPU reads decrypted again after a wrong guess
  } top_stats_t;

  // ---------------------------------------------------------------- AES --
  function automatic logic [7:0] gf_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = 8'h00;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = {x[6:0], 1'b0} ^ (x[7] ? 8'h1b : 8'h00);
    end
    return p;
  endfunction

  // 256 S-box bytes packed into one vector, byte i at [8*i +: 8].
  function automatic logic [2047:0] aes_gen_sbox();
    logic [7:0] expt [256];
    logic [7:0] logt [256];
    logic [7:0] v, inv, s;
    logic [2047:0] tab;
    v = 8'h01;
    for (int i = 0; i < 256; i++) begin
      expt[i] = v;
      v = gf_mul(v, 8'h03);
    end
    for (int i = 0; i < 256; i++) logt[i] = 8'h00;
    for (int i = 0; i < 255; i++) logt[expt[i]] = 8'(i);
    tab = '0;
    for (int i = 0; i < 256; i++) begin
      inv = (i == 0) ? 8'h00 : expt[(255 - int'(logt[i])) % 255];
      s = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^ {inv[4:0], inv[7:5]}
          ^ {inv[3:0], inv[7:4]} ^ 8'h63;
      tab[8*i +: 8] = s;
    end
    return tab;
  endfunction

  localparam logic [2047:0] AES_SBOX = aes_gen_sbox();

  function automatic logic [7:0] sbox(input logic [7:0] x);
    return AES_SBOX[8*x +: 8];
  endfunction

  // Counter block of line (addr, vn), 16-byte block number j.
  function automatic blk_t ctr_block(input addr_t a, input vn_t vn, input logic [1:0] j);
    return {a[VA_W-1:LINE_SH], 4'h0, j, vn[VN_W-1:0], 8'h00};
  endfunction

endpackage
