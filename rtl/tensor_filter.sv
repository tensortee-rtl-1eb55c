// tensor_filter: detects new tensors among the requests that miss in the
// Meta Table.
//
// Each of the ENTRIES entries collects up to ADDRS line addresses that share
// a version number (as in the source: 10 entries of 4 addresses, each with
// VN and MAC). A missed line (va, vn, line MAC and its bitmap bit, all from
// the off-chip metadata path) joins the entry that has the same VN and whose
// newest address lies below va by at most MAX_STRIDE lines; otherwise it
// opens a new entry (free one first, else round-robin). When an entry holds
// ADDRS addresses it is checked for the tensor condition: equal spacing, a
// power-of-two stride of at most MAX_STRIDE lines and equal bitmap bits. A
// passing entry is emitted as a Meta Table entry (base = first address,
// len = ADDRS, tensor MAC = XOR of the line MACs, BS = the common bitmap bit)
// and freed; a failing one is freed. One sample per clock; `out_valid`
// pulses the clock after the sample that completes a tensor.
module tensor_filter #(
  parameter int unsigned ENTRIES    = 10,
  parameter int unsigned ADDRS      = 4,
  parameter int unsigned MAX_STRIDE = 1023
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  tee_pkg::addr_t       in_va,
  input  tee_pkg::vn_t         in_vn,
  input  tee_pkg::mac_t        in_mac,
  input  logic                 in_bm,
  output logic                 out_valid,
  output tee_pkg::meta_entry_t out_entry,
  output logic                 out_reject    // pulse: a full entry failed
);
  import tee_pkg::*;
  localparam int unsigned EW = $clog2(ENTRIES);
  localparam int unsigned CW = $clog2(ADDRS + 1);

  typedef struct packed {
    logic [CW-1:0] cnt;
    vn_t           vn;
    mac_t          mac;
  } fent_t;

  fent_t        fe   [ENTRIES];
  addr_t        fa   [ENTRIES][ADDRS];
  logic [ADDRS-1:0] fbm [ENTRIES];
  logic [EW-1:0] rr_q;

  // choose the entry that takes the sample
  logic          join_f, free_f;
  logic [EW-1:0] join_i, free_i, tgt;
  always_comb begin
    join_f = 1'b0; free_f = 1'b0; join_i = '0; free_i = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (fe[i].cnt == '0) begin free_f = 1'b1; free_i = EW'(i); end
      else if (fe[i].vn == in_vn && in_va > fa[i][fe[i].cnt - 1'b1] &&
               in_va - fa[i][fe[i].cnt - 1'b1] <= (addr_t'(MAX_STRIDE) << LINE_SH)) begin
        join_f = 1'b1; join_i = EW'(i);
      end
    end
    tgt = join_f ? join_i : (free_f ? free_i : rr_q);
  end

  // tensor condition on the entry once the sample is added
  addr_t  na [ADDRS];
  logic [ADDRS-1:0] nbm;
  logic   full, ok;
  addr_t  d0;
  always_comb begin
    logic [CW-1:0] c;
    c = join_f ? fe[tgt].cnt : '0;
    for (int k = 0; k < ADDRS; k++) begin
      na[k]  = (join_f && k < int'(c)) ? fa[tgt][k] : in_va;
      nbm[k] = (join_f && k < int'(c)) ? fbm[tgt][k] : in_bm;
    end
    full = int'(c) + 1 == ADDRS;
    d0   = (na[1] - na[0]) >> LINE_SH;
    ok   = d0 != '0 && d0 <= addr_t'(MAX_STRIDE) && (d0 & (d0 - 1'b1)) == '0 &&
           ((na[1] - na[0]) & addr_t'(LINE_B - 1)) == '0 && (&nbm || ~|nbm);
    for (int k = 2; k < ADDRS; k++)
      if (na[k] - na[k-1] != na[1] - na[0]) ok = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        fe[i] <= '0; fbm[i] <= '0;
        for (int k = 0; k < ADDRS; k++) fa[i][k] <= '0;
      end
      rr_q       <= '0;
      out_valid  <= 1'b0;
      out_reject <= 1'b0;
      out_entry  <= '0;
    end else begin
      out_valid  <= 1'b0;
      out_reject <= 1'b0;
      if (in_valid) begin
        if (!join_f && !free_f) rr_q <= (rr_q == EW'(ENTRIES - 1)) ? '0 : rr_q + 1'b1;
        if (full) begin
          fe[tgt].cnt <= '0;
          out_valid   <= ok;
          out_reject  <= !ok;
          out_entry        <= '0;
          out_entry.valid  <= 1'b1;
          out_entry.base   <= na[0];
          out_entry.last   <= na[ADDRS-1];
          out_entry.len    <= len_t'(ADDRS);
          out_entry.stride <= stride_t'(d0);
          out_entry.vn     <= in_vn;
          out_entry.mac    <= (join_f ? fe[tgt].mac : '0) ^ in_mac;
          out_entry.bs     <= nbm[0];
        end else begin
          fe[tgt].cnt <= (join_f ? fe[tgt].cnt : '0) + 1'b1;
          fe[tgt].vn  <= in_vn;
          fe[tgt].mac <= (join_f ? fe[tgt].mac : '0) ^ in_mac;
          fa[tgt][join_f ? fe[tgt].cnt : '0]  <= in_va;
          fbm[tgt][join_f ? fe[tgt].cnt : '0] <= in_bm;
        end
      end
    end
  end

endmodule
