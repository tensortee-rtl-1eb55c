// ten_analyzer: tensor-granularity version-number management for the CPU
// memory controller (TenAnalyzer).
//
// It sits beside the memory encryption engine and answers, for every core
// request, which version number (VN) the engine must use, keeping one VN per
// detected tensor on chip so that most requests need no off-chip VN fetch or
// Merkle-tree walk. It holds the Meta Table, the Tensor Filter and the
// bitmap cache, and runs the source's two dataflows:
//
// Read (detection), class from the Meta Table lookup:
//   hit_in   the entry VN is returned at once (rsp_class = LK_HIT_IN);
//   hit_bnd  the entry VN is returned at once as a guess, and the off-chip
//            VN is fetched; when it arrives `chk_*` reports whether the guess
//            held; if so the entry grows by one line and the line MAC from
//            DRAM is XORed into the tensor MAC;
//   miss     the off-chip VN is fetched and returned; with EnTMF set the line
//            (VN, MAC, bitmap bit) goes to the Tensor Filter and a detected
//            tensor is inserted into the Meta Table (merging if possible).
// Write (update), with BM the bitmap bit, BS/UF the entry flags:
//   edge, UF=0  Assert1 BM==BS; flip BM; UF=1       (update starts)
//   edge, UF=1  Assert1; flip; Assert2 all lines flipped; VN+1, BS=~BS, UF=0
//   in          Assert3 UF==1; Assert1; flip
//   miss        VN = off-chip VN + 1
// A failed assertion invalidates the entry. Every write sends the new line VN
// to the off-chip VN store. The VN handed to the engine for a tensor write is
// entry VN + 1. Assert2 is checked with a per-entry count of flipped lines
// instead of reading every bitmap bit of the range (same condition, since a
// line can only be flipped once per update by Assert1). The write MAC of
// each line (computed by the engine with the new VN) is XORed into the
// tensor MAC that becomes valid when the update finishes.
//
// Transfer protocol: `mq_*` looks up the metadata of a tensor for the trusted
// channel (combinational); `ti_*` installs a tensor described by a transfer
// from the NPU.
//
// Interface timing: one request at a time. req valid/ready; one rsp_valid
// pulse with the VN (a write then waits for `wmac_valid`); for hit_bnd a
// later `chk_valid` pulse. With EnTMF clear every request takes the miss path
// and the filter is not fed. The off-chip VN store and bitmap store are
// reached through valid/ready ports.
module ten_analyzer #(
  parameter int unsigned ENTRIES        = 512,
  parameter int unsigned FILTER_ENTRIES = 10,
  parameter int unsigned FILTER_ADDRS   = 4,
  parameter int unsigned BITMAP_BYTES   = 6144
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en_tmf,
  // core request
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_write,
  input  tee_pkg::addr_t       req_va,
  output logic                 rsp_valid,
  output tee_pkg::vn_t         rsp_vn,
  output tee_pkg::lookup_e     rsp_class,
  output logic                 chk_valid,
  output logic                 chk_ok,
  output tee_pkg::vn_t         chk_vn,
  input  logic                 wmac_valid,
  input  tee_pkg::mac_t        wmac,
  // off-chip VN / MAC store (SGX-like metadata path)
  output logic                 vnf_req_valid,
  input  logic                 vnf_req_ready,
  output tee_pkg::addr_t       vnf_req_va,
  input  logic                 vnf_rsp_valid,
  input  tee_pkg::vn_t         vnf_rsp_vn,
  input  tee_pkg::mac_t        vnf_rsp_mac,
  output logic                 vnu_valid,
  input  logic                 vnu_ready,
  output tee_pkg::addr_t       vnu_va,
  output tee_pkg::vn_t         vnu_vn,
  // bitmap backing store
  output logic                 bm_req_valid,
  input  logic                 bm_req_ready,
  output logic                 bm_req_write,
  output tee_pkg::addr_t       bm_req_blk,
  output tee_pkg::line_t       bm_wdata,
  input  logic                 bm_rsp_valid,
  input  tee_pkg::line_t       bm_rdata,
  // transfer protocol
  input  tee_pkg::addr_t       mq_va,
  output logic                 mq_hit,
  output tee_pkg::meta_entry_t mq_entry,
  input  logic                 ti_valid,
  output logic                 ti_ready,
  input  tee_pkg::tensor_meta_t ti_meta,
  output tee_pkg::ta_stats_t   stats
);
  import tee_pkg::*;
  localparam int unsigned IW = $clog2(ENTRIES);

  typedef enum logic [3:0] {
    S_IDLE, S_LOOK, S_R_FETCH, S_R_WAIT, S_R_BM, S_R_FILT, S_R_INS,
    S_W_FETCH, S_W_WAIT, S_W_MAC, S_W_BM, S_W_UPD, S_W_VNU,
    S_T_BM, S_T_INS
  } state_e;
  state_e st_q;

  // meta table
  lookup_e     lk_res;
  logic [IW-1:0] lk_idx, inval_idx, wr_idx, ins_idx_o;
  meta_entry_t lk_entry, wr_entry, ins_entry;
  logic        lk_first, lk_last, inval, wr, ins, ins_merged;
  logic [$clog2(ENTRIES+1)-1:0] n_valid;
  addr_t       va_q;

  meta_table #(.ENTRIES(ENTRIES)) u_table (
    .clk, .rst_n, .lk_va(va_q), .lk_res, .lk_idx, .lk_entry, .lk_first, .lk_last,
    .q_va(mq_va), .q_hit(mq_hit), .q_entry(mq_entry),
    .inval, .inval_idx, .wr, .wr_idx, .wr_entry, .ins, .ins_entry,
    .ins_merged, .ins_idx_o, .n_valid
  );

  // tensor filter
  logic        f_valid, f_bm, f_out_valid, f_out_reject;
  meta_entry_t f_out_entry;
  vn_t         vn_q;
  mac_t        mac_q;
  tensor_filter #(.ENTRIES(FILTER_ENTRIES), .ADDRS(FILTER_ADDRS)) u_filter (
    .clk, .rst_n, .in_valid(f_valid), .in_va(va_q), .in_vn(vn_q), .in_mac(mac_q),
    .in_bm(f_bm), .out_valid(f_out_valid), .out_entry(f_out_entry), .out_reject(f_out_reject)
  );

  // bitmap cache
  logic        b_req_valid, b_req_ready, b_flip, b_rsp_valid, b_rsp_bit;
  addr_t       b_va;
  logic [31:0] b_misses;
  bitmap_cache #(.BYTES(BITMAP_BYTES)) u_bitmap (
    .clk, .rst_n, .req_valid(b_req_valid), .req_ready(b_req_ready), .req_flip(b_flip),
    .req_va(b_va), .rsp_valid(b_rsp_valid), .rsp_bit(b_rsp_bit),
    .mem_req_valid(bm_req_valid), .mem_req_ready(bm_req_ready), .mem_req_write(bm_req_write),
    .mem_req_blk(bm_req_blk), .mem_wdata(bm_wdata), .mem_rsp_valid(bm_rsp_valid),
    .mem_rdata(bm_rdata), .miss_count(b_misses)
  );

  // request context
  lookup_e       cls_q;
  logic [IW-1:0] idx_q;
  meta_entry_t   ent_q;
  logic          edge_q, bm_q, b_sent_q;
  vn_t           wvn_q;
  tensor_meta_t  ti_q;

  assign req_ready = (st_q == S_IDLE) && !ti_valid;
  assign ti_ready  = (st_q == S_IDLE);

  // bitmap requests
  always_comb begin
    b_req_valid = 1'b0; b_flip = 1'b0; b_va = va_q;
    case (st_q)
      S_R_BM: begin b_req_valid = !b_sent_q; b_flip = 1'b0; end
      S_W_BM: begin b_req_valid = !b_sent_q; b_flip = 1'b1; end
      S_T_BM: begin b_req_valid = !b_sent_q; b_flip = 1'b0; b_va = ti_q.base; end
      default: ;
    endcase
  end

  assign vnf_req_valid = (st_q == S_R_FETCH) || (st_q == S_W_FETCH);
  assign vnf_req_va    = va_q;
  assign vnu_valid     = (st_q == S_W_VNU);
  assign vnu_va        = va_q;
  assign vnu_vn        = wvn_q;

  // write-update decision (Figure "writing dataflow")
  meta_entry_t upd_e;
  logic        upd_fail, upd_start, upd_finish;
  always_comb begin
    upd_e = ent_q; upd_fail = 1'b0; upd_start = 1'b0; upd_finish = 1'b0;
    if (bm_q != ent_q.bs) upd_fail = 1'b1;                       // Assert1
    else if (edge_q && !ent_q.uf) begin
      upd_start     = 1'b1;
      upd_e.uf      = 1'b1;
      upd_e.upd_cnt = len_t'(1);
      upd_e.upd_mac = mac_q;
    end else if (edge_q && ent_q.uf) begin
      if (ent_q.upd_cnt + 1'b1 != ent_q.len) upd_fail = 1'b1;   // Assert2
      else begin
        upd_finish    = 1'b1;
        upd_e.vn      = ent_q.vn + 1'b1;
        upd_e.bs      = ~ent_q.bs;
        upd_e.uf      = 1'b0;
        upd_e.mac     = ent_q.upd_mac ^ mac_q;
        upd_e.upd_cnt = '0;
        upd_e.upd_mac = '0;
      end
    end else begin
      if (!ent_q.uf) upd_fail = 1'b1;                            // Assert3
      else begin
        upd_e.upd_cnt = ent_q.upd_cnt + 1'b1;
        upd_e.upd_mac = ent_q.upd_mac ^ mac_q;
      end
    end
  end

  // meta table update commands
  always_comb begin
    inval = 1'b0; inval_idx = idx_q; wr = 1'b0; wr_idx = idx_q; wr_entry = upd_e;
    ins = 1'b0; ins_entry = f_out_entry;
    case (st_q)
      S_R_WAIT: if (vnf_rsp_valid && cls_q == LK_HIT_BND && vnf_rsp_vn == ent_q.vn) begin
        wr = 1'b1;
        wr_entry      = ent_q;
        wr_entry.last = ent_q.last + (addr_t'(ent_q.stride) << LINE_SH);
        wr_entry.len  = ent_q.len + 1'b1;
        wr_entry.mac  = ent_q.mac ^ vnf_rsp_mac;
      end
      S_R_INS: ins = f_out_valid;
      S_W_UPD: if (cls_q == LK_HIT_IN) begin
        inval = upd_fail;
        wr    = !upd_fail;
      end
      S_T_INS: begin
        ins = 1'b1;
        ins_entry        = '0;
        ins_entry.valid  = 1'b1;
        ins_entry.base   = ti_q.base;
        ins_entry.len    = ti_q.len;
        ins_entry.last   = ti_q.base + ((addr_t'(ti_q.len) - 1) << LINE_SH);
        ins_entry.stride = stride_t'(1);
        ins_entry.vn     = ti_q.vn;
        ins_entry.mac    = ti_q.mac;
        ins_entry.bs     = bm_q;
      end
      default: ;
    endcase
  end

  assign f_valid = (st_q == S_R_FILT);
  assign f_bm    = bm_q;

  logic wr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; va_q <= '0; wr_q <= 1'b0; cls_q <= LK_MISS; idx_q <= '0; ent_q <= '0;
      edge_q <= 1'b0; bm_q <= 1'b0; b_sent_q <= 1'b0; wvn_q <= '0; vn_q <= '0; mac_q <= '0;
      ti_q <= '0;
      rsp_valid <= 1'b0; rsp_vn <= '0; rsp_class <= LK_MISS;
      chk_valid <= 1'b0; chk_ok <= 1'b0; chk_vn <= '0;
      stats <= '0;
    end else begin
      rsp_valid <= 1'b0;
      chk_valid <= 1'b0;
      if (b_req_valid && b_req_ready) b_sent_q <= 1'b1;
      if (ins_merged) stats.merge <= stats.merge + 1;
      case (st_q)
        S_IDLE: begin
          b_sent_q <= 1'b0;
          if (ti_valid) begin
            ti_q <= ti_meta; st_q <= S_T_BM;
          end else if (req_valid) begin
            va_q <= req_va; wr_q <= req_write; st_q <= S_LOOK;
          end
        end
        S_LOOK: begin
          cls_q  <= en_tmf ? lk_res : LK_MISS;
          idx_q  <= lk_idx;
          ent_q  <= lk_entry;
          edge_q <= lk_first || lk_last;
          if (!wr_q) begin
            if (en_tmf && lk_res == LK_HIT_IN) begin
              rsp_valid <= 1'b1; rsp_vn <= lk_entry.vn; rsp_class <= LK_HIT_IN;
              stats.hit_in <= stats.hit_in + 1;
              st_q <= S_IDLE;
            end else if (en_tmf && lk_res == LK_HIT_BND) begin
              rsp_valid <= 1'b1; rsp_vn <= lk_entry.vn; rsp_class <= LK_HIT_BND;
              stats.hit_bnd <= stats.hit_bnd + 1;
              st_q <= S_R_FETCH;
            end else st_q <= S_R_FETCH;
          end else begin
            if (en_tmf && lk_res == LK_HIT_IN) begin
              cls_q <= LK_HIT_IN;
              wvn_q <= lk_entry.vn + 1'b1;
              rsp_valid <= 1'b1; rsp_vn <= lk_entry.vn + 1'b1; rsp_class <= LK_HIT_IN;
              st_q <= S_W_MAC;
            end else begin
              cls_q <= LK_MISS;
              st_q <= S_W_FETCH;
            end
          end
        end
        S_R_FETCH: if (vnf_req_ready) st_q <= S_R_WAIT;
        S_R_WAIT: if (vnf_rsp_valid) begin
          vn_q <= vnf_rsp_vn; mac_q <= vnf_rsp_mac;
          if (cls_q == LK_HIT_BND) begin
            chk_valid <= 1'b1; chk_ok <= (vnf_rsp_vn == ent_q.vn); chk_vn <= vnf_rsp_vn;
            if (vnf_rsp_vn == ent_q.vn) stats.extend <= stats.extend + 1;
            else stats.bnd_wrong <= stats.bnd_wrong + 1;
            st_q <= S_IDLE;
          end else begin
            rsp_valid <= 1'b1; rsp_vn <= vnf_rsp_vn; rsp_class <= LK_MISS;
            stats.miss <= stats.miss + 1;
            st_q <= en_tmf ? S_R_BM : S_IDLE;
          end
        end
        S_R_BM: if (b_rsp_valid) begin bm_q <= b_rsp_bit; st_q <= S_R_FILT; end
        S_R_FILT: st_q <= S_R_INS;
        S_R_INS: begin
          if (f_out_valid) stats.detect <= stats.detect + 1;
          st_q <= S_IDLE;
        end
        S_W_FETCH: if (vnf_req_ready) st_q <= S_W_WAIT;
        S_W_WAIT: if (vnf_rsp_valid) begin
          wvn_q <= vnf_rsp_vn + 1'b1;
          rsp_valid <= 1'b1; rsp_vn <= vnf_rsp_vn + 1'b1; rsp_class <= LK_MISS;
          st_q <= S_W_MAC;
        end
        S_W_MAC: if (wmac_valid) begin
          mac_q <= wmac;
          st_q <= (cls_q == LK_HIT_IN || en_tmf) ? S_W_BM : S_W_VNU;
        end
        S_W_BM: if (b_rsp_valid) begin bm_q <= b_rsp_bit; st_q <= S_W_UPD; end
        S_W_UPD: begin
          if (cls_q == LK_HIT_IN) begin
            if (upd_fail)   stats.assert_fail <= stats.assert_fail + 1;
            if (upd_start)  stats.upd_start   <= stats.upd_start + 1;
            if (upd_finish) stats.upd_finish  <= stats.upd_finish + 1;
          end
          st_q <= S_W_VNU;
        end
        S_W_VNU: if (vnu_ready) st_q <= S_IDLE;
        S_T_BM: if (b_rsp_valid) begin bm_q <= b_rsp_bit; st_q <= S_T_INS; end
        S_T_INS: begin
          stats.install <= stats.install + 1;
          st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // the request port is single-outstanding: no new request while busy
  a_one_req: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && req_ready) |=> (st_q != S_IDLE));

endmodule
