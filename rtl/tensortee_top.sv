// tensortee_top: the memory-protection logic of a CPU + discrete NPU system
// with one tensor-granularity TEE spanning both.
//
// CPU memory controller: requests from the cores go to the TenAnalyzer,
// which returns the version number (VN) for the line from its Meta Table or
// from the off-chip VN store; the line is then decrypted or encrypted by the
// CPU memory encryption engine (MEE). For a boundary hit the read is
// decrypted with the guessed VN while the off-chip VN is fetched, and
// decrypted again with the right one if the guess was refuted. A write's
// line MAC goes back to the TenAnalyzer to build the tensor MAC.
// NPU memory controller: the Ten-Manager (with its own MEE) serves the NPU's
// tensor reads with delayed verification, instruction fetches with immediate
// verification, and tensor writes; its verification events drive the poison
// tracker.
// Transfers (x_*): CPU-to-NPU looks the tensor up in the Meta Table, sends
// its {address, length, VN, MAC} on the trusted channel and copies the
// ciphertext host-to-device on the direct channel at the same time; the
// received metadata becomes the NPU tensor descriptor. NPU-to-CPU first
// waits at the verification barrier until the tensor is no longer poisoned,
// then sends the descriptor on the trusted channel (installed into the Meta
// Table) and copies device-to-host. `x_done` pulses when both halves are
// complete; `x_err` with it when the transfer was refused (no exact Meta
// Table entry, an update in progress, a barrier failure, a counter-address
// mismatch or a channel error).
//
// Outside this module (ports): cores and caches, host and device memory
// (data, off-chip VN/MAC store, bitmap store), the NPU control processor, the
// link that carries the trusted channel (tc_* out/in pairs, looped back or
// carried by PCIe) and the attestation that provides the shared keys.
// Memory addresses on the CPU side are the tensor virtual addresses; the
// address translation in the memory controller is not modelled.
module tensortee_top #(
  parameter int unsigned META_ENTRIES   = 512,
  parameter int unsigned FILTER_ENTRIES = 10,
  parameter int unsigned FILTER_ADDRS   = 4,
  parameter int unsigned BITMAP_BYTES   = 6144,
  parameter int unsigned NPU_TENSORS    = 512,
  parameter int unsigned MAX_UNVERIFIED = 16,
  parameter int unsigned AES_LAT        = 40,
  parameter int unsigned MAC_LAT        = 40
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [127:0]           key_enc,
  input  logic [127:0]           key_mac,
  input  logic [127:0]           key_tc,
  input  logic                   en_tmf,
  // CPU core requests (after the LLC for writes)
  input  logic                   c_req_valid,
  output logic                   c_req_ready,
  input  logic                   c_req_write,
  input  tee_pkg::addr_t         c_req_va,
  input  tee_pkg::line_t         c_req_wdata,
  output logic                   c_rsp_valid,
  output tee_pkg::line_t         c_rsp_data,
  output tee_pkg::mac_t          c_rsp_mac,
  output tee_pkg::vn_t           c_rsp_vn,
  output tee_pkg::lookup_e       c_rsp_class,
  // host memory data
  output logic                   hm_req_valid,
  input  logic                   hm_req_ready,
  output logic                   hm_req_write,
  output tee_pkg::addr_t         hm_req_addr,
  output tee_pkg::line_t         hm_wdata,
  input  logic                   hm_rsp_valid,
  input  tee_pkg::line_t         hm_rdata,
  // off-chip VN / MAC store
  output logic                   vnf_req_valid,
  input  logic                   vnf_req_ready,
  output tee_pkg::addr_t         vnf_req_va,
  input  logic                   vnf_rsp_valid,
  input  tee_pkg::vn_t           vnf_rsp_vn,
  input  tee_pkg::mac_t          vnf_rsp_mac,
  output logic                   vnu_valid,
  input  logic                   vnu_ready,
  output tee_pkg::addr_t         vnu_va,
  output tee_pkg::vn_t           vnu_vn,
  // bitmap store
  output logic                   bm_req_valid,
  input  logic                   bm_req_ready,
  output logic                   bm_req_write,
  output tee_pkg::addr_t         bm_req_blk,
  output tee_pkg::line_t         bm_wdata,
  input  logic                   bm_rsp_valid,
  input  tee_pkg::line_t         bm_rdata,
  // NPU core requests
  input  logic                   n_req_valid,
  output logic                   n_req_ready,
  input  tee_pkg::npu_kind_e     n_req_kind,
  input  logic [$clog2(NPU_TENSORS)-1:0] n_req_id,
  input  tee_pkg::len_t          n_req_idx,
  input  tee_pkg::addr_t         n_req_addr,
  input  tee_pkg::line_t         n_req_wdata,
  output logic                   n_rsp_valid,
  output tee_pkg::line_t         n_rsp_data,
  output logic                   n_rsp_poison,
  output logic                   n_rsp_err,
  output logic                   n_wr_done,
  // NPU control processor: descriptors and kernel dataflow
  input  logic                   n_reg_valid,
  output logic                   n_reg_ready,
  input  logic [$clog2(NPU_TENSORS)-1:0] n_reg_id,
  input  tee_pkg::tensor_meta_t  n_reg_meta,
  input  tee_pkg::addr_t         n_reg_dev,
  input  logic                   prop_valid,
  input  logic [$clog2(NPU_TENSORS)-1:0] prop_out,
  input  logic [3:0]             prop_in_vld,
  input  logic [$clog2(NPU_TENSORS)-1:0] prop_in [4],
  output logic                   limit_stall,
  output logic                   verify_fail,
  output logic [NPU_TENSORS-1:0] poison,
  // device memory
  output logic                   dm_req_valid,
  input  logic                   dm_req_ready,
  output logic                   dm_req_write,
  output tee_pkg::addr_t         dm_req_addr,
  output tee_pkg::line_t         dm_wdata,
  input  logic                   dm_rsp_valid,
  input  tee_pkg::line_t         dm_rdata,
  input  tee_pkg::mac_t          dm_rmac,
  // transfers
  input  logic                   x_valid,
  output logic                   x_ready,
  input  logic                   x_dir,        // 0: CPU to NPU, 1: NPU to CPU
  input  logic [$clog2(NPU_TENSORS)-1:0] x_id,
  input  tee_pkg::addr_t         x_cpu_va,
  input  tee_pkg::len_t          x_lines,
  input  tee_pkg::addr_t         x_dev,
  output logic                   x_done,
  output logic                   x_err,
  // trusted channel link, both directions
  output logic                   tc_c2n_valid,
  output logic [255:0]           tc_c2n_data,
  output logic [63:0]            tc_c2n_seq,
  input  logic                   tc_c2n_in_valid,
  input  logic [255:0]           tc_c2n_in_data,
  input  logic [63:0]            tc_c2n_in_seq,
  output logic                   tc_n2c_valid,
  output logic [255:0]           tc_n2c_data,
  output logic [63:0]            tc_n2c_seq,
  input  logic                   tc_n2c_in_valid,
  input  logic [255:0]           tc_n2c_in_data,
  input  logic [63:0]            tc_n2c_in_seq,
  // direct channel memory ports
  output logic                   dh_rd_valid,
  input  logic                   dh_rd_ready,
  output tee_pkg::addr_t         dh_rd_addr,
  input  logic                   dh_rd_rsp_valid,
  input  tee_pkg::line_t         dh_rd_rsp_data,
  output logic                   dh_wr_valid,
  input  logic                   dh_wr_ready,
  output tee_pkg::addr_t         dh_wr_addr,
  output tee_pkg::line_t         dh_wr_data,
  output logic                   dd_rd_valid,
  input  logic                   dd_rd_ready,
  output tee_pkg::addr_t         dd_rd_addr,
  input  logic                   dd_rd_rsp_valid,
  input  tee_pkg::line_t         dd_rd_rsp_data,
  output logic                   dd_wr_valid,
  input  logic                   dd_wr_ready,
  output tee_pkg::addr_t         dd_wr_addr,
  output tee_pkg::line_t         dd_wr_data,
  // event counters
  output tee_pkg::ta_stats_t     ta_stats,
  output tee_pkg::tm_stats_t     tm_stats,
  output tee_pkg::top_stats_t    top_stats
);
  import tee_pkg::*;
  localparam int unsigned TW = $clog2(NPU_TENSORS);

  // =============================================================== CPU ==
  logic        ta_req_valid, ta_req_ready, ta_rsp_valid, ta_chk_valid, ta_chk_ok, ta_wmac_valid;
  vn_t         ta_rsp_vn, ta_chk_vn;
  lookup_e     ta_rsp_class;
  addr_t       mq_va;
  logic        mq_hit, ti_valid, ti_ready;
  meta_entry_t mq_entry;
  tensor_meta_t ti_meta;
  mac_t        cm_rsp_mac;

  ten_analyzer #(.ENTRIES(META_ENTRIES), .FILTER_ENTRIES(FILTER_ENTRIES),
                 .FILTER_ADDRS(FILTER_ADDRS), .BITMAP_BYTES(BITMAP_BYTES)) u_ta (
    .clk, .rst_n, .en_tmf,
    .req_valid(ta_req_valid), .req_ready(ta_req_ready), .req_write(c_req_write), .req_va(c_req_va),
    .rsp_valid(ta_rsp_valid), .rsp_vn(ta_rsp_vn), .rsp_class(ta_rsp_class),
    .chk_valid(ta_chk_valid), .chk_ok(ta_chk_ok), .chk_vn(ta_chk_vn),
    .wmac_valid(ta_wmac_valid), .wmac(cm_rsp_mac),
    .vnf_req_valid, .vnf_req_ready, .vnf_req_va, .vnf_rsp_valid, .vnf_rsp_vn, .vnf_rsp_mac,
    .vnu_valid, .vnu_ready, .vnu_va, .vnu_vn,
    .bm_req_valid, .bm_req_ready, .bm_req_write, .bm_req_blk, .bm_wdata, .bm_rsp_valid, .bm_rdata,
    .mq_va, .mq_hit, .mq_entry, .ti_valid, .ti_ready, .ti_meta, .stats(ta_stats)
  );

  // CPU memory-controller sequencer
  typedef enum logic [3:0] {
    C_IDLE, C_TA, C_HM_RD, C_HM_WAIT, C_DEC, C_DEC_WAIT, C_CHK, C_ENC, C_ENC_WAIT,
    C_HM_WR, C_RSP
  } cstate_e;
  cstate_e cst_q;
  logic [31:0] vn_redo_q;
  logic    cwr_q, bnd_q, chk_seen_q, chk_ok_q, redo_q;
  addr_t   cva_q;
  vn_t     cvn_q, chk_vn_q;
  line_t   cdata_q;
  logic    cm_req_valid, cm_req_ready, cm_rsp_valid;
  line_t   cm_rsp_data;

  mee #(.AES_LAT(AES_LAT), .MAC_LAT(MAC_LAT)) u_cpu_mee (
    .clk, .rst_n, .key_enc, .key_mac,
    .req_valid(cm_req_valid), .req_ready(cm_req_ready), .req_encrypt(cwr_q),
    .req_addr(cva_q), .req_vn(cvn_q), .req_data(cdata_q),
    .rsp_valid(cm_rsp_valid), .rsp_ready(1'b1), .rsp_data(cm_rsp_data), .rsp_mac(cm_rsp_mac)
  );

  assign c_req_ready   = (cst_q == C_IDLE) && ta_req_ready;
  assign ta_req_valid  = (cst_q == C_IDLE) && c_req_valid;
  assign cm_req_valid  = (cst_q == C_DEC) || (cst_q == C_ENC);
  assign ta_wmac_valid = (cst_q == C_ENC_WAIT) && cm_rsp_valid;
  assign hm_req_valid  = (cst_q == C_HM_RD) || (cst_q == C_HM_WR);
  assign hm_req_write  = (cst_q == C_HM_WR);
  assign hm_req_addr   = cva_q;
  assign hm_wdata      = cdata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst_q <= C_IDLE; cwr_q <= 1'b0; bnd_q <= 1'b0; chk_seen_q <= 1'b0; chk_ok_q <= 1'b0;
      redo_q <= 1'b0; cva_q <= '0; cvn_q <= '0; chk_vn_q <= '0; cdata_q <= '0;
      c_rsp_valid <= 1'b0; c_rsp_data <= '0; c_rsp_mac <= '0; c_rsp_vn <= '0; c_rsp_class <= LK_MISS;
      vn_redo_q <= '0;
    end else begin
      c_rsp_valid <= 1'b0;
      if (ta_chk_valid) begin chk_seen_q <= 1'b1; chk_ok_q <= ta_chk_ok; chk_vn_q <= ta_chk_vn; end
      case (cst_q)
        C_IDLE: if (c_req_valid && ta_req_ready) begin
          cwr_q <= c_req_write; cva_q <= c_req_va; cdata_q <= c_req_wdata;
          chk_seen_q <= 1'b0; redo_q <= 1'b0;
          cst_q <= C_TA;
        end
        C_TA: if (ta_rsp_valid) begin
          cvn_q <= ta_rsp_vn; c_rsp_class <= ta_rsp_class;
          bnd_q <= !cwr_q && ta_rsp_class == LK_HIT_BND;
          cst_q <= cwr_q ? C_ENC : C_HM_RD;
        end
        C_HM_RD:   if (hm_req_ready) cst_q <= C_HM_WAIT;
        C_HM_WAIT: if (hm_rsp_valid) begin cdata_q <= hm_rdata; cst_q <= C_DEC; end
        C_DEC:     if (cm_req_ready) cst_q <= C_DEC_WAIT;
        C_DEC_WAIT: if (cm_rsp_valid) begin
          c_rsp_data <= cm_rsp_data; c_rsp_mac <= cm_rsp_mac; c_rsp_vn <= cvn_q;
          cst_q <= (bnd_q && !redo_q) ? C_CHK : C_RSP;
        end
        C_CHK: if (chk_seen_q) begin
          if (chk_ok_q) cst_q <= C_RSP;
          else begin
            // the guessed VN was wrong: decrypt again with the off-chip VN
            cvn_q <= chk_vn_q; redo_q <= 1'b1; cst_q <= C_DEC;
            vn_redo_q <= vn_redo_q + 1;
          end
        end
        C_ENC:      if (cm_req_ready) cst_q <= C_ENC_WAIT;
        C_ENC_WAIT: if (cm_rsp_valid) begin
          cdata_q <= cm_rsp_data; c_rsp_mac <= cm_rsp_mac; c_rsp_vn <= cvn_q; c_rsp_data <= '0;
          cst_q <= C_HM_WR;
        end
        C_HM_WR: if (hm_req_ready) cst_q <= C_RSP;
        C_RSP: begin c_rsp_valid <= 1'b1; cst_q <= C_IDLE; end
        default: cst_q <= C_IDLE;
      endcase
    end
  end

  // =============================================================== NPU ==
  logic          tm_reg_valid, tm_req_ready;
  logic [TW-1:0] tm_reg_id, tq_id;
  tensor_meta_t  tm_reg_meta, tq_meta;
  addr_t         tm_reg_dev, tq_dev;
  logic          ev_rd_start, ev_verify, ev_ok;
  logic [TW-1:0] ev_id;
  logic          bar_valid, bar_pass, bar_fail;
  logic [TW-1:0] bar_id;
  logic [$clog2(NPU_TENSORS+1)-1:0] unverified;

  ten_manager #(.TENSORS(NPU_TENSORS), .AES_LAT(AES_LAT), .MAC_LAT(MAC_LAT)) u_tm (
    .clk, .rst_n, .key_enc, .key_mac,
    .reg_valid(tm_reg_valid), .reg_id(tm_reg_id), .reg_meta(tm_reg_meta), .reg_dev(tm_reg_dev),
    .tq_id, .tq_meta, .tq_dev,
    .req_valid(n_req_valid), .req_ready(tm_req_ready), .req_kind(n_req_kind), .req_id(n_req_id),
    .req_idx(n_req_idx), .req_addr(n_req_addr), .req_wdata(n_req_wdata),
    .rsp_valid(n_rsp_valid), .rsp_data(n_rsp_data), .rsp_poison(n_rsp_poison), .rsp_err(n_rsp_err),
    .wr_done(n_wr_done), .ev_rd_start, .ev_verify, .ev_ok, .ev_id,
    .dm_req_valid, .dm_req_ready, .dm_req_write, .dm_req_addr, .dm_wdata,
    .dm_rsp_valid, .dm_rdata, .dm_rmac, .stats(tm_stats)
  );
  assign n_req_ready = tm_req_ready;

  poison_tracker #(.TENSORS(NPU_TENSORS), .MAX_UNVERIFIED(MAX_UNVERIFIED), .NIN(4)) u_pt (
    .clk, .rst_n, .ev_rd_start, .ev_verify, .ev_ok, .ev_id,
    .prop_valid, .prop_out, .prop_in_vld, .prop_in,
    .bar_valid, .bar_id, .bar_pass, .bar_fail, .limit_stall, .fail(verify_fail), .unverified, .poison
  );

  // ========================================================= transfers ==
  logic         ctx_valid, ctx_ready, ntx_valid, ntx_ready;
  tensor_meta_t ctx_meta, ntx_meta, crx_meta, nrx_meta;
  logic         crx_valid, crx_err, nrx_valid, nrx_err;

  trust_channel #(.TX_DIR(1'b0)) u_tc_cpu (
    .clk, .rst_n, .key(key_tc), .tx_valid(ctx_valid), .tx_ready(ctx_ready), .tx_meta(ctx_meta),
    .link_tx_valid(tc_c2n_valid), .link_tx_data(tc_c2n_data), .link_tx_seq(tc_c2n_seq),
    .link_rx_valid(tc_n2c_in_valid), .link_rx_data(tc_n2c_in_data), .link_rx_seq(tc_n2c_in_seq),
    .rx_valid(crx_valid), .rx_meta(crx_meta), .rx_err(crx_err)
  );
  trust_channel #(.TX_DIR(1'b1)) u_tc_npu (
    .clk, .rst_n, .key(key_tc), .tx_valid(ntx_valid), .tx_ready(ntx_ready), .tx_meta(ntx_meta),
    .link_tx_valid(tc_n2c_valid), .link_tx_data(tc_n2c_data), .link_tx_seq(tc_n2c_seq),
    .link_rx_valid(tc_c2n_in_valid), .link_rx_data(tc_c2n_in_data), .link_rx_seq(tc_c2n_in_seq),
    .rx_valid(nrx_valid), .rx_meta(nrx_meta), .rx_err(nrx_err)
  );

  logic        dc_c2n_valid, dc_c2n_ready, dc_c2n_done, dc_n2c_valid, dc_n2c_ready, dc_n2c_done;
  logic [31:0] dc_c2n_lines, dc_n2c_lines;
  addr_t       xva_q, xdev_q;
  len_t        xlen_q;

  direct_channel u_dc_c2n (
    .clk, .rst_n, .cmd_valid(dc_c2n_valid), .cmd_ready(dc_c2n_ready),
    .cmd_src(xva_q), .cmd_dst(xdev_q), .cmd_lines(xlen_q),
    .rd_req_valid(dh_rd_valid), .rd_req_ready(dh_rd_ready), .rd_req_addr(dh_rd_addr),
    .rd_rsp_valid(dh_rd_rsp_valid), .rd_rsp_data(dh_rd_rsp_data),
    .wr_req_valid(dd_wr_valid), .wr_req_ready(dd_wr_ready), .wr_req_addr(dd_wr_addr),
    .wr_req_data(dd_wr_data), .done(dc_c2n_done), .lines_moved(dc_c2n_lines)
  );
  direct_channel u_dc_n2c (
    .clk, .rst_n, .cmd_valid(dc_n2c_valid), .cmd_ready(dc_n2c_ready),
    .cmd_src(xdev_q), .cmd_dst(xva_q), .cmd_lines(xlen_q),
    .rd_req_valid(dd_rd_valid), .rd_req_ready(dd_rd_ready), .rd_req_addr(dd_rd_addr),
    .rd_rsp_valid(dd_rd_rsp_valid), .rd_rsp_data(dd_rd_rsp_data),
    .wr_req_valid(dh_wr_valid), .wr_req_ready(dh_wr_ready), .wr_req_addr(dh_wr_addr),
    .wr_req_data(dh_wr_data), .done(dc_n2c_done), .lines_moved(dc_n2c_lines)
  );

  typedef enum logic [3:0] {
    X_IDLE, X_C_LOOK, X_C_SEND, X_C_WAIT, X_N_BAR, X_N_SEND, X_N_WAIT, X_N_INST, X_DONE
  } xstate_e;
  xstate_e       xst_q;
  logic          xdir_q, meta_done_q, data_done_q, xerr_q;
  logic [TW-1:0] xid_q;
  logic [31:0]   c2n_q, n2c_q, xfer_err_q, barrier_wait_q;

  assign top_stats = '{c2n: c2n_q, n2c: n2c_q, xfer_err: xfer_err_q,
                       barrier_wait: barrier_wait_q, vn_redo: vn_redo_q};

  assign x_ready   = (xst_q == X_IDLE);
  assign mq_va     = xva_q;
  assign tq_id     = xid_q;
  assign bar_id    = xid_q;
  assign bar_valid = (xst_q == X_N_BAR);
  assign ctx_valid = (xst_q == X_C_SEND);
  assign ctx_meta  = '{base: mq_entry.base, len: mq_entry.len, vn: mq_entry.vn, mac: mq_entry.mac};
  assign ntx_valid = (xst_q == X_N_SEND);
  assign ntx_meta  = tq_meta;
  assign dc_c2n_valid = (xst_q == X_C_SEND) && ctx_ready;
  assign dc_n2c_valid = (xst_q == X_N_SEND) && ntx_ready;
  assign ti_valid  = (xst_q == X_N_INST);
  assign ti_meta   = crx_meta;

  // NPU descriptor port: metadata received on the trusted channel first
  assign tm_reg_valid = (nrx_valid && !nrx_err && xst_q == X_C_WAIT) || (n_reg_valid && !nrx_valid);
  assign tm_reg_id    = (nrx_valid && xst_q == X_C_WAIT) ? xid_q : n_reg_id;
  assign tm_reg_meta  = (nrx_valid && xst_q == X_C_WAIT) ? nrx_meta : n_reg_meta;
  assign tm_reg_dev   = (nrx_valid && xst_q == X_C_WAIT) ? xdev_q : n_reg_dev;
  assign n_reg_ready  = !nrx_valid;

  logic c_exact;
  assign c_exact = mq_hit && mq_entry.base == xva_q && mq_entry.len == xlen_q &&
                   mq_entry.stride == stride_t'(1) && !mq_entry.uf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xst_q <= X_IDLE; xdir_q <= 1'b0; xid_q <= '0; xva_q <= '0; xdev_q <= '0; xlen_q <= '0;
      meta_done_q <= 1'b0; data_done_q <= 1'b0; xerr_q <= 1'b0;
      x_done <= 1'b0; x_err <= 1'b0;
      c2n_q <= '0; n2c_q <= '0; xfer_err_q <= '0; barrier_wait_q <= '0;
    end else begin
      x_done <= 1'b0; x_err <= 1'b0;
      if (dc_c2n_done || dc_n2c_done) data_done_q <= 1'b1;
      case (xst_q)
        X_IDLE: if (x_valid) begin
          xdir_q <= x_dir; xid_q <= x_id; xva_q <= x_cpu_va; xdev_q <= x_dev; xlen_q <= x_lines;
          meta_done_q <= 1'b0; data_done_q <= 1'b0; xerr_q <= 1'b0;
          xst_q <= x_dir ? X_N_BAR : X_C_LOOK;
        end
        // ---- CPU to NPU
        X_C_LOOK: if (c_exact) xst_q <= X_C_SEND;
                  else begin xerr_q <= 1'b1; xst_q <= X_DONE; end
        X_C_SEND: if (ctx_ready) xst_q <= X_C_WAIT;   // metadata and data leave together
        X_C_WAIT: begin
          if (nrx_valid) begin meta_done_q <= 1'b1; if (nrx_err) xerr_q <= 1'b1; end
          if ((meta_done_q || nrx_valid) && (data_done_q || dc_c2n_done)) xst_q <= X_DONE;
        end
        // ---- NPU to CPU
        X_N_BAR: begin
          if (bar_fail) begin xerr_q <= 1'b1; xst_q <= X_DONE; end
          else if (bar_pass) begin
            xlen_q <= tq_meta.len; xdev_q <= tq_dev;
            if (tq_meta.base != xva_q) begin xerr_q <= 1'b1; xst_q <= X_DONE; end
            else xst_q <= X_N_SEND;
          end else barrier_wait_q <= barrier_wait_q + 1;
        end
        X_N_SEND: if (ntx_ready) xst_q <= X_N_WAIT;
        X_N_WAIT: if (crx_valid) begin
          if (crx_err) begin xerr_q <= 1'b1; xst_q <= X_DONE; end
          else xst_q <= X_N_INST;
        end
        X_N_INST: if (ti_ready) begin meta_done_q <= 1'b1; xst_q <= X_DONE; end
        X_DONE: if (xerr_q || data_done_q || dc_c2n_done || dc_n2c_done ||
                    (xlen_q == '0)) begin
          // a refused transfer ends at once; otherwise wait for the copy
          x_done <= 1'b1; x_err <= xerr_q;
          if (xerr_q) xfer_err_q <= xfer_err_q + 1;
          else if (xdir_q) n2c_q <= n2c_q + 1;
          else c2n_q <= c2n_q + 1;
          xst_q <= X_IDLE;
        end
        default: xst_q <= X_IDLE;
      endcase
    end
  end

  // unused: line counters of the copy engines, register-port handshake
  logic unused;
  assign unused = ^{dc_c2n_lines, dc_n2c_lines, dc_c2n_ready, dc_n2c_ready, unverified, meta_done_q};

endmodule
