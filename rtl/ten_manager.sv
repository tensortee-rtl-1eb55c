// ten_manager: tensor-wise version numbers and MACs with delayed
// verification for the NPU memory controller (Ten-Manager plus its MEE).
//
// Every NPU tensor (TENSORS of them, id = table index) has on chip: the
// address base used in the encryption counter, its device-memory base, its
// length in lines, one VN and one tensor MAC. The tensor MAC is the XOR of
// the 56-bit MACs of all its lines, so no per-line MAC of tensor data is
// stored in device memory and the order in which lines are touched does not
// matter.
//
// Tensor read (NK_READ): the line is fetched, decrypted and returned at once,
// flagged `rsp_poison`; its recomputed MAC is XORed into a running value.
// When as many lines as the tensor holds have been read, the running value is
// compared with the stored tensor MAC and `ev_verify` reports the result:
// verification runs beside computation instead of stalling it. The first
// line of such a read pass raises `ev_rd_start` (the tensor becomes
// unverified). A read pass is assumed to touch every line exactly once.
// Instruction fetch (NK_INST): the line and its per-line MAC are fetched, the
// line is decrypted with the code VN (0, code is written once) and released
// only if the MAC matches (`rsp_err` otherwise): code is never used
// unverified.
// Tensor write (NK_WRITE): the first line of a write pass selects VN+1; each
// line is encrypted with it and its MAC XORed into a second running value;
// after `len` lines the new VN and tensor MAC replace the old ones.
//
// `reg_*` writes a tensor descriptor (from the control processor or from the
// trusted channel); `tq_*` reads one for an outgoing transfer. One request at
// a time: valid/ready request, `rsp_valid` pulse (reads and instruction
// fetches) or `wr_done` pulse (writes). Device memory is a valid/ready request
// port with a valid response carrying the line and its stored MAC.
module ten_manager #(
  parameter int unsigned TENSORS = 512,
  parameter int unsigned AES_LAT = 40,
  parameter int unsigned MAC_LAT = 40
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [127:0]           key_enc,
  input  logic [127:0]           key_mac,
  // descriptor write / read
  input  logic                   reg_valid,
  input  logic [$clog2(TENSORS)-1:0] reg_id,
  input  tee_pkg::tensor_meta_t  reg_meta,
  input  tee_pkg::addr_t         reg_dev,
  input  logic [$clog2(TENSORS)-1:0] tq_id,
  output tee_pkg::tensor_meta_t  tq_meta,
  output tee_pkg::addr_t         tq_dev,
  // requests from the NPU core
  input  logic                   req_valid,
  output logic                   req_ready,
  input  tee_pkg::npu_kind_e     req_kind,
  input  logic [$clog2(TENSORS)-1:0] req_id,
  input  tee_pkg::len_t          req_idx,
  input  tee_pkg::addr_t         req_addr,    // instruction fetch address
  input  tee_pkg::line_t         req_wdata,
  output logic                   rsp_valid,
  output tee_pkg::line_t         rsp_data,
  output logic                   rsp_poison,
  output logic                   rsp_err,
  output logic                   wr_done,
  // verification events
  output logic                   ev_rd_start,
  output logic                   ev_verify,
  output logic                   ev_ok,
  output logic [$clog2(TENSORS)-1:0] ev_id,
  // device memory
  output logic                   dm_req_valid,
  input  logic                   dm_req_ready,
  output logic                   dm_req_write,
  output tee_pkg::addr_t         dm_req_addr,
  output tee_pkg::line_t         dm_wdata,
  input  logic                   dm_rsp_valid,
  input  tee_pkg::line_t         dm_rdata,
  input  tee_pkg::mac_t          dm_rmac,
  output tee_pkg::tm_stats_t     stats
);
  import tee_pkg::*;
  localparam int unsigned TW = $clog2(TENSORS);

  typedef struct packed {
    tensor_meta_t meta;
    addr_t        dev;
    mac_t         racc;
    len_t         rcnt;
    mac_t         wacc;
    len_t         wcnt;
  } tstate_t;

  tstate_t tab [TENSORS];

  typedef enum logic [2:0] {S_IDLE, S_MEM, S_MWAIT, S_MEE, S_MWAIT2, S_WMEM, S_DONE} state_e;
  state_e st_q;

  npu_kind_e kind_q;
  logic [TW-1:0] id_q;
  addr_t  caddr_q, daddr_q;
  vn_t    vn_q;
  line_t  data_q;
  mac_t   smac_q;

  // engine
  logic  m_req_valid, m_req_ready, m_rsp_valid;
  line_t m_rsp_data;
  mac_t  m_rsp_mac;
  mee #(.AES_LAT(AES_LAT), .MAC_LAT(MAC_LAT)) u_mee (
    .clk, .rst_n, .key_enc, .key_mac,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req_encrypt(kind_q == NK_WRITE),
    .req_addr(caddr_q), .req_vn(vn_q), .req_data(data_q),
    .rsp_valid(m_rsp_valid), .rsp_ready(1'b1), .rsp_data(m_rsp_data), .rsp_mac(m_rsp_mac)
  );

  assign req_ready    = (st_q == S_IDLE) && !reg_valid;
  assign m_req_valid  = (st_q == S_MEE);
  assign dm_req_valid = (st_q == S_MEM) || (st_q == S_WMEM);
  assign dm_req_write = (st_q == S_WMEM);
  assign dm_req_addr  = daddr_q;
  assign dm_wdata     = data_q;

  assign tq_meta = tab[tq_id].meta;
  assign tq_dev  = tab[tq_id].dev;

  tstate_t cur;
  assign cur = tab[id_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < TENSORS; i++) tab[i] <= '0;
      st_q <= S_IDLE; kind_q <= NK_READ; id_q <= '0; caddr_q <= '0; daddr_q <= '0;
      vn_q <= '0; data_q <= '0; smac_q <= '0;
      rsp_valid <= 1'b0; rsp_data <= '0; rsp_poison <= 1'b0; rsp_err <= 1'b0; wr_done <= 1'b0;
      ev_rd_start <= 1'b0; ev_verify <= 1'b0; ev_ok <= 1'b0; ev_id <= '0;
      stats <= '0;
    end else begin
      rsp_valid <= 1'b0; wr_done <= 1'b0; ev_rd_start <= 1'b0; ev_verify <= 1'b0;
      case (st_q)
        S_IDLE: begin
          if (reg_valid) begin
            tab[reg_id] <= '{meta: reg_meta, dev: reg_dev, racc: '0, rcnt: '0, wacc: '0, wcnt: '0};
          end else if (req_valid) begin
            kind_q <= req_kind; id_q <= req_id; data_q <= req_wdata;
            caddr_q <= (req_kind == NK_INST) ? req_addr
                       : tab[req_id].meta.base + (addr_t'(req_idx) << LINE_SH);
            daddr_q <= (req_kind == NK_INST) ? req_addr
                       : tab[req_id].dev + (addr_t'(req_idx) << LINE_SH);
            case (req_kind)
              NK_INST:  vn_q <= '0;
              NK_WRITE: vn_q <= tab[req_id].meta.vn + 1'b1;
              default:  vn_q <= tab[req_id].meta.vn;
            endcase
            if (req_kind == NK_READ && tab[req_id].rcnt == '0) begin
              ev_rd_start <= 1'b1; ev_id <= req_id;
            end
            st_q <= (req_kind == NK_WRITE) ? S_MEE : S_MEM;
          end
        end
        S_MEM: if (dm_req_ready) st_q <= S_MWAIT;
        S_MWAIT: if (dm_rsp_valid) begin
          data_q <= dm_rdata; smac_q <= dm_rmac; st_q <= S_MEE;
        end
        S_MEE: if (m_req_ready) st_q <= S_MWAIT2;
        S_MWAIT2: if (m_rsp_valid) begin
          case (kind_q)
            NK_READ: begin
              rsp_valid  <= 1'b1;
              rsp_data   <= m_rsp_data;
              rsp_poison <= 1'b1;
              rsp_err    <= 1'b0;
              stats.rd_lines <= stats.rd_lines + 1;
              if (cur.rcnt + 1'b1 == cur.meta.len) begin
                ev_verify <= 1'b1; ev_id <= id_q;
                ev_ok     <= (cur.racc ^ m_rsp_mac) == cur.meta.mac;
                if ((cur.racc ^ m_rsp_mac) == cur.meta.mac) stats.verify_ok <= stats.verify_ok + 1;
                else stats.verify_fail <= stats.verify_fail + 1;
                tab[id_q].racc <= '0;
                tab[id_q].rcnt <= '0;
              end else begin
                tab[id_q].racc <= cur.racc ^ m_rsp_mac;
                tab[id_q].rcnt <= cur.rcnt + 1'b1;
              end
              st_q <= S_IDLE;
            end
            NK_INST: begin
              rsp_valid  <= 1'b1;
              rsp_poison <= 1'b0;
              rsp_err    <= (m_rsp_mac != smac_q);
              rsp_data   <= (m_rsp_mac == smac_q) ? m_rsp_data : '0;
              stats.inst_lines <= stats.inst_lines + 1;
              if (m_rsp_mac != smac_q) stats.inst_fail <= stats.inst_fail + 1;
              st_q <= S_IDLE;
            end
            default: begin  // write: ciphertext goes to device memory
              data_q <= m_rsp_data;
              stats.wr_lines <= stats.wr_lines + 1;
              if (cur.wcnt + 1'b1 == cur.meta.len) begin
                tab[id_q].meta.vn  <= vn_q;
                tab[id_q].meta.mac <= cur.wacc ^ m_rsp_mac;
                tab[id_q].wacc <= '0;
                tab[id_q].wcnt <= '0;
                stats.commit <= stats.commit + 1;
              end else begin
                tab[id_q].wacc <= cur.wacc ^ m_rsp_mac;
                tab[id_q].wcnt <= cur.wcnt + 1'b1;
              end
              st_q <= S_WMEM;
            end
          endcase
        end
        S_WMEM: if (dm_req_ready) begin wr_done <= 1'b1; st_q <= S_IDLE; end
        default: st_q <= S_IDLE;
      endcase
    end
  end

endmodule
