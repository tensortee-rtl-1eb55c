// bitmap_cache: on-chip cache of the per-cacheline update bitmap.
//
// The write dataflow keeps one bit per 64-byte cacheline; the bit flips every
// time the line is written back. The full bitmap lives in protected DRAM and
// a small on-chip cache (6 KB in the source configuration) serves the
// TenAnalyzer. Here the cache is direct-mapped with 512-bit lines, so one
// cache line holds the bits of 512 consecutive data lines (32 KB of data);
// with 6 KB there are 96 sets, set = block mod 96, and the whole block
// number is kept as tag. Write-back, write-allocate; reset clears all lines
// (the DRAM copy is assumed to start as zeros).
//
// Request: valid/ready {flip, va}. The response gives the bit as it was
// before the request (`rsp_bit`), one clock after acceptance on a hit; a
// miss first writes back a dirty victim and fetches the block through the
// memory port (valid/ready request, valid response).
module bitmap_cache #(
  parameter int unsigned BYTES = 6144
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  output logic            req_ready,
  input  logic            req_flip,
  input  tee_pkg::addr_t  req_va,
  output logic            rsp_valid,
  output logic            rsp_bit,
  // bitmap backing store in DRAM, addressed by block number
  output logic            mem_req_valid,
  input  logic            mem_req_ready,
  output logic            mem_req_write,
  output tee_pkg::addr_t  mem_req_blk,
  output tee_pkg::line_t  mem_wdata,
  input  logic            mem_rsp_valid,
  input  tee_pkg::line_t  mem_rdata,
  output logic [31:0]     miss_count
);
  import tee_pkg::*;
  localparam int unsigned SETS = BYTES / (LINE_W / 8);
  localparam int unsigned SW   = $clog2(SETS);

  line_t  data [SETS];
  addr_t  tag  [SETS];
  logic [SETS-1:0] vld, dirty;

  typedef enum logic [2:0] {S_IDLE, S_LOOK, S_WB, S_FILL, S_WAIT} state_e;
  state_e st_q;
  logic   flip_q;
  addr_t  va_q;

  addr_t  blk;
  logic [SW-1:0] set;
  logic [8:0]    bitpos;
  assign blk    = va_q >> (LINE_SH + 9);
  assign set    = SW'(blk % addr_t'(SETS));
  assign bitpos = va_q[LINE_SH +: 9];
  logic hit;
  assign hit = vld[set] && tag[set] == blk;

  assign req_ready = (st_q == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; flip_q <= 1'b0; va_q <= '0;
      vld <= '0; dirty <= '0;
      for (int s = 0; s < SETS; s++) begin data[s] <= '0; tag[s] <= '0; end
      rsp_valid <= 1'b0; rsp_bit <= 1'b0;
      mem_req_valid <= 1'b0; mem_req_write <= 1'b0; mem_req_blk <= '0; mem_wdata <= '0;
      miss_count <= '0;
    end else begin
      rsp_valid <= 1'b0;
      case (st_q)
        S_IDLE: if (req_valid) begin
          flip_q <= req_flip; va_q <= req_va; st_q <= S_LOOK;
        end
        S_LOOK: if (hit) begin
          rsp_valid <= 1'b1;
          rsp_bit   <= data[set][bitpos];
          if (flip_q) begin
            data[set][bitpos] <= ~data[set][bitpos];
            dirty[set] <= 1'b1;
          end
          st_q <= S_IDLE;
        end else begin
          miss_count <= miss_count + 1;
          if (vld[set] && dirty[set]) begin
            mem_req_valid <= 1'b1; mem_req_write <= 1'b1;
            mem_req_blk <= tag[set]; mem_wdata <= data[set];
            st_q <= S_WB;
          end else begin
            mem_req_valid <= 1'b1; mem_req_write <= 1'b0; mem_req_blk <= blk;
            st_q <= S_FILL;
          end
        end
        S_WB: if (mem_req_ready) begin
          mem_req_write <= 1'b0; mem_req_blk <= blk;
          dirty[set] <= 1'b0;
          st_q <= S_FILL;
        end
        S_FILL: if (mem_req_ready) begin
          mem_req_valid <= 1'b0;
          st_q <= S_WAIT;
        end
        S_WAIT: if (mem_rsp_valid) begin
          data[set] <= mem_rdata; tag[set] <= blk; vld[set] <= 1'b1; dirty[set] <= 1'b0;
          st_q <= S_LOOK;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

endmodule
