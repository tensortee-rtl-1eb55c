// direct_channel: the direct tensor channel, a copy engine that moves a
// tensor's ciphertext lines from one enclave's memory to the other's.
//
// Because both enclaves encrypt tensors with the same key, the same counter
// (tensor address, tensor VN) and the same XOR tensor MAC, the receiving
// engine can decrypt and verify the lines exactly as they were written: the
// copy needs no decryption, re-encryption or bounce through non-secure
// memory, and involves neither processor. The metadata travels separately on
// the trusted channel.
//
// A command {src, dst, lines} copies `lines` consecutive 64-byte lines. Reads
// are issued on the source port (valid/ready request, valid response) and
// each returned line is written on the destination port (valid/ready), up
// to one read in flight. `done` pulses after the last write is accepted.
module direct_channel (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  tee_pkg::addr_t  cmd_src,
  input  tee_pkg::addr_t  cmd_dst,
  input  tee_pkg::len_t   cmd_lines,
  output logic            rd_req_valid,
  input  logic            rd_req_ready,
  output tee_pkg::addr_t  rd_req_addr,
  input  logic            rd_rsp_valid,
  input  tee_pkg::line_t  rd_rsp_data,
  output logic            wr_req_valid,
  input  logic            wr_req_ready,
  output tee_pkg::addr_t  wr_req_addr,
  output tee_pkg::line_t  wr_req_data,
  output logic            done,
  output logic [31:0]     lines_moved
);
  import tee_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_RD, S_WAIT, S_WR} state_e;
  state_e st_q;
  addr_t  src_q, dst_q;
  len_t   left_q;

  assign cmd_ready    = (st_q == S_IDLE);
  assign rd_req_valid = (st_q == S_RD);
  assign rd_req_addr  = src_q;
  assign wr_req_valid = (st_q == S_WR);
  assign wr_req_addr  = dst_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; src_q <= '0; dst_q <= '0; left_q <= '0;
      wr_req_data <= '0; done <= 1'b0; lines_moved <= '0;
    end else begin
      done <= 1'b0;
      case (st_q)
        S_IDLE: if (cmd_valid) begin
          src_q <= cmd_src; dst_q <= cmd_dst; left_q <= cmd_lines;
          if (cmd_lines == '0) done <= 1'b1;
          else st_q <= S_RD;
        end
        S_RD:   if (rd_req_ready) st_q <= S_WAIT;
        S_WAIT: if (rd_rsp_valid) begin wr_req_data <= rd_rsp_data; st_q <= S_WR; end
        S_WR:   if (wr_req_ready) begin
          lines_moved <= lines_moved + 1;
          src_q  <= src_q + addr_t'(LINE_B);
          dst_q  <= dst_q + addr_t'(LINE_B);
          left_q <= left_q - 1'b1;
          if (left_q == len_t'(1)) begin done <= 1'b1; st_q <= S_IDLE; end
          else st_q <= S_RD;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

endmodule
