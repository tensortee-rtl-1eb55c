// tb_direct_channel: copies a 6-line tensor between two behavioural
// memories (source with 3-cycle read latency, destination with occasional
// back-pressure) and checks every destination line is the unchanged source
// line, that nothing outside the range is written, the done pulse and the
// line count; a zero-length command completes at once.
module tb_direct_channel;
  import tee_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 1, cmd_valid = 0, cmd_ready, rd_req_valid, rd_req_ready = 1, rd_rsp_valid = 0;
  logic wr_req_valid, wr_req_ready, done; logic [31:0] lines_moved;
  addr_t cmd_src, cmd_dst, rd_req_addr, wr_req_addr; len_t cmd_lines; line_t rd_rsp_data, wr_req_data;
  int checks = 0, failures = 0, n_done = 0;
  line_t src [addr_t]; line_t dst [addr_t];
  direct_channel dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  always @(posedge clk) begin
    wr_req_ready <= ($urandom % 3) != 0;
    if (wr_req_valid && wr_req_ready) dst[wr_req_addr] = wr_req_data;
    if (done) n_done++;
  end
  initial forever begin
    @(posedge clk);
    if (rd_req_valid) begin
      automatic addr_t a = rd_req_addr;
      repeat (3) @(posedge clk);
      rd_rsp_data <= src[a]; rd_rsp_valid <= 1; @(posedge clk); rd_rsp_valid <= 0;
    end
  end
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    cmd_src = 0; cmd_dst = 0; cmd_lines = 0; rd_rsp_data = 0; wr_req_ready = 0;
    for (int i = 0; i < 8; i++) src[64'h1000 + 64'(i) * 64] = rand_line();
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); cmd_valid = 1; cmd_src = 64'h1040; cmd_dst = 64'h9000; cmd_lines = 6;
    @(negedge clk); cmd_valid = 0;
    while (n_done == 0) @(negedge clk);
    for (int i = 0; i < 6; i++)
      chk(dst.exists(64'h9000 + 64'(i) * 64) && dst[64'h9000 + 64'(i) * 64] == src[64'h1040 + 64'(i) * 64],
          $sformatf("line %0d copied", i));
    chk(dst.num() == 6 && lines_moved == 6, "exactly six lines");
    @(negedge clk); cmd_valid = 1; cmd_lines = 0; @(negedge clk); cmd_valid = 0; @(negedge clk);
    chk(n_done == 2 && lines_moved == 6, "empty command");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
