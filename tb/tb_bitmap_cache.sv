// tb_bitmap_cache: random flips and reads over addresses that alias in the
// 96 sets, compared with a full reference bitmap; the backing DRAM is a
// behavioural associative array with a 5-cycle read latency. Also checks the
// 2-cycle hit timing and that conflicting blocks cause write-back misses.
module tb_bitmap_cache;
  import tee_pkg::*;
  logic clk = 0, rst_n = 1, req_valid = 0, req_ready, req_flip = 0, rsp_valid, rsp_bit;
  addr_t req_va, mem_req_blk; logic mem_req_valid, mem_req_ready = 1, mem_req_write, mem_rsp_valid = 0;
  line_t mem_wdata, mem_rdata; logic [31:0] miss_count;
  int checks = 0, failures = 0;
  line_t dram [addr_t];
  bit    ref_bm [addr_t];
  bitmap_cache dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a real falling edge, so the asynchronous reset acts
  // backing store
  initial begin
    mem_rdata = '0;
    forever begin
      @(posedge clk);
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req_write) dram[mem_req_blk] = mem_wdata;
        else begin
          automatic addr_t b = mem_req_blk;
          repeat (5) @(posedge clk);
          mem_rdata <= dram.exists(b) ? dram[b] : '0; mem_rsp_valid <= 1;
          @(posedge clk); mem_rsp_valid <= 0;
        end
      end
    end
  end
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic access(input addr_t va, input bit flip, output bit b, output int lat);
    @(negedge clk); while (!req_ready) @(negedge clk);
    req_valid = 1; req_va = va; req_flip = flip; @(negedge clk); req_valid = 0; lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    b = rsp_bit;
  endtask
  initial begin
    bit b; int lat; addr_t va, line;
    req_va = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    access(64'h40, 1, b, lat); chk(b == 0, "fresh bit is 0");
    access(64'h40, 0, b, lat); chk(b == 1, "flipped bit reads 1");
    chk(lat == 2, $sformatf("hit latency %0d", lat));
    ref_bm[1] = 1;
    for (int n = 0; n < 400; n++) begin
      // 3 blocks that share set 5 plus random lines
      case ($urandom % 3)
        0: line = 64'(5 + 96 * ($urandom % 3)) * 512 + 64'($urandom % 512);
        default: line = 64'($urandom % (512 * 300));
      endcase
      va = line << 6;
      access(va, ($urandom % 2) == 1, b, lat);
      chk(b == (ref_bm.exists(line) ? ref_bm[line] : 0), $sformatf("bit of line %0d", line));
      if (req_flip) ref_bm[line] = !(ref_bm.exists(line) ? ref_bm[line] : 0);
    end
    chk(miss_count > 3, "conflict misses occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
