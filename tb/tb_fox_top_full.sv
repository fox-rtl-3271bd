// tb_fox_top_full -- one complete monitored access through fox_top with every
// parameter at its default (512-entry OMFT, 64 KB 8-way Monitor Cache, a log
// of 26,843,545 records just below 12 GB, 16-entry queues).
// The kernel maps one process-file pair; the process reads and writes a block
// of the file through its Metabits. The test checks the trimmed memory
// requests, that only the write is logged (write-only flag), the record's
// fields in the NVM model, one read-before-write of the first log block, and
// that the log index advanced by one.
module tb_fox_top_full;
  import fox_pkg::*;
  localparam paddr_t LOG_BASE = 64'h0000_0002_CCCC_CCC0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready;
  paddr_t req_addr = '0;
  op_e req_op = OP_READ;
  logic omft_wr_en = 0, omft_inv_en = 0, ts_load_en = 0;
  meta_t omft_wr_idx = '0, omft_inv_idx = '0;
  omft_entry_t omft_wr_entry = '0;
  ts_t ts_load_val = '0;
  logic cfg_full = 0, cfg_range_en = 0;
  maddr_t cfg_range_lo = '0, cfg_range_hi = '0;
  logic [1:0] cfg_op_mask = 2'b11;
  logic mem_valid, mem_ready = 1;
  maddr_t mem_addr;
  op_e mem_op;
  paddr_t mem_ctr_addr;
  logic lrd_valid, lrd_ready, lrd_resp_valid;
  paddr_t lrd_addr;
  line_t lrd_resp_data;
  logic wb_valid, wb_ready;
  paddr_t wb_addr;
  line_t wb_data;
  logic backup_req, backup_ack = 0;
  logic [31:0] log_idx;
  logic mon_fire, mc_miss_fire;

  fox_top dut (.*);
  fox_nvm_model #(.READ_LAT(60), .STALL_1_IN(0)) nvm (
    .clk, .rst_n,
    .rd_valid(lrd_valid), .rd_ready(lrd_ready), .rd_addr(lrd_addr),
    .rd_resp_valid(lrd_resp_valid), .rd_resp_data(lrd_resp_data),
    .wb_valid, .wb_ready, .wb_addr, .wb_data);

  int checks = 0, failures = 0, mem_n = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  always @(negedge clk) begin
    #1;
    if (rst_n && mem_valid && mem_ready) begin
      mem_n++;
      check(mem_addr == 43'h3_0040_1080 && mem_ctr_addr == 64'h4_0000_0000 + 64'(32'h300401) * 64,
            "trimmed address and counter address");
      check(mem_op == ((mem_n == 1) ? OP_READ : OP_WRITE), "operation order");
    end
  end

  task automatic send(paddr_t a, op_e op);
    @(negedge clk); req_valid = 1; req_addr = a; req_op = op;
    #1; while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk); req_valid = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t l; log_rec_t r;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    omft_wr_en = 1; omft_wr_idx = 9'd300;
    omft_wr_entry = '{valid: 1, pid: 4667, inode: 10008, mflag: MF_WRITE, uid: 202, gid: 300};
    @(negedge clk); omft_wr_en = 0;
    send({12'd0, 9'd300, 43'h3_0040_1080}, OP_READ);
    send({12'd0, 9'd300, 43'h3_0040_1080}, OP_WRITE);
    wait (nvm.writes == 1);
    repeat (10) @(negedge clk);
    check(mem_n == 2, "both requests reached memory");
    check(nvm.writes == 1 && nvm.reads == 1, "one read-before-write and one monitor write");
    check(log_idx == 1, "log index advanced");
    l = nvm.peek({LOG_BASE[63:6], 6'd0});
    r = LOG_BASE[5] ? l[511:256] : l[255:0];
    check(r.blk_addr == {12'd0, 9'd300, 43'h3_0040_1080} && r.op == OP_WRITE && r.pid == 4667 &&
          r.inode == 10008 && r.uid == 202 && r.gid == 300 && r.ts != 0, "log record");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
