// tb_fox_mm -- self-checking test of the Monitor Module.
// The module is connected to the Monitor Cache and to a memory model in the
// test that answers log-block reads after a random delay. Memory starts with a
// known pattern, so the test can tell whether read-before-write kept the other
// half of each block. For every record the test predicts the written block
// (old contents merged with the 32-byte record at LOG_BASE + 32 * index) and
// checks address and data of each write, the index wrap-around of the
// circular buffer (LOG_ENTRIES = 40 here), that a block is read from memory
// only when it is not cached, the 3-cycle cost of a cached record, and the
// backup request at half the buffer and its acknowledge.
module tb_fox_mm;
  import fox_pkg::*;
  localparam paddr_t LOG_BASE = 64'h0000_0000_0010_0000;
  localparam int LOG_ENTRIES = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pm_valid = 0, pm_ready, mc_lk_valid, mc_lk_hit, mc_wr_valid;
  pre_mon_t pm_data = '0;
  paddr_t mc_lk_addr, mc_wr_addr, rd_addr, wb_addr;
  line_t mc_lk_data, mc_wr_data, rd_resp_data, wb_data;
  logic rd_valid, rd_ready, rd_resp_valid, wb_valid, wb_ready, backup_req, backup_ack = 0, mc_miss_fire;
  logic [31:0] log_idx;

  fox_mm #(.LOG_BASE(LOG_BASE), .LOG_ENTRIES(LOG_ENTRIES)) dut (.*);
  fox_monitor_cache u_mc (.clk, .rst_n,
    .lk_valid(mc_lk_valid), .lk_addr(mc_lk_addr), .lk_hit(mc_lk_hit), .lk_data(mc_lk_data),
    .wr_valid(mc_wr_valid), .wr_addr(mc_wr_addr), .wr_data(mc_wr_data));

  int checks = 0, failures = 0, reads = 0, writes = 0, wraps = 0, backups = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // memory model
  line_t mem [paddr_t];
  function automatic line_t mem_rd(paddr_t a);
    if (!mem.exists(a)) begin
      line_t l;
      for (int i = 0; i < 16; i++) l[i*32 +: 32] = 32'hA5A5_0000 ^ 32'(a[31:0]) ^ i;
      return l;
    end
    return mem[a];
  endfunction

  // All test-side ports are driven at the falling edge and sampled 1 unit
  // later, when the design's outputs have settled; a handshake seen there
  // completes at the next rising edge.
  // Read port: accept, answer after 3..12 cycles.
  logic   busy = 0;
  paddr_t rq;
  int     wait_n = 0;
  assign rd_ready = !busy;
  initial begin rd_resp_valid = 0; rd_resp_data = '0; end
  always @(negedge clk) begin
    rd_resp_valid = 0;
    if (busy) begin
      if (wait_n == 0) begin
        rd_resp_valid = 1; rd_resp_data = mem_rd(rq); busy = 0;
      end else wait_n--;
    end
    #1;
    if (!busy && !rd_resp_valid && rd_valid && rd_ready) begin
      // transfer at the next rising edge, answer later
      rq = rd_addr; reads++;
      @(posedge clk); #1 busy = 1; wait_n = $urandom_range(3, 12);
    end
  end

  // write port with random back-pressure, checked against the prediction
  line_t  exp_data[$];
  paddr_t exp_addr[$];
  always @(negedge clk) begin
    wb_ready = ($urandom_range(0, 3) != 0);
    #1;
    if (rst_n && wb_valid && wb_ready) begin
      writes++;
      if (exp_addr.size() == 0) check(0, "unexpected write");
      else begin
        check(wb_addr == exp_addr.pop_front(), "log block address");
        check(wb_data == exp_data.pop_front(), "log block data");
      end
      mem[wb_addr] = wb_data;
    end
  end

  // reference: the log as the test sees it
  line_t ref_mem [paddr_t];
  int    ref_idx = 0;

  task automatic send(pre_mon_t p);
    paddr_t la, blk; line_t l; log_rec_t r;
    la  = LOG_BASE + 64'(ref_idx) * 32;
    blk = {la[63:6], 6'd0};
    l   = ref_mem.exists(blk) ? ref_mem[blk] : mem_rd(blk);
    r   = '{rsvd: '0, pid: p.s.pid, inode: p.s.inode, ts: p.ts, op: p.op,
            gid: p.s.gid, uid: p.s.uid, blk_addr: p.addr};
    if (la[5]) l[511:256] = r; else l[255:0] = r;
    ref_mem[blk] = l;
    exp_addr.push_back(blk); exp_data.push_back(l);
    ref_idx = (ref_idx + 1) % LOG_ENTRIES;
    if (ref_idx == 0) wraps++;
    @(negedge clk); pm_valid = 1; pm_data = p;
    #1;
    while (!pm_ready) begin @(negedge clk); #1; end
    @(negedge clk); pm_valid = 0;
  endtask

  function automatic pre_mon_t rnd_pm();
    pre_mon_t p;
    p.addr = {$urandom, $urandom}; p.op = op_e'($urandom_range(0,1));
    p.s = '{valid: 1'b1, pid: 16'($urandom), inode: $urandom, mflag: 2'b11,
            uid: $urandom, gid: 31'($urandom)};
    p.ts = {$urandom, $urandom};
    return p;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (backup_req && !backup_ack) begin
    backups++;
    check(writes >= LOG_ENTRIES / 2, "backup not before half the buffer");
    repeat (2) @(negedge clk);
    backup_ack = 1; @(negedge clk); backup_ack = 0;
  end

  initial begin
    int t0;
    repeat (2) @(negedge clk); rst_n = 1;
    // one pass and a half over the circular buffer
    for (int i = 0; i < LOG_ENTRIES * 3 / 2; i++) begin
      send(rnd_pm());
      if ($urandom_range(0,3) == 0) repeat ($urandom_range(1,5)) @(negedge clk);
    end
    wait (exp_addr.size() == 0);
    repeat (5) @(negedge clk);
    check(writes == LOG_ENTRIES * 3 / 2, "one write per record");
    check(reads == LOG_ENTRIES / 2, "memory read only for blocks not yet cached");
    check(log_idx == 32'(ref_idx), "circular index");
    check(wraps == 1, "index wrapped");
    check(backups >= 2, "backup requested at each half buffer");
    // cost of a cached record with writes always accepted
    begin
      pre_mon_t p;
      p = rnd_pm();
      wait (!busy && pm_ready);
      force wb_ready = 1'b1;
      t0 = int'($time / 10);
      send(p);
      wait (exp_addr.size() == 0);
      check(int'($time / 10) - t0 <= 5, "cached record completes within a few cycles");
      release wb_ready;
      @(negedge clk);
      check(pm_ready, "idle again");
    end
    $display("mm: writes=%0d reads=%0d wraps=%0d backups=%0d", writes, reads, wraps, backups);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
