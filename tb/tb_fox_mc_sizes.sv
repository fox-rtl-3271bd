// tb_fox_mc_sizes -- the Monitor Cache size study: fox_top built four times,
// with an 8 KB, 32 KB, 64 KB and 256 KB Monitor Cache (8 ways, 64-byte lines,
// so 16, 64, 128 and 512 sets), every other parameter at its default.
// Each copy runs the same stream of 64 requests under full monitoring (every
// read and write is logged) against its own behavioural memory. The test checks
// every log line the copy writes: the address of the line in the circular log,
// the record in the new slot (block address, operation and rising timestamp)
// and the other slot: the previous record, or on a fresh line the memory's
// old contents, which the read-before-write must preserve. It then checks the
// counts: 64 logged requests, 64 line writes, and one log-block read per new
// line (32). A sequential log touches each line twice in a row, so the miss
// count is the same at every cache size; the test prints it per size.
module tb_fox_mc_sizes;
  import fox_pkg::*;
  localparam int NSIZE = 4;
  localparam int unsigned MC_SIZES [NSIZE] = '{8192, 32768, 65536, 262144};
  localparam int N = 64;
  localparam paddr_t LOG_BASE = 64'h0000_0002_CCCC_CCC0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // upper half of a line the memory model has never written (its fill pattern)
  function automatic logic [255:0] fresh_half(paddr_t a);
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = 32'h5A5A_0000 ^ 32'(a[31:0]) ^ i;
    return l[511:256];
  endfunction

  // the request stream, shared by all copies
  paddr_t s_addr [N];
  op_e    s_op   [N];
  bit     stream_ready = 0;

  int  n_mon  [NSIZE];
  int  n_miss [NSIZE];
  int  n_wr   [NSIZE];
  int  n_rd   [NSIZE];
  int  n_idx  [NSIZE];
  bit  done   [NSIZE];

  for (genvar g = 0; g < NSIZE; g++) begin : g_size
    logic req_valid = 0, req_ready;
    paddr_t req_addr = '0;
    op_e req_op = OP_READ;
    logic omft_wr_en = 0, omft_inv_en = 0, ts_load_en = 0;
    meta_t omft_wr_idx = '0, omft_inv_idx = '0;
    omft_entry_t omft_wr_entry = '0;
    ts_t ts_load_val = '0;
    logic cfg_full = 1, cfg_range_en = 0;
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

    fox_top #(.MC_BYTES(MC_SIZES[g])) dut (.*);
    fox_nvm_model #(.READ_LAT(60), .STALL_1_IN(0)) nvm (
      .clk, .rst_n,
      .rd_valid(lrd_valid), .rd_ready(lrd_ready), .rd_addr(lrd_addr),
      .rd_resp_valid(lrd_resp_valid), .rd_resp_data(lrd_resp_data),
      .wb_valid, .wb_ready, .wb_addr, .wb_data);

    // every line write is the next log line holding the next record
    ts_t last_ts = '0;
    always @(negedge clk) begin
      #1;
      if (rst_n && mon_fire) n_mon[g]++;
      if (rst_n && mc_miss_fire) n_miss[g]++;
      if (rst_n && wb_valid && wb_ready) begin
        log_rec_t r, o;
        int i;
        i = n_wr[g];
        n_wr[g]++;
        r = i[0] ? wb_data[511:256] : wb_data[255:0];
        o = i[0] ? wb_data[255:0] : wb_data[511:256];
        check(i < N, "no extra line writes");
        if (i < N) begin
          check(wb_addr == LOG_BASE + 64'(i / 2) * 64, "log line address");
          check(r.blk_addr == s_addr[i] && r.op == s_op[i] && r.pid == 0 && r.inode == 0,
                "record in the new slot");
          check(r.ts > last_ts, "timestamps rise");
          last_ts = r.ts;
          if (i[0]) check(o.blk_addr == s_addr[i-1] && o.op == s_op[i-1], "record kept in the other slot");
          else      check(o == fresh_half(wb_addr), "other slot keeps the memory's old contents");
        end
      end
    end

    initial begin
      wait (stream_ready);
      repeat (3) @(negedge clk);
      for (int i = 0; i < N; i++) begin
        @(negedge clk); req_valid = 1; req_addr = s_addr[i]; req_op = s_op[i];
        #1; while (!req_ready) begin @(negedge clk); #1; end
      end
      @(negedge clk); req_valid = 0;
      wait (n_wr[g] == N);
      repeat (20) @(negedge clk);
      n_rd[g]  = nvm.reads;
      n_idx[g] = int'(log_idx);
      done[g]  = 1;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    for (int g = 0; g < NSIZE; g++) begin
      n_mon[g] = 0; n_miss[g] = 0; n_wr[g] = 0; n_rd[g] = 0; n_idx[g] = 0; done[g] = 0;
    end
    for (int i = 0; i < N; i++) begin
      s_addr[i] = {21'd0, 43'($urandom) << 6};
      s_op[i]   = op_e'($urandom_range(0, 1));
    end
    stream_ready = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    all = 0;
    while (!all) begin
      @(negedge clk);
      all = 1;
      for (int g = 0; g < NSIZE; g++) all &= done[g];
    end
    for (int g = 0; g < NSIZE; g++) begin
      $display("MC %0d KB: logged=%0d line writes=%0d MC misses=%0d log reads=%0d",
               MC_SIZES[g] / 1024, n_mon[g], n_wr[g], n_miss[g], n_rd[g]);
      check(n_mon[g] == N, "every request logged");
      check(n_wr[g] == N, "one line write per record");
      check(n_miss[g] == N / 2, "one Monitor Cache miss per log line");
      check(n_rd[g] == N / 2, "one read-before-write per log line");
      check(n_idx[g] == N, "log index");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
