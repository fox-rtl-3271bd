// tb_fox_top -- end-to-end test of the FOX memory-controller extension.
//
// The kernel side fills the Open Monitor File Table with process-file pairs
// (the first rows use the example values of the FOX table description), the
// processor side issues random reads and writes with and without Metabits,
// and a behavioural NVM model serves log-block reads and takes monitor
// writes. A scoreboard predicts, for every request, the trimmed memory request
// and whether and how it is logged; at the end every slot of the circular log
// in the NVM model is compared with the predicted record (timestamps are
// checked to be increasing). The test walks through the mechanisms of the
// design and counts each one, failing if any never happened:
//   selective logging by Metabits and flag, flag mismatch, untagged request,
//   OMFT eviction (process exit), shared file with two Metabits values,
//   address-range scheme, full scheme, operation mask, Monitor Cache hit,
//   Monitor Cache miss with read-before-write, circular-buffer wrap, backup
//   request, and back-pressure reaching the processor.
// Reduced sizes: LOG_ENTRIES = 64, queue depths 4. Everything else default.
module tb_fox_top;
  import fox_pkg::*;
  localparam int     LOG_ENTRIES = 64;
  localparam paddr_t LOG_BASE    = 64'h0000_0002_CCCC_CCC0;
  localparam paddr_t CTR_BASE    = 64'h0000_0004_0000_0000;

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

  fox_top #(.CRQ_DEPTH(4), .PAQ_DEPTH(4), .WBQ_DEPTH(4), .LOG_ENTRIES(LOG_ENTRIES)) dut (.*);

  fox_nvm_model #(.READ_LAT(20), .STALL_1_IN(4)) nvm (
    .clk, .rst_n,
    .rd_valid(lrd_valid), .rd_ready(lrd_ready), .rd_addr(lrd_addr),
    .rd_resp_valid(lrd_resp_valid), .rd_resp_data(lrd_resp_data),
    .wb_valid, .wb_ready, .wb_addr, .wb_data);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // ---------------- scoreboard ----------------
  omft_entry_t k_table [OMFT_ENTRIES];   // kernel's view of the OMFT
  typedef struct { maddr_t a; op_e op; paddr_t ctr; } exp_mem_t;
  exp_mem_t exp_mem[$];
  log_rec_t ref_log [LOG_ENTRIES];
  bit       ref_used [LOG_ENTRIES];
  int       ref_idx = 0, n_records = 0;

  // mechanism counters
  int c_tag = 0, c_flag_mismatch = 0, c_untagged = 0, c_evicted = 0, c_shared = 0;
  int c_range = 0, c_full = 0, c_masked = 0, c_mc_hit = 0, c_mc_miss = 0;
  int c_wrap = 0, c_backup = 0, c_stall = 0;

  function automatic void predict(paddr_t a, op_e op);
    meta_t m; omft_entry_t s; maddr_t t; bit tag, rng, mon;
    m = meta_of(a); t = trim(a);
    s = (m != 0 && k_table[m].valid) ? k_table[m] : '0;
    tag = (m != 0) && s.valid && s.mflag[op];
    rng = cfg_range_en && t >= cfg_range_lo && t < cfg_range_hi;
    mon = cfg_op_mask[op] && (tag || rng || cfg_full);
    exp_mem.push_back('{t, op, CTR_BASE + 64'({t[42:12], 6'd0})});
    if (m == 0) c_untagged++;
    if (m != 0 && !k_table[m].valid) c_evicted++;
    if (m != 0 && s.valid && !s.mflag[op]) c_flag_mismatch++;
    if (tag && mon) c_tag++;
    if (rng && !tag && mon) c_range++;
    if (cfg_full && !tag && !rng && mon) c_full++;
    if ((tag || rng || cfg_full) && !cfg_op_mask[op]) c_masked++;
    if (mon) begin
      ref_log[ref_idx] = '{rsvd: '0, pid: s.pid, inode: s.inode, ts: '0, op: op,
                           gid: s.gid, uid: s.uid, blk_addr: a};
      ref_used[ref_idx] = 1;
      ref_idx = (ref_idx + 1) % LOG_ENTRIES;
      if (ref_idx == 0) c_wrap++;
      n_records++;
    end
  endfunction

  // processor driver, memory back end and observers (falling-edge discipline)
  bit     pend = 0;
  paddr_t q_addr[$];
  op_e    q_op[$];
  int     mem_stall_1_in = 0;

  always @(negedge clk) begin
    mem_ready = (mem_stall_1_in == 0) || ($urandom_range(0, mem_stall_1_in - 1) == 0);
    if (!pend && q_addr.size() > 0) begin
      req_valid = 1; req_addr = q_addr.pop_front(); req_op = q_op.pop_front();
    end else if (!pend) req_valid = 0;
    #1;
    if (rst_n) begin
      if (req_valid && req_ready) begin predict(req_addr, req_op); pend = 0; end
      else pend = req_valid;
      if (req_valid && !req_ready) c_stall++;
      if (mem_valid && mem_ready) begin
        exp_mem_t e;
        if (exp_mem.size() == 0) check(0, "unexpected memory request");
        else begin
          e = exp_mem.pop_front();
          check(mem_addr == e.a && mem_op == e.op && mem_ctr_addr == e.ctr, "memory request");
        end
      end
      if (mc_miss_fire) c_mc_miss++;
      if (backup_req && !backup_ack) begin c_backup++; backup_ack = 1; end
      else backup_ack = 0;
    end
  end
  always @(posedge clk) if (rst_n && dut.u_mm.state == 3'd1 && dut.u_mm.mc_lk_hit) c_mc_hit++;

  task automatic issue(paddr_t a, op_e op);
    q_addr.push_back(a); q_op.push_back(op);
  endtask

  task automatic drain();
    wait (q_addr.size() == 0 && !pend);
    repeat (4) @(negedge clk);
    wait (exp_mem.size() == 0 && dut.u_paq.count == 0 && dut.u_mm.state == 3'd0 &&
          dut.u_wbq.count == 0);
    repeat (4) @(negedge clk);
  endtask

  task automatic kernel_map(meta_t idx, omft_entry_t e);
    @(negedge clk); omft_wr_en = 1; omft_wr_idx = idx; omft_wr_entry = e; k_table[idx] = e;
    @(negedge clk); omft_wr_en = 0;
  endtask

  task automatic kernel_evict(meta_t idx);
    @(negedge clk); omft_inv_en = 1; omft_inv_idx = idx; k_table[idx].valid = 0;
    @(negedge clk); omft_inv_en = 0;
  endtask

  function automatic paddr_t addr(meta_t m, logic [42:0] a);
    return {12'd0, m, a};
  endfunction

  meta_t tags [6] = '{9'd0, 9'd1, 9'd2, 9'd3, 9'd511, 9'd5};
  task automatic random_traffic(int n, bit persist_only);
    for (int i = 0; i < n; i++) begin
      logic [42:0] a;
      a = {8'd0, 35'({$urandom, $urandom})};
      a[34:32] = persist_only ? 3'd3 : 3'($urandom_range(1, 3));   // 4..16 GB
      a[5:0] = 6'($urandom);
      issue(addr(tags[$urandom_range(0, 5)], a), op_e'($urandom_range(0, 1)));
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < OMFT_ENTRIES; i++) k_table[i] = '0;
    for (int i = 0; i < LOG_ENTRIES; i++) ref_used[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // Initialization phase: kernel copies process-file pairs into the OMFT
    kernel_map(9'd1,   '{valid: 1, pid: 16639, inode: 20002, mflag: MF_READ,  uid: 101,   gid: 100});
    kernel_map(9'd2,   '{valid: 1, pid: 4087,  inode: 12,    mflag: MF_RW,    uid: 3301,  gid: 200});
    kernel_map(9'd3,   '{valid: 1, pid: 4667,  inode: 10008, mflag: MF_WRITE, uid: 202,   gid: 300});
    kernel_map(9'd511, '{valid: 1, pid: 11008, inode: 2008,  mflag: MF_WRITE, uid: 10000, gid: 400});

    // shared file: the same block written by two processes (Metabits 2 and 3)
    issue(addr(9'd2, 43'h3_1234_5640), OP_WRITE);
    issue(addr(9'd3, 43'h3_1234_5640), OP_WRITE);
    drain();
    begin
      line_t l;
      log_rec_t r0, r1;
      l = nvm.peek({LOG_BASE[63:6], 6'd0});
      {r1, r0} = l;
      check(r0.pid == 4087 && r1.pid == 4667 && trim(r0.blk_addr) == trim(r1.blk_addr) &&
            r0.blk_addr != r1.blk_addr, "shared block logged once per process");
      if (r0.pid == 4087 && r1.pid == 4667) c_shared++;
    end
    // selective scheme with random traffic, memory back end sometimes slow
    mem_stall_1_in = 3;
    random_traffic(150, 0);
    drain();
    mem_stall_1_in = 0;
    // process 16639 exits: kernel evicts its entry, its accesses stop being logged
    kernel_evict(9'd1);
    for (int i = 0; i < 10; i++) issue(addr(9'd1, 43'(64 * i) + 43'h3_0000_0000), OP_READ);
    random_traffic(40, 0);
    drain();
    // address-selective scheme: persistent region 12 GB .. 16 GB
    cfg_range_en = 1; cfg_range_lo = 43'h3_0000_0000; cfg_range_hi = 43'h4_0000_0000;
    random_traffic(60, 0);
    drain();
    // full monitoring, then write-only
    cfg_range_en = 0; cfg_full = 1;
    random_traffic(40, 0);
    drain();
    cfg_op_mask = 2'b10;
    random_traffic(40, 0);
    drain();
    cfg_full = 0; cfg_op_mask = 2'b11;

    // every request reached memory in order, every record is in the log
    check(exp_mem.size() == 0, "all memory requests seen");
    check(nvm.writes == n_records, "one monitor write per record");
    check(log_idx == 32'(ref_idx), "log index");
    begin
      ts_t last_ts;
      int first, i;
      paddr_t la, blk; line_t l; log_rec_t r, e;
      last_ts = '0;
      first = (n_records >= LOG_ENTRIES) ? ref_idx : 0;
      for (int k = 0; k < LOG_ENTRIES; k++) begin
        i = (first + k) % LOG_ENTRIES;
        if (!ref_used[i]) continue;
        la  = LOG_BASE + 64'(i) * 32;
        blk = {la[63:6], 6'd0};
        l   = nvm.peek(blk);
        r   = la[5] ? l[511:256] : l[255:0];
        e   = ref_log[i];
        e.ts = r.ts;
        check(r == e, $sformatf("log record %0d", i));
        if (r != e) $display("  got %h\n  exp %h", r, e);
        check(r.ts > last_ts, $sformatf("timestamp order %0d", i));
        last_ts = r.ts;
      end
    end
    // the shared block was logged under two processes if still in the log
    $display("top: records=%0d tag=%0d flag_mismatch=%0d untagged=%0d evicted=%0d range=%0d full=%0d masked=%0d",
             n_records, c_tag, c_flag_mismatch, c_untagged, c_evicted, c_range, c_full, c_masked);
    $display("top: mc_hit=%0d mc_miss=%0d nvm_reads=%0d wrap=%0d backup=%0d stall=%0d shared=%0d",
             c_mc_hit, c_mc_miss, nvm.reads, c_wrap, c_backup, c_stall, c_shared);
    check(c_tag > 0,           "mechanism: selective logging by Metabits");
    check(c_flag_mismatch > 0, "mechanism: monitor flag filters the operation");
    check(c_untagged > 0,      "mechanism: untagged request passes unlogged");
    check(c_evicted > 0,       "mechanism: evicted OMFT entry");
    check(c_shared > 0,        "mechanism: shared file under two Metabits values");
    check(c_range > 0,         "mechanism: address-range scheme");
    check(c_full > 0,          "mechanism: full scheme");
    check(c_masked > 0,        "mechanism: operation mask");
    check(c_mc_hit > 0,        "mechanism: Monitor Cache hit");
    check(c_mc_miss > 0 && nvm.reads == c_mc_miss, "mechanism: read-before-write on a miss");
    check(c_wrap > 0,          "mechanism: circular buffer wrap");
    check(c_backup > 0,        "mechanism: backup request");
    check(c_stall > 0,         "mechanism: back-pressure to the processor");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
