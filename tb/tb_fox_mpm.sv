// tb_fox_mpm -- self-checking test of the Metadata Processing Module.
// The OMFT is modelled in the test (array, one-cycle read). Random requests
// with random Metabits, operations and monitor flags are offered while the
// two outputs stall at random. For every accepted request a reference model
// computes the trimmed address, counter address and monitor decision, and the
// test checks every mem_* and pm_* transfer against it, in order. Phases cover
// the selective (Metabits) scheme, address-range scheme, full monitoring and
// the write-only operation mask. A final run with both outputs always ready
// checks the rate of one request per cycle.
module tb_fox_mpm;
  import fox_pkg::*;
  localparam paddr_t CTR_BASE = 64'h0000_0004_0000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, omft_rd_en, mem_valid, mem_ready, pm_valid, pm_ready, mon_fire;
  mem_req_t in_req;
  meta_t omft_rd_idx;
  omft_entry_t omft_rd_data;
  ts_t ts;
  logic cfg_full, cfg_range_en;
  maddr_t cfg_range_lo, cfg_range_hi, mem_addr;
  logic [1:0] cfg_op_mask;
  op_e mem_op;
  paddr_t mem_ctr_addr;
  pre_mon_t pm_data;

  fox_mpm #(.CTR_BASE(CTR_BASE)) dut (.*);

  // OMFT model
  omft_entry_t table_m [OMFT_ENTRIES];
  always_ff @(posedge clk) if (omft_rd_en) omft_rd_data <= table_m[omft_rd_idx];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ts <= 64'd1000; else ts <= ts + 1;

  typedef struct { maddr_t a; op_e op; paddr_t ctr; } exp_mem_t;
  exp_mem_t exp_mem[$];
  pre_mon_t exp_pm[$];
  int checks = 0, failures = 0;
  int n_tag = 0, n_flag_miss = 0, n_range = 0, n_full = 0, n_mask = 0, n_inval = 0;
  int mem_seen = 0, pm_seen = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // Everything is driven and sampled 1 time unit after the falling edge, when
  // all combinational outputs have settled; a transfer seen there happens at
  // the next rising edge.
  task automatic expect_request();
    meta_t m; omft_entry_t s; maddr_t t; bit tag, rng, mon;
    m = in_req.addr[META_LSB +: META_W];
    t = in_req.addr[MEM_ADDR_W-1:0];
    s = (m != 0 && table_m[m].valid) ? table_m[m] : '0;
    tag = (m != 0) && s.valid && s.mflag[in_req.op];
    rng = cfg_range_en && t >= cfg_range_lo && t < cfg_range_hi;
    mon = cfg_op_mask[in_req.op] && (tag || rng || cfg_full);
    exp_mem.push_back('{t, in_req.op, CTR_BASE + 64'({t[42:12], 6'd0})});
    if (mon) exp_pm.push_back('{addr: in_req.addr, op: in_req.op, s: s, ts: ts});
    if (tag && mon) n_tag++;
    if (m != 0 && s.valid && !s.mflag[in_req.op] && !mon) n_flag_miss++;
    if (m != 0 && !table_m[m].valid) n_inval++;
    if (rng && !tag && mon) n_range++;
    if (cfg_full && mon && !tag && !rng) n_full++;
    if ((tag || rng || cfg_full) && !cfg_op_mask[in_req.op]) n_mask++;
  endtask

  task automatic check_outputs();
    if (mem_valid && mem_ready) begin
      exp_mem_t e;
      mem_seen++;
      if (exp_mem.size() == 0) check(0, "unexpected mem");
      else begin
        e = exp_mem.pop_front();
        check(mem_addr == e.a && mem_op == e.op && mem_ctr_addr == e.ctr, "mem request");
      end
    end
    if (pm_valid && pm_ready) begin
      pm_seen++;
      check(mem_seen >= pm_seen, "monitor request not ahead of its memory request");
      if (exp_pm.size() == 0) check(0, "unexpected monitor request");
      else check(pm_data == exp_pm.pop_front(), "monitor request content");
    end
  endtask

  // one clock: drive at the falling edge, settle, check, account
  task automatic cycle(bit new_valid, bit rnd_stall);
    @(negedge clk);
    mem_ready = rnd_stall ? ($urandom_range(0,3) != 0) : 1'b1;
    pm_ready  = rnd_stall ? ($urandom_range(0,2) != 0) : 1'b1;
    if (!(in_valid && pending)) begin
      in_valid    = new_valid;
      in_req.addr = rnd_addr($urandom_range(0,2) != 0);
      in_req.op   = op_e'($urandom_range(0,1));
    end
    #1;
    check_outputs();
    if (in_valid && in_ready) begin expect_request(); pending = 0; accepted++; end
    else pending = in_valid;
  endtask

  bit pending = 0;
  int accepted = 0;

  function automatic paddr_t rnd_addr(bit with_meta);
    paddr_t a = {$urandom, $urandom};
    a[63:52] = '0;
    a[42:32] = 11'($urandom_range(0,1) ? 3 : 2); // 8..16 GB, around the 12 GB line
    a[META_LSB +: META_W] = with_meta ? meta_t'($urandom_range(1, 15)) : '0;
    return a;
  endfunction

  task automatic run_phase(int n, bit rnd_stall);
    for (int i = 0; i < n; i++) cycle($urandom_range(0,3) != 0, rnd_stall);
    while (pending) cycle(0, rnd_stall);
    for (int i = 0; i < 4; i++) cycle(0, 0);
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    for (int i = 0; i < OMFT_ENTRIES; i++) begin
      table_m[i] = '{valid: (i % 7 != 3), pid: 16'(100 + i), inode: 32'(20000 + i),
                     mflag: mflag_t'(i % 4), uid: 32'(1000 + i), gid: 31'(50 + i)};
    end
    in_valid = 0; in_req = '0; mem_ready = 1; pm_ready = 1;
    cfg_full = 0; cfg_range_en = 0; cfg_range_lo = '0; cfg_range_hi = '0; cfg_op_mask = 2'b11;
    repeat (3) @(posedge clk); rst_n = 1;
    // selective scheme (Metabits + monitor flag)
    run_phase(600, 1);
    // address-range scheme: persistent region 12 GB .. 16 GB
    cfg_range_en = 1; cfg_range_lo = 43'h3_0000_0000; cfg_range_hi = 43'h4_0000_0000;
    run_phase(400, 1);
    // full monitoring, then write-only operation mask
    cfg_range_en = 0; cfg_full = 1;
    run_phase(300, 1);
    cfg_op_mask = 2'b10;
    run_phase(300, 1);
    cfg_full = 0; cfg_op_mask = 2'b11;
    // rate: 100 back-to-back requests with outputs always ready
    t0 = accepted;
    for (int i = 0; i < 100; i++) begin
      cycle(1, 0);
      check(in_ready, "one request per cycle");
    end
    check(accepted - t0 == 100, "100 requests accepted in 100 cycles");
    for (int i = 0; i < 4; i++) cycle(0, 0);
    t1 = 0;
    repeat (3) @(posedge clk);
    check(exp_mem.size() == 0 && exp_pm.size() == 0, "all expected transfers seen");
    $display("mpm: tag=%0d flag_mismatch=%0d invalid_entry=%0d range=%0d full=%0d masked=%0d",
             n_tag, n_flag_miss, n_inval, n_range, n_full, n_mask);
    check(n_tag > 0 && n_flag_miss > 0 && n_inval > 0 && n_range > 0 && n_full > 0 && n_mask > 0,
          "every decision path exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
