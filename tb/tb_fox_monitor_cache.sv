// tb_fox_monitor_cache -- self-checking test of the Monitor Cache.
// Lines are written and looked up at random among addresses that crowd a few
// sets with more blocks than there are ways, so that lines are evicted. A
// reference model in the test keeps, per set, the resident tags, their data
// and the round-robin victim pointer, and predicts every lk_hit/lk_data.
// It also checks the capacity: 8 distinct blocks of one set all hit, a 9th
// evicts the oldest.
module tb_fox_monitor_cache;
  import fox_pkg::*;
  localparam int SIZE = 65536, WAYS = 8, SETS = SIZE / 64 / WAYS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lk_valid = 0, lk_hit, wr_valid = 0;
  paddr_t lk_addr = '0, wr_addr = '0;
  line_t lk_data, wr_data = '0;

  fox_monitor_cache dut (.*);

  // model
  paddr_t m_blk [SETS][WAYS];
  bit     m_vld [SETS][WAYS];
  line_t  m_dat [SETS][WAYS];
  int     m_rr  [SETS];
  int checks = 0, failures = 0, hits = 0, misses = 0, evictions = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic int find(paddr_t a);
    int s = int'(a[6 +: $clog2(SETS)]);
    for (int w = 0; w < WAYS; w++) if (m_vld[s][w] && m_blk[s][w] == {a[63:6], 6'd0}) return w;
    return -1;
  endfunction

  function automatic void model_write(paddr_t a, line_t d);
    int s = int'(a[6 +: $clog2(SETS)]);
    int w = find(a);
    if (w < 0) begin
      w = m_rr[s];
      if (m_vld[s][w]) evictions++;
      m_rr[s] = (m_rr[s] + 1) % WAYS;
    end
    m_vld[s][w] = 1; m_blk[s][w] = {a[63:6], 6'd0}; m_dat[s][w] = d;
  endfunction

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  function automatic paddr_t rnd_blk();
    // 4 sets, 12 tags each: more blocks than ways
    paddr_t a = '0;
    a[6 +: 7]  = 7'($urandom_range(0,3) * 37);
    a[13 +: 20] = 20'($urandom_range(0,11) * 977);
    a[5:0] = 6'($urandom);
    return a;
  endfunction

  // lookup then compare on the next cycle
  task automatic lookup(paddr_t a);
    int w; int s;
    @(negedge clk); lk_valid = 1; lk_addr = a;
    w = find(a); s = int'(a[6 +: $clog2(SETS)]);
    @(negedge clk); lk_valid = 0;
    check(lk_hit == (w >= 0), "hit/miss");
    if (w >= 0) begin hits++; check(lk_data == m_dat[s][w], "line data"); end
    else misses++;
  endtask

  task automatic write(paddr_t a, line_t d);
    @(negedge clk); wr_valid = 1; wr_addr = a; wr_data = d;
    model_write(a, d);
    @(negedge clk); wr_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < SETS; s++) begin
      m_rr[s] = 0;
      for (int w = 0; w < WAYS; w++) m_vld[s][w] = 0;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    // capacity of one set
    for (int i = 0; i < WAYS; i++) write(paddr_t'(64'h1000_0000 + i * SIZE / WAYS), rnd_line());
    for (int i = 0; i < WAYS; i++) lookup(paddr_t'(64'h1000_0000 + i * SIZE / WAYS));
    write(paddr_t'(64'h1000_0000 + WAYS * SIZE / WAYS), rnd_line());
    lookup(64'h1000_0000);
    check(!lk_hit, "oldest line evicted by the ninth");
    lookup(paddr_t'(64'h1000_0000 + WAYS * SIZE / WAYS));
    check(lk_hit, "ninth line resident");
    // random traffic
    for (int i = 0; i < 4000; i++) begin
      paddr_t a;
      a = rnd_blk();
      if ($urandom_range(0,1)) lookup(a); else write(a, rnd_line());
    end
    // lookup and write in the same cycle to different sets
    @(negedge clk);
    lk_valid = 1; lk_addr = 64'h1000_0000 + 64'(SIZE / WAYS);
    wr_valid = 1; wr_addr = 64'h2000_0040; wr_data = rnd_line();
    model_write(wr_addr, wr_data);
    @(negedge clk); lk_valid = 0; wr_valid = 0;
    check(lk_hit == (find(64'h1000_0000 + 64'(SIZE / WAYS)) >= 0), "simultaneous lookup");
    $display("cache: hits=%0d misses=%0d evictions=%0d", hits, misses, evictions);
    check(hits > 100 && misses > 100 && evictions > 50, "hits, misses and evictions all seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
