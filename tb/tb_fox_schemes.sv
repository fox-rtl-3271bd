// tb_fox_schemes -- runs one synthetic two-application access stream through
// fox_top (all parameters at their defaults) under each monitoring scheme of
// the published evaluation and checks the number of monitor writes.
//
// The stream mixes, like the evaluation's mixed benchmarks:
//   P1  a non-persistent application: untagged addresses below 12 GB;
//   P2  a persistent application whose file lies in the monitored directory:
//       Metabits 2, addresses in the persistent region 12..16 GB;
//   P3  a persistent application whose file is not monitored: untagged,
//       addresses in 12..16 GB.
// Schemes (configuration of fox_top):
//   Encryption only  op mask 00
//   Full(R/W)        cfg_full, mask 11       Full(W)     cfg_full, mask 10
//   Persist(R/W)     range 12..16 GB, mask 11 Persist(W) range, mask 10
//   Directory        Metabits only (P2 mapped in the OMFT), mask 11
// For each scheme the design is reset, the stream is replayed, and the monitor
// writes counted at the memory model must equal the count predicted from the
// stream. The test prints total writes normalised to the data writes, the
// metric of the evaluation, for the synthetic stream.
module tb_fox_schemes;
  import fox_pkg::*;
  localparam int N = 400;

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
  maddr_t cfg_range_lo = 43'h3_0000_0000, cfg_range_hi = 43'h4_0000_0000;
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
  fox_nvm_model #(.READ_LAT(60), .STALL_1_IN(4)) nvm (
    .clk, .rst_n,
    .rd_valid(lrd_valid), .rd_ready(lrd_ready), .rd_addr(lrd_addr),
    .rd_resp_valid(lrd_resp_valid), .rd_resp_data(lrd_resp_data),
    .wb_valid, .wb_ready, .wb_addr, .wb_data);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  paddr_t s_addr [N];
  op_e    s_op   [N];
  int     s_proc [N];
  int     mem_n = 0;

  always @(negedge clk) begin
    #1;
    if (rst_n && mem_valid && mem_ready) mem_n++;
  end

  task automatic send(paddr_t a, op_e op);
    @(negedge clk); req_valid = 1; req_addr = a; req_op = op;
    #1; while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk); req_valid = 0;
  endtask

  function automatic int expected(int scheme);
    int n = 0;
    for (int i = 0; i < N; i++) begin
      bit persist = (s_proc[i] != 1);
      bit w = (s_op[i] == OP_WRITE);
      case (scheme)
        0: ;
        1: n++;
        2: n += int'(w);
        3: n += int'(persist);
        4: n += int'(persist && w);
        5: n += int'(s_proc[i] == 2);
        default: ;
      endcase
    end
    return n;
  endfunction

  string names [6] = '{"Encryption", "Full(R/W)", "Full(W)", "Persist(R/W)", "Persist(W)", "Directory"};
  int    got   [6];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // the stream
    for (int i = 0; i < N; i++) begin
      logic [42:0] a;
      int p;
      p = $urandom_range(1, 3);
      a = 43'({$urandom, $urandom}) & 43'h0_FFFF_FFC0;       // below 4 GB, 64 B aligned
      a[33:32] = (p == 1) ? 2'($urandom_range(0, 2)) : 2'd3;    // P1 < 12 GB, P2/P3 >= 12 GB
      s_proc[i] = p;
      s_addr[i] = {12'd0, (p == 2) ? 9'd2 : 9'd0, a};
      s_op[i]   = op_e'(($urandom_range(0, 9) < ((p == 1) ? 3 : 5)) ? 1 : 0);
    end
    for (int sc = 0; sc < 6; sc++) begin
      int w0;
      rst_n = 0;
      repeat (3) @(negedge clk);
      rst_n = 1;
      cfg_full     = (sc == 1 || sc == 2);
      cfg_range_en = (sc == 3 || sc == 4);
      cfg_op_mask  = (sc == 0) ? 2'b00 : (sc == 2 || sc == 4) ? 2'b10 : 2'b11;
      // kernel maps P2's file (monitor-requested directory) for reads and writes
      @(negedge clk);
      omft_wr_en = 1; omft_wr_idx = 9'd2;
      omft_wr_entry = '{valid: 1, pid: 4087, inode: 12, mflag: MF_RW, uid: 3301, gid: 200};
      @(negedge clk); omft_wr_en = 0;
      w0 = nvm.writes; mem_n = 0;
      for (int i = 0; i < N; i++) send(s_addr[i], s_op[i]);
      repeat (20) @(negedge clk);
      wait (dut.u_paq.count == 0 && dut.u_mm.state == 3'd0 && dut.u_wbq.count == 0);
      repeat (5) @(negedge clk);
      got[sc] = nvm.writes - w0;
      check(mem_n == N, $sformatf("%s: every request reached memory", names[sc]));
      check(got[sc] == expected(sc), $sformatf("%s: monitor writes %0d, expected %0d",
                                               names[sc], got[sc], expected(sc)));
      check(int'(log_idx) == got[sc], $sformatf("%s: log index", names[sc]));
    end
    begin
      int dw = 0;
      for (int i = 0; i < N; i++) dw += int'(s_op[i] == OP_WRITE);
      for (int sc = 0; sc < 6; sc++)
        $display("scheme %-13s monitor writes %4d  total writes / data writes = %0.2f",
                 names[sc], got[sc], real'(dw + got[sc]) / real'(dw));
    end
    check(got[1] >= got[2] && got[1] >= got[3] && got[3] >= got[4] && got[3] >= got[5] &&
          got[0] == 0, "scheme ordering");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
