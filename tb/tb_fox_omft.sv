// tb_fox_omft -- self-checking test of the Open Monitor File Table.
// Fills all 512 entries with random content through the kernel write port,
// reads them back (data one cycle after rd_en, held while rd_en is low),
// evicts a random subset and checks that evicted entries read as invalid
// while the others keep their content. Reference model: an array in the test.
module tb_fox_omft;
  import fox_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en = 0, inv_en = 0, rd_en = 0;
  meta_t wr_idx = '0, inv_idx = '0, rd_idx = '0;
  omft_entry_t wr_entry = '0, rd_data;
  omft_entry_t model [OMFT_ENTRIES];
  int checks = 0, failures = 0;

  fox_omft dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic omft_entry_t rnd_entry();
    omft_entry_t e;
    e.valid = 1'b1; e.pid = 16'($urandom); e.inode = $urandom;
    e.mflag = 2'($urandom); e.uid = $urandom; e.gid = 31'($urandom);
    return e;
  endfunction

  task automatic read_check(int i);
    @(negedge clk); rd_en = 1; rd_idx = meta_t'(i);
    @(negedge clk); rd_en = 0;
    check(rd_data.valid == model[i].valid, $sformatf("valid %0d", i));
    if (model[i].valid) check(rd_data == model[i], $sformatf("data %0d", i));
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < OMFT_ENTRIES; i++) model[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // after reset every entry is invalid
    for (int i = 0; i < 8; i++) read_check(i * 61);
    // kernel fills the table (entry 0 included, the hardware does not care)
    for (int i = 0; i < OMFT_ENTRIES; i++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = meta_t'(i); wr_entry = rnd_entry(); model[i] = wr_entry;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < OMFT_ENTRIES; i++) read_check(i);
    // output is held while no read is issued
    begin
      omft_entry_t held;
      held = rd_data;
      @(negedge clk); @(negedge clk);
      check(rd_data == held, "held output");
    end
    // process exit: evict a subset
    for (int i = 1; i < OMFT_ENTRIES; i += 3) begin
      @(negedge clk); inv_en = 1; inv_idx = meta_t'(i); model[i].valid = 1'b0;
    end
    @(negedge clk); inv_en = 0;
    for (int i = 0; i < OMFT_ENTRIES; i++) read_check(i);
    // invalidate wins over a simultaneous write to the same index
    @(negedge clk); wr_en = 1; inv_en = 1; wr_idx = 9'd7; inv_idx = 9'd7; wr_entry = rnd_entry();
    model[7] = wr_entry; model[7].valid = 1'b0;
    @(negedge clk); wr_en = 0; inv_en = 0;
    read_check(7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
