// tb_fox_fifo -- self-checking test of the FOX queue.
// Random pushes and pops against a SystemVerilog queue as reference model;
// checks data order, occupancy, the full condition (push refused at DEPTH)
// and the empty condition. A watchdog ends the run after 20000 cycles.
module tb_fox_fifo;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push_valid, push_ready, pop_valid, pop_ready;
  logic [15:0] push_data, pop_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  int full_seen = 0;
  logic [15:0] ref_q[$];

  fox_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_valid = 0; pop_ready = 0; push_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // phase bias: fill, then drain, then mixed
      push_valid = (i < 1000) ? ($urandom_range(0,3) != 0) :
                   (i < 2000) ? ($urandom_range(0,3) == 0) : $urandom_range(0,1);
      pop_ready  = (i < 1000) ? ($urandom_range(0,3) == 0) :
                   (i < 2000) ? ($urandom_range(0,3) != 0) : $urandom_range(0,1);
      push_data  = 16'($urandom);
      check(count == ref_q.size(), "count");
      check(push_ready == (ref_q.size() < DEPTH), "push_ready");
      check(pop_valid == (ref_q.size() > 0), "pop_valid");
      if (pop_valid) check(pop_data == ref_q[0], "pop_data order");
      if (!push_ready) full_seen++;
      @(posedge clk);
      if (pop_valid && pop_ready) void'(ref_q.pop_front());
      if (push_valid && push_ready) ref_q.push_back(push_data);
    end
    check(full_seen > 0, "queue reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
