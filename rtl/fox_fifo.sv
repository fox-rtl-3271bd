// fox_fifo -- synchronous first-in first-out queue used for the three queues
// of FOX: the Counter Request Queue in front of the Metadata Processing
// Module, the Pre-monitoring Queue (PAQ) in front of the Monitor Module and
// the Write Buffer Queue that carries monitor writes to memory.
//
// It is a circular array with read and write pointers. Both sides use a
// valid/ready handshake: an item moves when valid and ready are high at a
// rising clock edge. pop_data is the head item, valid while pop_valid is high
// (fall-through of the array read, no extra latency). A push into a full
// queue is refused (push_ready low). Depth and handshake are this design's
// choices; the description names the queues but gives neither.
module fox_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push_valid,
  output logic push_ready,
  input  T     push_data,
  output logic pop_valid,
  input  logic pop_ready,
  output T     pop_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                 mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic [$clog2(DEPTH+1)-1:0] n;

  wire do_push = push_valid && push_ready;
  wire do_pop  = pop_valid && pop_ready;

  assign push_ready = (n != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign pop_valid  = (n != '0);
  assign pop_data   = mem[rp];
  assign count      = n;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
      n  <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      case ({do_push, do_pop})
        2'b10:   n <= n + 1'b1;
        2'b01:   n <= n - 1'b1;
        default: n <= n;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= push_data;
  end

endmodule
