// fox_monitor_cache -- Monitor Cache (MC) of the FOX Monitor Module.
//
// Monitor records (32 bytes) are smaller than a 64-byte memory block, so every
// record needs a read-modify-write of its log block. This small cache keeps
// recently used log blocks in plaintext so that the memory read can be skipped
// when the block is still on chip; consecutive records of the circular log
// share a block, so most lookups hit.
//
// Organisation: SIZE_BYTES / LINE_BYTES lines, WAYS-way set associative,
// indexed by the block address bits above the line offset (64 KB, 8 ways,
// 64-byte lines = 128 sets by default, as in the evaluated configuration).
// Interface:
//   lk_valid/lk_addr  lookup; lk_hit and lk_data are valid the next cycle and
//                     held until the next lookup.
//   wr_valid/wr_addr/wr_data  write a whole line; updates the hitting way, or
//                     allocates the round-robin victim of the set on a miss.
// The cache is write-through: the Monitor Module sends every updated line to
// memory itself, so lines are never dirty and eviction needs no write-back.
// Round-robin replacement and write-through are this design's choices; the
// description gives only the size, associativity and block size.
module fox_monitor_cache
  import fox_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 65536,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned LINE_BYTES = 64
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   lk_valid,
  input  paddr_t lk_addr,
  output logic   lk_hit,
  output line_t  lk_data,
  input  logic   wr_valid,
  input  paddr_t wr_addr,
  input  line_t  wr_data
);
  localparam int unsigned LINES = SIZE_BYTES / LINE_BYTES;
  localparam int unsigned SETS  = LINES / WAYS;
  localparam int unsigned OFF_W = $clog2(LINE_BYTES);
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = PADDR_W - OFF_W - SET_W;

  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [SET_W-1:0] set_t;
  typedef logic [WAY_W-1:0] way_t;

  tag_t  tags  [SETS][WAYS];
  logic  vld   [SETS][WAYS];
  way_t  rr    [SETS];
  line_t data  [LINES];

  function automatic set_t set_of(paddr_t a);
    return a[OFF_W +: SET_W];
  endfunction
  function automatic tag_t tag_of(paddr_t a);
    return a[PADDR_W-1 -: TAG_W];
  endfunction

  // Tag match for lookup and for write.
  logic lk_m, wr_m;
  way_t lk_w, wr_w;
  always_comb begin
    lk_m = 1'b0; lk_w = '0;
    wr_m = 1'b0; wr_w = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (vld[set_of(lk_addr)][w] && tags[set_of(lk_addr)][w] == tag_of(lk_addr)) begin
        lk_m = 1'b1; lk_w = way_t'(w);
      end
      if (vld[set_of(wr_addr)][w] && tags[set_of(wr_addr)][w] == tag_of(wr_addr)) begin
        wr_m = 1'b1; wr_w = way_t'(w);
      end
    end
  end

  way_t wr_way;
  assign wr_way = wr_m ? wr_w : rr[set_of(wr_addr)];

  // Data array: one read and one write port.
  always_ff @(posedge clk) begin
    if (lk_valid) lk_data <= data[{set_of(lk_addr), lk_w}];
    if (wr_valid) data[{set_of(wr_addr), wr_way}] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_hit <= 1'b0;
      for (int s = 0; s < SETS; s++) begin
        rr[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          vld[s][w]  <= 1'b0;
          tags[s][w] <= '0;
        end
      end
    end else begin
      if (lk_valid) lk_hit <= lk_m;
      if (wr_valid) begin
        vld[set_of(wr_addr)][wr_way]  <= 1'b1;
        tags[set_of(wr_addr)][wr_way] <= tag_of(wr_addr);
        if (!wr_m) rr[set_of(wr_addr)] <= way_t'((32'(rr[set_of(wr_addr)]) + 1) % WAYS);
      end
    end
  end

endmodule
