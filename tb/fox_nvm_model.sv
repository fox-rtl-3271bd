// fox_nvm_model -- behavioural model of the non-volatile main memory as seen
// by the FOX log ports (testbench only, not synthesizable).
//
// It stores 64-byte blocks in an associative array. Blocks never written read
// as a fixed pattern derived from their address. The log-read port accepts one
// request at a time and answers after READ_LAT cycles with the block's
// plaintext. The write port accepts a block whenever the model is not
// stalling (random back-pressure, one cycle in STALL_1_IN, 0 = never). The
// model drives at the falling clock edge and samples 1 time unit later, when
// the design's outputs have settled. peek() returns a block's contents.
module fox_nvm_model
  import fox_pkg::*;
#(
  parameter int READ_LAT   = 60,   // 60 ns PCM read at 1 GHz
  parameter int STALL_1_IN = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   rd_valid,
  output logic   rd_ready,
  input  paddr_t rd_addr,
  output logic   rd_resp_valid,
  output line_t  rd_resp_data,
  input  logic   wb_valid,
  output logic   wb_ready,
  input  paddr_t wb_addr,
  input  line_t  wb_data
);
  line_t  mem [paddr_t];
  logic   busy = 0;
  paddr_t rq;
  int     wait_n = 0;
  int     reads = 0, writes = 0, stalls = 0;

  function automatic line_t peek(paddr_t a);
    line_t l;
    if (mem.exists(a)) return mem[a];
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = 32'h5A5A_0000 ^ 32'(a[31:0]) ^ i;
    return l;
  endfunction

  assign rd_ready = !busy;
  initial begin rd_resp_valid = 0; rd_resp_data = '0; wb_ready = 1; end

  always @(negedge clk) begin
    rd_resp_valid = 0;
    if (busy) begin
      if (wait_n == 0) begin
        rd_resp_valid = 1; rd_resp_data = peek(rq); busy = 0;
      end else wait_n--;
    end
    wb_ready = (STALL_1_IN == 0) || ($urandom_range(0, STALL_1_IN - 1) != 0);
    if (!wb_ready) stalls++;
    #1;
    if (rst_n && wb_valid && wb_ready) begin
      mem[wb_addr] = wb_data; writes++;
    end
    if (rst_n && !busy && !rd_resp_valid && rd_valid && rd_ready) begin
      rq = rd_addr; reads++;
      @(posedge clk); #1 busy = 1; wait_n = READ_LAT - 1;
    end
  end
endmodule
