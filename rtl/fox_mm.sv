// fox_mm -- Monitor Module (monitor phase 2 of FOX).
//
// Turns each pre-monitor request into a 32-byte record in a global circular
// log buffer in memory. For one request it
//   1. pops the Pre-monitoring Queue, keeping the monitored address in
//      register X and the formatted record in register M;
//   2. computes the log address LOG_BASE + 32 * index and looks the 64-byte
//      log block up in the Monitor Cache;
//   3. on a miss reads the block from memory (read-before-write) and waits
//      for its plaintext;
//   4. merges register M into its half of the block (slot = index bit 0),
//      writes the line into the Monitor Cache and issues the full-line
//      monitor write on wb_*;
//   5. advances the index modulo LOG_ENTRIES.
// A record takes 3 cycles plus the write handshake on a cache hit, and adds
// the memory read latency on a miss. Requests are handled one at a time, so
// records reach memory in the order they left the PAQ.
//
// The module also counts records since the last backup_ack and raises
// backup_req once BACKUP_NUM/BACKUP_DEN of the buffer (one half by default)
// has been written, so that software can copy the log out before it is
// overwritten. backup_ack clears the count and the request.
//
// Following the FOX description: registers X and M, read-before-write through
// the Monitor Cache, the circular buffer of about 1/20 of a 16 GB memory and
// the 50% backup point. This design's own choices: the record layout, the
// buffer's place in memory (just below the persistent region at 12 GB), the
// non-pipelined control and the plaintext memory interface (decryption and
// encryption of log blocks happen outside this module).
module fox_mm
  import fox_pkg::*;
#(
  parameter paddr_t      LOG_BASE    = 64'h0000_0002_CCCC_CCC0,
  parameter int unsigned LOG_ENTRIES = 26843545,
  parameter int unsigned BACKUP_NUM  = 1,
  parameter int unsigned BACKUP_DEN  = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  // from the Pre-monitoring Queue
  input  logic     pm_valid,
  output logic     pm_ready,
  input  pre_mon_t pm_data,
  // Monitor Cache
  output logic     mc_lk_valid,
  output paddr_t   mc_lk_addr,
  input  logic     mc_lk_hit,
  input  line_t    mc_lk_data,
  output logic     mc_wr_valid,
  output paddr_t   mc_wr_addr,
  output line_t    mc_wr_data,
  // log block read (read-before-write)
  output logic     rd_valid,
  input  logic     rd_ready,
  output paddr_t   rd_addr,
  input  logic     rd_resp_valid,
  input  line_t    rd_resp_data,
  // packaged monitor write
  output logic     wb_valid,
  input  logic     wb_ready,
  output paddr_t   wb_addr,
  output line_t    wb_data,
  // backup interface and status
  output logic     backup_req,
  input  logic     backup_ack,
  output logic [31:0] log_idx,
  output logic     mc_miss_fire
);
  localparam logic [31:0] BACKUP_AT =
    32'((64'(LOG_ENTRIES) * BACKUP_NUM) / BACKUP_DEN);

  typedef enum logic [2:0] {S_IDLE, S_LOOK, S_RDREQ, S_RDWAIT, S_WRITE} state_e;
  state_e state;

  paddr_t   reg_x;     // monitored address
  log_rec_t reg_m;     // monitor record
  logic [31:0] idx;    // circular buffer index
  logic [31:0] since;  // records since last backup
  line_t    line_q;    // merged block to write
  paddr_t   blk_q;     // its address

  paddr_t log_addr, blk_addr;
  assign log_addr = LOG_BASE + {27'd0, idx, 5'd0};
  assign blk_addr = {log_addr[PADDR_W-1:6], 6'd0};

  function automatic line_t merge(line_t l, log_rec_t r, logic slot);
    line_t o = l;
    if (slot) o[LINE_W-1 -: LOG_REC_W] = r;
    else      o[LOG_REC_W-1:0]        = r;
    return o;
  endfunction

  assign pm_ready    = (state == S_IDLE);
  assign mc_lk_valid = (state == S_IDLE) && pm_valid;
  assign mc_lk_addr  = blk_addr;
  assign rd_valid    = (state == S_RDREQ);
  assign rd_addr     = blk_q;
  assign wb_valid    = (state == S_WRITE);
  assign wb_addr     = blk_q;
  assign wb_data     = line_q;
  assign log_idx     = idx;

  // The cache line is written once, when the merged block is known.
  logic  mc_wr_q;
  assign mc_wr_valid = mc_wr_q;
  assign mc_wr_addr  = blk_q;
  assign mc_wr_data  = line_q;
  assign mc_miss_fire = (state == S_LOOK) && !mc_lk_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      reg_x      <= '0;
      reg_m      <= '0;
      idx        <= '0;
      since      <= '0;
      line_q     <= '0;
      blk_q      <= '0;
      mc_wr_q    <= 1'b0;
      backup_req <= 1'b0;
    end else begin
      mc_wr_q <= 1'b0;
      unique case (state)
        S_IDLE: if (pm_valid) begin
          reg_x <= pm_data.addr;
          reg_m <= make_record(pm_data);
          blk_q <= blk_addr;
          state <= S_LOOK;
        end
        S_LOOK: begin
          if (mc_lk_hit) begin
            line_q  <= merge(mc_lk_data, reg_m, idx[0]);
            mc_wr_q <= 1'b1;
            state   <= S_WRITE;
          end else begin
            state <= S_RDREQ;
          end
        end
        S_RDREQ: if (rd_ready) state <= S_RDWAIT;
        S_RDWAIT: if (rd_resp_valid) begin
          line_q  <= merge(rd_resp_data, reg_m, idx[0]);
          mc_wr_q <= 1'b1;
          state   <= S_WRITE;
        end
        S_WRITE: if (wb_ready) begin
          idx   <= (idx == LOG_ENTRIES - 1) ? '0 : idx + 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase

      if (backup_ack) begin
        since      <= (state == S_WRITE && wb_ready) ? 32'd1 : '0;
        backup_req <= 1'b0;
      end else if (state == S_WRITE && wb_ready) begin
        since <= since + 1'b1;
        if (since + 1'b1 >= BACKUP_AT) backup_req <= 1'b1;
      end
    end
  end

  // The monitored address in X must be the one recorded in M.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state != S_IDLE) |-> (reg_m.blk_addr == reg_x));

endmodule
