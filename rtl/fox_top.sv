// fox_top -- memory-controller side of FOX, hardware-assisted auditing of
// direct-access (DAX) files in non-volatile memory.
//
// After a process maps a monitored file with DAX, the kernel puts the index
// of an Open Monitor File Table (OMFT) entry into the 9 Metabits of every
// physical address of that mapping and fills the entry with the process and
// file identity. Every request that misses the last-level cache arrives here
// and flows through:
//
//   req_* -> Counter Request Queue -> Metadata Processing Module (MPM) -> mem_*
//                                        |  OMFT lookup (register S)
//                                        v
//                             Pre-monitoring Queue (PAQ)
//                                        v
//                 Monitor Module (MM) <-> Monitor Cache, lrd_* (log block read)
//                                        v
//                               Write Buffer Queue -> wb_*
//
// The MPM forwards each request, with its Metabits trimmed and its counter
// address computed, to the memory back end (mem_*). When the request must be
// audited it also passes {address, operation, OMFT line, timestamp} to the
// Monitor Module, which appends a 32-byte record to a circular log in memory
// by read-modify-write of the 64-byte log block. The kernel writes and evicts
// OMFT entries through omft_wr_*/omft_inv_* and may load the timestamp.
//
// External parts, left as ports: the processor and caches (req_*), the
// memory back end, counter cache and AES engine (mem_*, and lrd_*/wb_*, which
// carry plaintext log blocks), the NVM device, and the kernel.
//
// The block structure and flow follow the FOX description; queue depths,
// handshakes, the scheme configuration inputs and the log placement are this
// design's choices.
module fox_top
  import fox_pkg::*;
#(
  parameter int unsigned CRQ_DEPTH   = 16,
  parameter int unsigned PAQ_DEPTH   = 16,
  parameter int unsigned WBQ_DEPTH   = 16,
  parameter paddr_t      CTR_BASE    = 64'h0000_0004_0000_0000,
  parameter paddr_t      LOG_BASE    = 64'h0000_0002_CCCC_CCC0,
  parameter int unsigned LOG_ENTRIES = 26843545,
  parameter int unsigned MC_BYTES    = 65536,
  parameter int unsigned MC_WAYS     = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // processor side (last-level-cache misses, Metabits in the address)
  input  logic        req_valid,
  output logic        req_ready,
  input  paddr_t      req_addr,
  input  op_e         req_op,
  // kernel side
  input  logic        omft_wr_en,
  input  meta_t       omft_wr_idx,
  input  omft_entry_t omft_wr_entry,
  input  logic        omft_inv_en,
  input  meta_t       omft_inv_idx,
  input  logic        ts_load_en,
  input  ts_t         ts_load_val,
  // monitoring scheme
  input  logic        cfg_full,
  input  logic        cfg_range_en,
  input  maddr_t      cfg_range_lo,
  input  maddr_t      cfg_range_hi,
  input  logic [1:0]  cfg_op_mask,
  // memory back end / counter cache
  output logic        mem_valid,
  input  logic        mem_ready,
  output maddr_t      mem_addr,
  output op_e         mem_op,
  output paddr_t      mem_ctr_addr,
  // log block read for read-before-write (plaintext response)
  output logic        lrd_valid,
  input  logic        lrd_ready,
  output paddr_t      lrd_addr,
  input  logic        lrd_resp_valid,
  input  line_t       lrd_resp_data,
  // monitor writes
  output logic        wb_valid,
  input  logic        wb_ready,
  output paddr_t      wb_addr,
  output line_t       wb_data,
  // log backup
  output logic        backup_req,
  input  logic        backup_ack,
  // status
  output logic [31:0] log_idx,
  output logic        mon_fire,
  output logic        mc_miss_fire
);
  // Counter Request Queue
  logic     crq_valid, crq_ready;
  mem_req_t crq_data;
  logic [$clog2(CRQ_DEPTH+1)-1:0] crq_count;

  fox_fifo #(.T(mem_req_t), .DEPTH(CRQ_DEPTH)) u_crq (
    .clk, .rst_n,
    .push_valid(req_valid), .push_ready(req_ready),
    .push_data('{addr: req_addr, op: req_op}),
    .pop_valid(crq_valid), .pop_ready(crq_ready), .pop_data(crq_data),
    .count(crq_count));

  // OMFT and timestamp
  logic        omft_rd_en;
  meta_t       omft_rd_idx;
  omft_entry_t omft_rd_data;
  ts_t         ts;

  fox_omft u_omft (
    .clk, .rst_n,
    .wr_en(omft_wr_en), .wr_idx(omft_wr_idx), .wr_entry(omft_wr_entry),
    .inv_en(omft_inv_en), .inv_idx(omft_inv_idx),
    .rd_en(omft_rd_en), .rd_idx(omft_rd_idx), .rd_data(omft_rd_data));

  fox_timestamp #(.TS_W(TS_W)) u_ts (
    .clk, .rst_n, .load_en(ts_load_en), .load_val(ts_load_val), .ts);

  // Metadata Processing Module
  logic     mpm_pm_valid, mpm_pm_ready;
  pre_mon_t mpm_pm_data;

  fox_mpm #(.CTR_BASE(CTR_BASE)) u_mpm (
    .clk, .rst_n,
    .in_valid(crq_valid), .in_ready(crq_ready), .in_req(crq_data),
    .omft_rd_en, .omft_rd_idx, .omft_rd_data,
    .ts,
    .cfg_full, .cfg_range_en, .cfg_range_lo, .cfg_range_hi, .cfg_op_mask,
    .mem_valid, .mem_ready, .mem_addr, .mem_op, .mem_ctr_addr,
    .pm_valid(mpm_pm_valid), .pm_ready(mpm_pm_ready), .pm_data(mpm_pm_data),
    .mon_fire);

  // Pre-monitoring Queue
  logic     paq_valid, paq_ready;
  pre_mon_t paq_data;
  logic [$clog2(PAQ_DEPTH+1)-1:0] paq_count;

  fox_fifo #(.T(pre_mon_t), .DEPTH(PAQ_DEPTH)) u_paq (
    .clk, .rst_n,
    .push_valid(mpm_pm_valid), .push_ready(mpm_pm_ready), .push_data(mpm_pm_data),
    .pop_valid(paq_valid), .pop_ready(paq_ready), .pop_data(paq_data),
    .count(paq_count));

  // Monitor Module and Monitor Cache
  logic   mc_lk_valid, mc_lk_hit, mc_wr_valid;
  paddr_t mc_lk_addr, mc_wr_addr;
  line_t  mc_lk_data, mc_wr_data;
  logic   mm_wb_valid, mm_wb_ready;
  paddr_t mm_wb_addr;
  line_t  mm_wb_data;

  fox_mm #(.LOG_BASE(LOG_BASE), .LOG_ENTRIES(LOG_ENTRIES)) u_mm (
    .clk, .rst_n,
    .pm_valid(paq_valid), .pm_ready(paq_ready), .pm_data(paq_data),
    .mc_lk_valid, .mc_lk_addr, .mc_lk_hit, .mc_lk_data,
    .mc_wr_valid, .mc_wr_addr, .mc_wr_data,
    .rd_valid(lrd_valid), .rd_ready(lrd_ready), .rd_addr(lrd_addr),
    .rd_resp_valid(lrd_resp_valid), .rd_resp_data(lrd_resp_data),
    .wb_valid(mm_wb_valid), .wb_ready(mm_wb_ready), .wb_addr(mm_wb_addr), .wb_data(mm_wb_data),
    .backup_req, .backup_ack, .log_idx, .mc_miss_fire);

  fox_monitor_cache #(.SIZE_BYTES(MC_BYTES), .WAYS(MC_WAYS)) u_mc (
    .clk, .rst_n,
    .lk_valid(mc_lk_valid), .lk_addr(mc_lk_addr), .lk_hit(mc_lk_hit), .lk_data(mc_lk_data),
    .wr_valid(mc_wr_valid), .wr_addr(mc_wr_addr), .wr_data(mc_wr_data));

  // Write Buffer Queue
  wb_req_t wbq_out;
  logic [$clog2(WBQ_DEPTH+1)-1:0] wbq_count;

  fox_fifo #(.T(wb_req_t), .DEPTH(WBQ_DEPTH)) u_wbq (
    .clk, .rst_n,
    .push_valid(mm_wb_valid), .push_ready(mm_wb_ready),
    .push_data('{addr: mm_wb_addr, data: mm_wb_data}),
    .pop_valid(wb_valid), .pop_ready(wb_ready), .pop_data(wbq_out),
    .count(wbq_count));

  assign wb_addr = wbq_out.addr;
  assign wb_data = wbq_out.data;

endmodule
