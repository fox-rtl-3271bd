// fox_mpm -- Metadata Processing Module (monitor phase 1 of FOX).
//
// Every request that reaches the memory controller passes through here on its
// way to the counter fetch. The module pops one request from the Counter
// Request Queue, saves its address in register A and its operation in bit O,
// samples the timestamp, and at the same edge starts an OMFT read indexed by the Metabits (A[51:43]).
// One cycle later the OMFT line is available as register S (all zeros when
// the Metabits are 0 or select an invalid entry), and the module
//   * sends the trimmed 43-bit address, the operation and the computed counter
//     address to the memory back end / counter cache (mem_*), and
//   * if the request must be monitored, pushes {A, O, S, timestamp} to the
//     Pre-monitoring Queue of the Monitor Module (pm_*).
// A request is monitored when cfg_op_mask allows its operation and one of:
//   - it carries Metabits whose OMFT entry is valid and whose monitor flag
//     has the bit of its operation set (the main, selective scheme),
//   - cfg_range_en is set and the trimmed address lies in
//     [cfg_range_lo, cfg_range_hi) (address-selective scheme),
//   - cfg_full is set (full monitoring, the control scheme).
// The stage holds until both outputs have been accepted; a memory request is
// therefore never issued after its own monitor request (pm_valid waits for
// the memory request to be accepted, so pm_valid may depend on mem_ready). Throughput is one
// request per cycle when neither output stalls.
//
// Registers A, O, S, the Metabits lookup and the flag comparison follow the
// FOX description. The counter-address formula (one 64-byte counter block per
// 4 KB page at CTR_BASE), the range/full/op-mask configuration inputs and the
// handshakes are this design's choices.
module fox_mpm
  import fox_pkg::*;
#(
  parameter paddr_t CTR_BASE = 64'h0000_0004_0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the Counter Request Queue
  input  logic        in_valid,
  output logic        in_ready,
  input  mem_req_t    in_req,
  // OMFT lookup
  output logic        omft_rd_en,
  output meta_t       omft_rd_idx,
  input  omft_entry_t omft_rd_data,
  // time base
  input  ts_t         ts,
  // scheme configuration
  input  logic        cfg_full,
  input  logic        cfg_range_en,
  input  maddr_t      cfg_range_lo,
  input  maddr_t      cfg_range_hi,
  input  logic [1:0]  cfg_op_mask,
  // to the memory back end and counter cache
  output logic        mem_valid,
  input  logic        mem_ready,
  output maddr_t      mem_addr,
  output op_e         mem_op,
  output paddr_t      mem_ctr_addr,
  // to the Pre-monitoring Queue
  output logic        pm_valid,
  input  logic        pm_ready,
  output pre_mon_t    pm_data,
  // status: monitor request accepted this cycle
  output logic        mon_fire
);
  logic   s1_valid;
  paddr_t reg_a;
  op_e    reg_o;
  ts_t    reg_t;
  logic   mem_done, pm_done;

  omft_entry_t reg_s;
  logic has_meta, tag_hit, range_hit, monitor;
  maddr_t a_trim;

  assign a_trim   = trim(reg_a);
  assign has_meta = (meta_of(reg_a) != '0);
  assign reg_s    = (has_meta && omft_rd_data.valid) ? omft_rd_data : '0;

  always_comb begin
    tag_hit   = has_meta && reg_s.valid && reg_s.mflag[reg_o];
    range_hit = cfg_range_en && (a_trim >= cfg_range_lo) && (a_trim < cfg_range_hi);
    monitor   = cfg_op_mask[reg_o] && (tag_hit || range_hit || cfg_full);
  end

  assign mem_valid    = s1_valid && !mem_done;
  assign mem_addr     = a_trim;
  assign mem_op       = reg_o;
  assign mem_ctr_addr = CTR_BASE + {27'd0, a_trim[MEM_ADDR_W-1:12], 6'd0};

  // The monitor request is offered only once its memory request goes out.
  assign pm_valid     = s1_valid && monitor && !pm_done && (mem_done || mem_ready);
  assign pm_data      = '{addr: reg_a, op: reg_o, s: reg_s, ts: reg_t};
  assign mon_fire     = pm_valid && pm_ready;

  logic mem_ok, pm_ok, advance;
  assign mem_ok  = mem_done || mem_ready;
  assign pm_ok   = pm_done || !monitor || pm_ready;
  assign advance = s1_valid && mem_ok && pm_ok;

  assign in_ready    = !s1_valid || advance;
  assign omft_rd_en  = in_valid && in_ready;
  assign omft_rd_idx = meta_of(in_req.addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      reg_a    <= '0;
      reg_o    <= OP_READ;
      reg_t    <= '0;
      mem_done <= 1'b0;
      pm_done  <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        s1_valid <= 1'b1;
        reg_a    <= in_req.addr;
        reg_o    <= in_req.op;
        reg_t    <= ts;
        mem_done <= 1'b0;
        pm_done  <= 1'b0;
      end else if (advance) begin
        s1_valid <= 1'b0;
        mem_done <= 1'b0;
        pm_done  <= 1'b0;
      end else begin
        if (mem_valid && mem_ready) mem_done <= 1'b1;
        if (pm_valid && pm_ready)   pm_done  <= 1'b1;
      end
    end
  end

  // A monitor request never leaves ahead of its memory request.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (pm_valid && pm_ready) |-> (mem_done || mem_ready));

endmodule
