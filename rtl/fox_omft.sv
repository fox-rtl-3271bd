// fox_omft -- Open Monitor File Table.
//
// A 512-entry on-chip table, direct-mapped by the 9-bit Metabits value. Each
// entry holds the process ID, inode number, monitor flag, UID and GID of one
// active process-file pair that the kernel wants audited. The kernel fills an
// entry when a DAX page fault maps a monitored file (wr_en) and deletes the
// entries of a process when it exits (inv_en, one index per cycle). The
// Metadata Processing Module reads one entry per cycle with rd_en/rd_idx; the
// entry appears on rd_data the following cycle and is held until the next
// read, so the output register acts as register S. Entry 0 is never used by
// software, because Metabits 0 marks an unmonitored address.
//
// Size and direct mapping follow the FOX description. The port protocol,
// "invalidate wins over write to the same index", synchronous read and
// resetting only the valid bits are this design's choices.
module fox_omft
  import fox_pkg::*;
#(
  parameter int unsigned ENTRIES = OMFT_ENTRIES
) (
  input  logic        clk,
  input  logic        rst_n,
  // kernel side
  input  logic        wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  omft_entry_t wr_entry,
  input  logic        inv_en,
  input  logic [$clog2(ENTRIES)-1:0] inv_idx,
  // lookup side
  input  logic        rd_en,
  input  logic [$clog2(ENTRIES)-1:0] rd_idx,
  output omft_entry_t rd_data
);
  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned DW = $bits(omft_entry_t) - 1;   // payload without valid

  logic [DW-1:0]      data [ENTRIES];
  logic [ENTRIES-1:0] vld;
  logic [DW-1:0]      rd_q;
  logic               rd_v;

  always_ff @(posedge clk) begin
    if (wr_en) data[wr_idx] <= wr_entry[DW-1:0];
    if (rd_en) rd_q <= data[rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld  <= '0;
      rd_v <= 1'b0;
    end else begin
      if (wr_en) vld[wr_idx] <= wr_entry.valid;
      if (inv_en) vld[inv_idx] <= 1'b0;
      if (rd_en) rd_v <= vld[rd_idx];
    end
  end

  assign rd_data = {rd_v, rd_q};

  // Unused bits of the index are never wider than the table.
  initial assert (IW == META_W || ENTRIES < OMFT_ENTRIES)
    else $error("fox_omft: ENTRIES must not exceed 2**META_W");

endmodule
