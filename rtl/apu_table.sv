// apu_table: Address Protection Unit table of one coherence message checker.
//
// A direct-mapped lookup table with one entry per fixed-size region of
// physical memory. Each entry holds two permission bits per chiplet
// (chiplet c in bits [2c+1:2c]): 00 no access, 01 read-only, 11 read/write,
// 10 unused. With 64 regions and 8 chiplets the table is 64 x 16 = 1024 bits,
// as published.
//
// Interface and timing:
//   rd_en/rd_idx -> rd_entry : synchronous read, the entry appears on the
//                              cycle after rd_en (one SRAM access; this is
//                              the "lookup" pipeline stage of the checker).
//   wr_en/wr_idx/wr_entry    : write port driven only by the secure OS on the
//                              interposer; the chiplets cannot reach it.
//                              A write takes effect on the next cycle; a
//                              read of the same index in the same cycle
//                              returns the old entry.
// Reset clears every entry to "no access", so nothing is allowed until the
// secure OS grants it (reset behaviour is this design's choice; the
// published design only says the secure OS programs the table at run time).
module apu_table
  import cmc_pkg::*;
#(
  parameter int unsigned ENTRIES = N_REGIONS,
  parameter int unsigned CHIPLETS = N_CHIPLETS,
  localparam int unsigned IDX_W = $clog2(ENTRIES),
  localparam int unsigned EW = 2 * CHIPLETS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            rd_en,
  input  logic [IDX_W-1:0] rd_idx,
  output logic [EW-1:0]   rd_entry,
  input  logic            wr_en,
  input  logic [IDX_W-1:0] wr_idx,
  input  logic [EW-1:0]   wr_entry
);

  logic [EW-1:0] mem [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(ENTRIES); i++) mem[i] <= '0;
    end else if (wr_en) begin
      mem[wr_idx] <= wr_entry;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_entry <= '0;
    else if (rd_en) rd_entry <= mem[rd_idx];
  end

endmodule
