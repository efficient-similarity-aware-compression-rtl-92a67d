// simcom_quality_table: on-chip table of approximable memory regions.
//
// Each entry holds a valid bit, a start and an end address (inclusive) and
// the Approximation Factor (AF) that applies to writes into that region.
// Software fills the table through the cfg_* port (in a full system this
// would be driven by an ISA extension); a write access looks the table up by
// address and gets the AF of the first valid entry whose range contains the
// address. A miss returns hit = 0 and AF = 0. The table's role is the
// paper's; the entry count, the inclusive end address, the priority of the
// lowest index and the register-file organisation are choices of this
// implementation.
//
// Timing: cfg writes take effect on the next clock edge; the lookup is
// combinational. Reset clears all valid bits.
module simcom_quality_table
  import simcom_pkg::*;
#(
  parameter int ENTRIES = 16,
  parameter int IDX_W   = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [IDX_W-1:0]  cfg_idx,
  input  qt_entry_t         cfg_entry,
  input  logic [ADDR_W-1:0] lookup_addr,
  output logic              lookup_hit,
  output logic [AF_WIDTH-1:0]   lookup_af
);

  qt_entry_t tbl [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
    end else if (cfg_we) begin
      tbl[cfg_idx] <= cfg_entry;
    end
  end

  always_comb begin
    lookup_hit = 1'b0;
    lookup_af  = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (tbl[i].valid && lookup_addr >= tbl[i].start_addr &&
          lookup_addr <= tbl[i].end_addr) begin
        lookup_hit = 1'b1;
        lookup_af  = tbl[i].af;
      end
    end
  end

endmodule
