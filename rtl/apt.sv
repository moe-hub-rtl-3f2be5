// apt: Allocation Pointer Table of the Address Allocation Unit.
//
// A small fully associative table (CAM) keyed by MallocID. Each entry holds the
// region registered by rowspMalloc: BaseAddr, AddrRange (bytes), RowSize
// (bytes per row) and the RowPointer, the next LocalRowID to hand out. An
// allocation command for a MallocID that is present reinitialises its entry
// (new parameters, RowPointer 0); otherwise it takes a free entry, or raises
// cfg_err when the table is full. A free command removes the entry.
//
// Every allocation command also advances a per-MallocID epoch. Spilled RAT
// mappings carry the epoch they were made in, so a reinitialised region never
// restores a mapping from its previous life. The epoch array is indexed
// directly by MallocID; it wraps after 2^EPOCH_W reinitialisations of one
// MallocID, beyond which the spill area of that region must be cleared.
//
// Interface: cfg command port; combinational lookup (lk_mid -> lk_hit,
// lk_entry); inc_valid post-increments the RowPointer of inc_mid at the clock.
// Timing: a command or increment is visible to lookups in the next cycle.
// The columns MallocID, BaseAddr, AddrRange and RowPointer and the increment
// after each new allocation follow the paper; the RowSize column, the epoch and
// the table size are this design's own.
module apt
  import moehub_pkg::*;
#(
  parameter int unsigned N_REGIONS = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cfg_valid,
  input  logic       cfg_free,
  input  mid_t       cfg_mid,
  input  addr_t      cfg_base,
  input  addr_t      cfg_range,
  input  addr_t      cfg_rowsize,
  output logic       cfg_err,
  input  mid_t       lk_mid,
  output logic       lk_hit,
  output apt_entry_t lk_entry,
  input  logic       inc_valid,
  input  mid_t       inc_mid
);

  localparam int unsigned RW = (N_REGIONS > 1) ? $clog2(N_REGIONS) : 1;

  logic       v     [N_REGIONS];
  mid_t       tag   [N_REGIONS];
  apt_entry_t ent   [N_REGIONS];
  epoch_t     epoch [2**MALLOCID_W];

  // lookup
  always_comb begin
    lk_hit   = 1'b0;
    lk_entry = '0;
    for (int r = 0; r < N_REGIONS; r++)
      if (!lk_hit && v[r] && tag[r] == lk_mid) begin
        lk_hit   = 1'b1;
        lk_entry = ent[r];
      end
  end

  // command slot selection
  logic          c_hit, c_free;
  logic [RW-1:0] c_hit_r, c_free_r, c_r;
  always_comb begin
    c_hit = 1'b0; c_hit_r = '0; c_free = 1'b0; c_free_r = '0;
    for (int r = 0; r < N_REGIONS; r++) begin
      if (!c_hit && v[r] && tag[r] == cfg_mid) begin
        c_hit = 1'b1; c_hit_r = RW'(r);
      end
      if (!c_free && !v[r]) begin
        c_free = 1'b1; c_free_r = RW'(r);
      end
    end
    c_r = c_hit ? c_hit_r : c_free_r;
  end

  assign cfg_err = cfg_valid && !cfg_free && !c_hit && !c_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_REGIONS; r++) begin
        v[r] <= 1'b0; tag[r] <= '0; ent[r] <= '0;
      end
      for (int m = 0; m < 2**MALLOCID_W; m++) epoch[m] <= '0;
    end else begin
      if (inc_valid)
        for (int r = 0; r < N_REGIONS; r++)
          if (v[r] && tag[r] == inc_mid) ent[r].rowptr <= ent[r].rowptr + 1'b1;
      if (cfg_valid) begin
        if (cfg_free) begin
          if (c_hit) v[c_hit_r] <= 1'b0;
        end else if (c_hit || c_free) begin
          v[c_r]           <= 1'b1;
          tag[c_r]         <= cfg_mid;
          ent[c_r].base    <= cfg_base;
          ent[c_r].range   <= cfg_range;
          ent[c_r].rowsize <= cfg_rowsize;
          ent[c_r].rowptr  <= '0;
          ent[c_r].epoch   <= epoch[cfg_mid] + 1'b1;
          epoch[cfg_mid]   <= epoch[cfg_mid] + 1'b1;
        end
      end
    end
  end

endmodule
