// rat: Row Allocation Table, the tag RAM of the Address Allocation Unit.
//
// Caches the mapping (MallocID, RowID) -> LocalRowID, together with the
// region epoch the mapping belongs to. The table is split into BANKS banks;
// a key lives in bank RowID[b-1:0] xor MallocID[b-1:0] and may occupy any of
// the bank's WAYS ways. Each bank has one lookup port and one write port
// (dual-ported), so a lookup and an insert can happen in the same cycle.
//
// Insert: the mapping goes to the first free way of its bank. When the bank
// is full the way under the bank's FIFO pointer is replaced and the pointer
// advances, so the oldest mapping leaves first; the replaced mapping appears on
// vic_* during the cycle before the insert so that the caller can spill it to
// device memory. Flush invalidates every mapping of one MallocID (region freed
// or reinitialised).
//
// Timing: lookup is combinational from the registers; an insert or flush is
// visible from the next cycle. The 16 banks, dual ports, tag-RAM role and
// FIFO replacement follow the paper; the bank hash, the ways per bank and the
// free-way-first fill are this design's own.
module rat
  import moehub_pkg::*;
#(
  parameter int unsigned BANKS = 16,
  parameter int unsigned WAYS  = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // lookup port
  input  logic [RAT_KEY_W-1:0] lk_key,
  output logic                 lk_hit,
  output lrow_t                lk_lrow,
  output epoch_t               lk_epoch,
  // insert port
  input  logic                 wr_valid,
  input  logic [RAT_KEY_W-1:0] wr_key,
  input  lrow_t                wr_lrow,
  input  epoch_t               wr_epoch,
  output logic                 vic_valid,
  output logic [RAT_KEY_W-1:0] vic_key,
  output lrow_t                vic_lrow,
  output epoch_t               vic_epoch,
  // flush
  input  logic                 flush_valid,
  input  mid_t                 flush_mid
);

  localparam int unsigned BW = (BANKS > 1) ? $clog2(BANKS) : 1;
  localparam int unsigned WW = (WAYS > 1) ? $clog2(WAYS) : 1;

  logic                 v    [BANKS][WAYS];
  logic [RAT_KEY_W-1:0] key  [BANKS][WAYS];
  lrow_t                lrow [BANKS][WAYS];
  epoch_t               ep   [BANKS][WAYS];
  logic [WW-1:0]        fptr [BANKS];

  function automatic logic [BW-1:0] bank_of(logic [RAT_KEY_W-1:0] k);
    return k[BW-1:0] ^ k[ROWID_W +: BW];
  endfunction

  // lookup
  logic [BW-1:0] lb;
  always_comb begin
    lb       = bank_of(lk_key);
    lk_hit   = 1'b0;
    lk_lrow  = '0;
    lk_epoch = '0;
    for (int w = 0; w < WAYS; w++)
      if (!lk_hit && v[lb][w] && key[lb][w] == lk_key) begin
        lk_hit   = 1'b1;
        lk_lrow  = lrow[lb][w];
        lk_epoch = ep[lb][w];
      end
  end

  // insert way and victim
  logic [BW-1:0] wb;
  logic          has_free;
  logic [WW-1:0] free_w, ins_w;
  always_comb begin
    wb       = bank_of(wr_key);
    has_free = 1'b0;
    free_w   = '0;
    for (int w = 0; w < WAYS; w++)
      if (!has_free && !v[wb][w]) begin
        has_free = 1'b1;
        free_w   = WW'(w);
      end
    ins_w     = has_free ? free_w : fptr[wb];
    vic_valid = !has_free;
    vic_key   = key[wb][fptr[wb]];
    vic_lrow  = lrow[wb][fptr[wb]];
    vic_epoch = ep[wb][fptr[wb]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < BANKS; b++) begin
        fptr[b] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          v[b][w] <= 1'b0; key[b][w] <= '0; lrow[b][w] <= '0; ep[b][w] <= '0;
        end
      end
    end else begin
      if (flush_valid)
        for (int b = 0; b < BANKS; b++)
          for (int w = 0; w < WAYS; w++)
            if (key[b][w][RAT_KEY_W-1 -: MALLOCID_W] == flush_mid) v[b][w] <= 1'b0;
      if (wr_valid) begin
        v[wb][ins_w]    <= 1'b1;
        key[wb][ins_w]  <= wr_key;
        lrow[wb][ins_w] <= wr_lrow;
        ep[wb][ins_w]   <= wr_epoch;
        if (!has_free)
          fptr[wb] <= (32'(fptr[wb]) == WAYS - 1) ? '0 : fptr[wb] + 1'b1;
      end
    end
  end

endmodule
