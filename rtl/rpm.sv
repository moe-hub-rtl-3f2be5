// rpm: Runtime Packet Manager, the egress stage of the hub.
//
// Front end: a remote write buffer pool with one fully associative partition
// per destination GPU. A sector request is steered to the partition of its
// destination (MUX1). There it is merged into an entry for the same 128-byte
// line when one exists with the same kind (st. or st.rowsp) and the same
// priority (normal or .nop): the sector is written and its validity-mask bit
// set. A st. line is identified by its line address, a st.rowsp line by
// {MallocID, RowID, RowOffset[15:7]}, so a logical row is merged as if it were
// its own address space. With no match a free entry is taken; with neither the
// request waits (in_ready low).
//
// Back end: the packet scheduler (MUX2). An entry may leave when its mask is
// full, or when it has waited TIMEOUT cycles since it was allocated (the timer
// bypass that keeps poorly merged entries moving). Inside a partition the
// eligible entry with the smallest key {nop, RowID} goes first, which sends
// normal traffic before .nop traffic and completes low RowIDs (whole token
// rows) first; st. entries use RowID 0. Across partitions a round-robin
// pointer visits the destinations whose link reports dst_ready, so a
// congested consumer link does not block traffic to the others.
//
// Timing: one request in and one line out per cycle. out_valid/out_pkt are
// combinational from the entry registers. A full line is sent on the clock
// edge after its last sector was accepted; a lone partial line is sent on the
// (TIMEOUT+1)th edge after its first sector was accepted. The mask, merge rules,
// round-robin and priority order follow the paper; sector granularity, the
// TIMEOUT value, the stall on a full partition and the RowID 0 rank of st.
// entries are this design's choices.
module rpm
  import moehub_pkg::*;
#(
  parameter int unsigned N_GPUS  = 8,
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned TIMEOUT = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  gpu_t              my_gpu,
  input  logic              in_valid,
  output logic              in_ready,
  input  hub_req_t          in_req,
  input  logic [N_GPUS-1:0] dst_ready,
  output logic              out_valid,
  input  logic              out_ready,
  output line_pkt_t         out_pkt,
  output logic              ev_merge,
  output logic              ev_timeout,
  output logic              ev_stall
);

  localparam int unsigned EW    = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned GW    = (N_GPUS > 1) ? $clog2(N_GPUS) : 1;
  localparam int unsigned AGE_W = $clog2(TIMEOUT + 1);
  localparam int unsigned RANK_W = 1 + ROWID_W;

  line_pkt_t            ent   [N_GPUS][ENTRIES];
  logic                 ent_v [N_GPUS][ENTRIES];
  logic [AGE_W-1:0]     ent_age[N_GPUS][ENTRIES];
  logic [GW-1:0]        rr_ptr;

  // ---------------------------------------------------------------- helpers
  function automatic logic same_line(line_pkt_t a, line_pkt_t b);
    if (a.rowsp != b.rowsp || a.nop != b.nop) return 1'b0;
    if (a.rowsp) return a.mid == b.mid && a.rowid == b.rowid && a.rowline == b.rowline;
    return a.line_addr == b.line_addr;
  endfunction

  function automatic logic [RANK_W-1:0] rank(line_pkt_t p);
    return {p.nop, p.rowsp ? p.rowid : rowid_t'(0)};
  endfunction

  // ------------------------------------------------------------- scheduler
  logic [EW-1:0]     best_e  [N_GPUS];
  logic [N_GPUS-1:0] has_elig;
  logic              send_fire;
  logic [GW-1:0]     sel_g;
  logic [EW-1:0]     sel_e;

  always_comb begin
    for (int g = 0; g < N_GPUS; g++) begin
      logic              found;
      logic [RANK_W-1:0] best_rank;
      found     = 1'b0;
      best_rank = '1;
      best_e[g] = '0;
      for (int e = 0; e < ENTRIES; e++) begin
        if (ent_v[g][e] && (&ent[g][e].mask || 32'(ent_age[g][e]) >= TIMEOUT)) begin
          if (!found || rank(ent[g][e]) < best_rank) begin
            found     = 1'b1;
            best_rank = rank(ent[g][e]);
            best_e[g] = EW'(e);
          end
        end
      end
      has_elig[g] = found && dst_ready[g];
    end
  end

  always_comb begin
    logic found;
    found = 1'b0;
    sel_g = '0;
    for (int i = 0; i < N_GPUS; i++) begin
      logic [GW:0] gi;
      gi = (GW+1)'(rr_ptr) + (GW+1)'(i);
      if (gi >= (GW+1)'(N_GPUS)) gi = gi - (GW+1)'(N_GPUS);
      if (!found && has_elig[gi[GW-1:0]]) begin
        found = 1'b1;
        sel_g = gi[GW-1:0];
      end
    end
    out_valid = found;
    sel_e     = best_e[sel_g];
    out_pkt   = ent[sel_g][sel_e];
    out_pkt.dst = gpu_t'(sel_g);
    out_pkt.src = my_gpu;
  end

  assign send_fire = out_valid && out_ready;

  // ----------------------------------------------------------- insert path
  line_pkt_t          in_line;
  logic [GW-1:0]      in_g;
  logic [1:0]         in_sec;
  logic               hit, has_free;
  logic [EW-1:0]      hit_e, free_e;

  always_comb begin
    in_line           = '0;
    in_line.rowsp     = in_req.rowsp;
    in_line.nop       = in_req.nop;
    in_line.dst       = in_req.dst;
    in_line.line_addr = in_req.addr[ADDR_W-1:LINE_SHIFT];
    in_line.mid       = in_req.mid;
    in_line.rowid     = in_req.rowid;
    in_line.rowline   = in_req.rowoff[ROWOFF_W-1:LINE_SHIFT];
    in_sec = in_req.rowsp ? in_req.rowoff[LINE_SHIFT-1:SECTOR_SHIFT]
                          : in_req.addr[LINE_SHIFT-1:SECTOR_SHIFT];
    in_g   = in_req.dst[GW-1:0];
    hit = 1'b0; hit_e = '0; has_free = 1'b0; free_e = '0;
    for (int e = 0; e < ENTRIES; e++) begin
      logic leaving;
      leaving = send_fire && sel_g == in_g && sel_e == EW'(e);
      if (!hit && ent_v[in_g][e] && !leaving && same_line(ent[in_g][e], in_line)) begin
        hit = 1'b1; hit_e = EW'(e);
      end
      if (!has_free && !ent_v[in_g][e]) begin
        has_free = 1'b1; free_e = EW'(e);
      end
    end
  end

  assign in_ready   = hit || has_free;
  assign ev_merge   = in_valid && hit;
  assign ev_stall   = in_valid && !in_ready;
  assign ev_timeout = send_fire && !(&out_pkt.mask);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_ptr <= '0;
      for (int g = 0; g < N_GPUS; g++)
        for (int e = 0; e < ENTRIES; e++) begin
          ent_v[g][e]   <= 1'b0;
          ent_age[g][e] <= '0;
          ent[g][e]     <= '0;
        end
    end else begin
      for (int g = 0; g < N_GPUS; g++)
        for (int e = 0; e < ENTRIES; e++)
          if (ent_v[g][e] && 32'(ent_age[g][e]) < TIMEOUT)
            ent_age[g][e] <= ent_age[g][e] + 1'b1;
      if (send_fire)
        rr_ptr <= (32'(sel_g) == N_GPUS - 1) ? '0 : sel_g + 1'b1;
      // Per-entry writes with constant indices, so every entry register has
      // its own small enable instead of a shared dynamic part-select.
      for (int g = 0; g < N_GPUS; g++)
        for (int e = 0; e < ENTRIES; e++) begin
          if (send_fire && sel_g == GW'(g) && sel_e == EW'(e))
            ent_v[g][e] <= 1'b0;
          if (in_valid && in_ready && in_g == GW'(g) &&
              (hit ? hit_e == EW'(e) : free_e == EW'(e))) begin
            if (!hit) begin
              ent_v[g][e]   <= 1'b1;
              ent_age[g][e] <= '0;
              ent[g][e]     <= in_line;
            end
            for (int s = 0; s < SECTORS; s++)
              if (in_sec == 2'(s)) begin
                ent[g][e].mask[s] <= 1'b1;
                ent[g][e].data[s*SECTOR_W +: SECTOR_W] <= in_req.data;
              end
          end
        end
    end
  end

  // A request must name an existing partition (rowsp_decode drops others).
  a_dst_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> 32'(in_req.dst) < N_GPUS);
  // An entry leaves only towards a destination whose link is ready.
  a_dst_ready: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> dst_ready[sel_g]);

endmodule
