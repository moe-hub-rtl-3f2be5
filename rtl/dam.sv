// dam: Data Availability Manager, the consumer-side readiness tracker.
//
// Instead of letting consumer thread blocks poll for their input, the hub
// watches the write acknowledgments of incoming data. The Dependency Table is
// a range CAM: each entry names an address range [AddrStart, AddrEnd] and the
// thread-block (TB) group whose tile reads it; it is filled from the consumer
// kernel's static tiling before the kernel runs. An acknowledgment carries the
// address of the written line and the number of 32-byte sectors written. For
// every acknowledgment, every entry whose range holds the address adds that
// sector count to its TB group's status counter. A group whose counter reaches the TB threshold is
// Ready: its bit in tb_ready rises and stays set, telling the TB dispatcher the
// group may be launched. A global counter adds the sectors of every
// acknowledgment; when it
// reaches the total threshold (all writes expected by the kernel) AllReady
// rises, and every TB group whose counter is still zero is marked in
// tb_dealloc, so the conservatively launched but empty groups can be dropped.
//
// Interface: configuration writes for table entries and the two thresholds,
// clear (start of a kernel: counters and flags to zero), one acknowledgment
// per cycle. Timing: tb_ready / all_ready / tb_dealloc change in the cycle
// after the acknowledgment that completes them.
// The table, counters, the TB and total thresholds and the Ready/AllReady
// signals follow the paper; the single shared TB threshold follows its figure.
// Counting in sectors rather than packets (so the thresholds do not depend on
// how well the producer merged its lines), the >= comparison (two entries of a group
// may match one acknowledgment) and the table sizes are this design's own.
module dam
  import moehub_pkg::*;
#(
  parameter int unsigned DT_ENTRIES = 64,
  parameter int unsigned TB_GROUPS  = 64,
  parameter int unsigned CNT_W      = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration
  input  logic                  dt_wr_valid,
  input  logic [7:0]            dt_wr_idx,
  input  logic                  dt_wr_en,      // entry valid
  input  addr_t                 dt_wr_start,
  input  addr_t                 dt_wr_end,     // inclusive
  input  logic [7:0]            dt_wr_group,
  input  logic [CNT_W-1:0]      thr_tb,
  input  logic [CNT_W-1:0]      thr_total,
  input  logic                  clear,
  // write acknowledgments
  input  logic                  ack_valid,
  input  addr_t                 ack_addr,
  input  logic [2:0]            ack_sectors,
  // to the TB dispatcher
  output logic [TB_GROUPS-1:0]  tb_ready,
  output logic                  all_ready,
  output logic [TB_GROUPS-1:0]  tb_dealloc
);

  localparam int unsigned GW = (TB_GROUPS > 1) ? $clog2(TB_GROUPS) : 1;
  localparam int unsigned IW = $clog2(DT_ENTRIES * SECTORS + 1);

  logic             dt_v   [DT_ENTRIES];
  addr_t            dt_lo  [DT_ENTRIES];
  addr_t            dt_hi  [DT_ENTRIES];
  logic [GW-1:0]    dt_grp [DT_ENTRIES];
  logic [CNT_W-1:0] cnt    [TB_GROUPS];
  logic [CNT_W-1:0] gcnt;

  // range lookup and per-group increment
  logic [DT_ENTRIES-1:0] hit;
  logic [IW-1:0]         inc [TB_GROUPS];
  always_comb
    for (int e = 0; e < DT_ENTRIES; e++)
      hit[e] = ack_valid && dt_v[e] && ack_addr >= dt_lo[e] && ack_addr <= dt_hi[e];
  // one adder tree per group: matching entries times the sectors acknowledged
  for (genvar g = 0; g < TB_GROUPS; g++) begin : g_inc
    logic [DT_ENTRIES-1:0] sel;
    always_comb begin
      for (int e = 0; e < DT_ENTRIES; e++) sel[e] = hit[e] && dt_grp[e] == GW'(g);
      inc[g] = IW'($countones(sel)) * IW'(ack_sectors);
    end
  end

  always_comb
    for (int g = 0; g < TB_GROUPS; g++)
      tb_dealloc[g] = all_ready && cnt[g] == '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < DT_ENTRIES; e++) begin
        dt_v[e] <= 1'b0; dt_lo[e] <= '0; dt_hi[e] <= '0; dt_grp[e] <= '0;
      end
      for (int g = 0; g < TB_GROUPS; g++) cnt[g] <= '0;
      gcnt      <= '0;
      tb_ready  <= '0;
      all_ready <= 1'b0;
    end else begin
      if (dt_wr_valid)
        for (int e = 0; e < DT_ENTRIES; e++)
          if (dt_wr_idx == 8'(e)) begin
            dt_v  [e] <= dt_wr_en;
            dt_lo [e] <= dt_wr_start;
            dt_hi [e] <= dt_wr_end;
            dt_grp[e] <= GW'(dt_wr_group);
          end
      if (clear) begin
        for (int g = 0; g < TB_GROUPS; g++) cnt[g] <= '0;
        gcnt      <= '0;
        tb_ready  <= '0;
        all_ready <= 1'b0;
      end else if (ack_valid) begin
        for (int g = 0; g < TB_GROUPS; g++)
          if (inc[g] != '0) begin
            cnt[g] <= cnt[g] + CNT_W'(inc[g]);
            if (cnt[g] + CNT_W'(inc[g]) >= thr_tb) tb_ready[g] <= 1'b1;
          end
        gcnt <= gcnt + CNT_W'(ack_sectors);
        if (gcnt + CNT_W'(ack_sectors) >= thr_total) all_ready <= 1'b1;
      end
    end
  end

  // A group is released only once its counter has reached the threshold.
  for (genvar g = 0; g < TB_GROUPS; g++) begin : g_chk
    a_ready_reached: assert property (@(posedge clk) disable iff (!rst_n)
      $rose(tb_ready[g]) |-> cnt[g] >= thr_tb);
  end

endmodule
