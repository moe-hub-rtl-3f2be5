// tb_moehub_top: end-to-end test of two MoE-Hubs at full size (all
// parameters at their defaults), running a small MoE token dispatch.
//
// Setup: hub 0 is the producer GPU 0, hub 1 is GPU 1. A behavioural switch
// routes hub 0's flits by the header's destination: packets for GPU 0 loop
// back into hub 0's own receive port, packets for GPU 1 go to hub 1, and
// packets for GPUs 3, 4 and 5 go to a sink that counts their sectors. Each hub
// has a behavioural memory (random write back-pressure, in-order
// acknowledgments after a random delay, each carrying its sector count) and a
// behavioural RAT spill area. The driver programs both hubs through MMIO.
//
// Traffic: TOKENS tokens each pick two experts (RowID = 2*token + k) on GPU 0,
// GPU 1 or a sink GPU. A token row is two 128-byte data lines (eight sectors,
// st.rowsp) and a source-information sector in a third line sent with
// st.rowsp.nop. Sectors of nearby tokens are interleaved. For some rows the
// source-information store is held back to the end of the stream, so that it
// reaches the consumer after the row's RAT mapping was evicted and must be
// restored. Further traffic: six rows into a region sized for four (overflow),
// stores to an unregistered MallocID, malformed stores, and conventional st.
// stores to GPU 1 (AAU bypass) and to a sink GPU. The link to GPU 1 is
// congested in bursts by dst_ready.
//
// Checks:
//   * every region on GPU 0 and GPU 1 holds its rows densely: LocalRowIDs
//     0..R-1 each hold all nine sectors of one distinct expected row, with
//     intact data, and nothing is written after them;
//   * the overflowing region holds exactly four complete rows;
//   * bypassed st. data lands at its address; sinks receive every sector;
//   * DAM: each cycle tb_ready equals a reference fed with the same
//     acknowledgments one cycle earlier (one-cycle latency); AllReady rises
//     exactly when the last expected sector is acknowledged; at the end
//     tb_dealloc marks exactly the groups that received nothing;
//   * every row allocates one LocalRowID, the two overflowing rows included
//     (allocation comes before the range check);
//   * mechanism counts: RPM merge, timer bypass, stall, congestion skip,
//     .nop packets, AAU hit, allocate, evict, restore, overflow, unregistered
//     drop, st. bypass, decode drop, TB Ready, AllReady, dealloc. A mechanism
//     that never happened is a failure.
module tb_moehub_top;
  import moehub_pkg::*;

  localparam int    NG      = 8;
  localparam int    NGRP    = 64;
  localparam int    TOKENS  = 1024;
  localparam int    ROWB    = 384;               // 3 lines per row
  localparam int    GRP_ROWS = 32;               // rows per TB group
  localparam int    N_DT_GRP = 48;               // DT entries for row groups
  localparam int    THR_TB  = GRP_ROWS * 9;      // sectors per group
  localparam int    BYP_GRP = 62;
  localparam addr_t BASE_A  = 48'h0000_1000_0000; // region 2 on GPU 0 and 1
  localparam addr_t BASE_O  = 48'h0000_2000_0000; // region 3 on GPU 1
  localparam addr_t BASE_B  = 48'h0000_5000_0000; // st. target on GPU 1
  localparam int    N_BYP   = THR_TB;            // st. sectors to GPU 1

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int   cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0d: %s", cyc, what);
    end
  endtask

  // ------------------------------------------------------------ the hubs
  logic              sm_valid [2], sm_ready [2];
  sm_store_t         sm_txn   [2];
  logic              tx_valid [2], tx_ready [2], tx_last [2];
  flit_t             tx_flit  [2];
  logic [NG-1:0]     dst_ready[2];
  logic              rx_valid [2], rx_ready [2], rx_last [2];
  flit_t             rx_flit  [2];
  logic              mem_wr_valid[2], mem_wr_ready[2];
  mem_wr_t           mem_wr   [2];
  logic              ack_valid[2];
  addr_t             ack_addr [2];
  logic [2:0]        ack_sectors[2];
  logic              sp_req_valid[2], sp_req_ready[2], sp_req_we[2], sp_rsp_valid[2];
  logic [RAT_KEY_W-1:0] sp_req_key[2];
  spill_rec_t        sp_req_wdata[2], sp_rsp_rdata[2];
  logic              mmio_wr_valid[2];
  logic [11:0]       mmio_addr[2];
  logic [63:0]       mmio_wdata[2];
  logic [NGRP-1:0]   tb_ready[2], tb_dealloc[2];
  logic              all_ready[2];
  hub_ev_t           ev[2];

  for (genvar h = 0; h < 2; h++) begin : g_hub
    moehub_top u_hub (
      .clk, .rst_n, .my_gpu(gpu_t'(h)),
      .sm_valid(sm_valid[h]), .sm_ready(sm_ready[h]), .sm_txn(sm_txn[h]),
      .tx_valid(tx_valid[h]), .tx_ready(tx_ready[h]), .tx_flit(tx_flit[h]),
      .tx_last(tx_last[h]), .dst_ready(dst_ready[h]),
      .rx_valid(rx_valid[h]), .rx_ready(rx_ready[h]), .rx_flit(rx_flit[h]),
      .rx_last(rx_last[h]),
      .mem_wr_valid(mem_wr_valid[h]), .mem_wr_ready(mem_wr_ready[h]),
      .mem_wr(mem_wr[h]), .ack_valid(ack_valid[h]), .ack_addr(ack_addr[h]),
      .ack_sectors(ack_sectors[h]),
      .sp_req_valid(sp_req_valid[h]), .sp_req_ready(sp_req_ready[h]),
      .sp_req_we(sp_req_we[h]), .sp_req_key(sp_req_key[h]),
      .sp_req_wdata(sp_req_wdata[h]), .sp_rsp_valid(sp_rsp_valid[h]),
      .sp_rsp_rdata(sp_rsp_rdata[h]),
      .mmio_wr_valid(mmio_wr_valid[h]), .mmio_addr(mmio_addr[h]),
      .mmio_wdata(mmio_wdata[h]),
      .tb_ready(tb_ready[h]), .tb_dealloc(tb_dealloc[h]),
      .all_ready(all_ready[h]), .ev(ev[h]));
  end

  // ------------------------------------------------------- sector data
  function automatic logic [SECTOR_W-1:0] sdata(mid_t m, rowid_t r, logic [15:0] off);
    logic [31:0] hsh;
    hsh = {m, r[11:0], off[11:0]} * 32'h9E37_79B1 ^ {12'h0, r};
    return {8'hA5, m, r, off, 204'({7{hsh}})};
  endfunction

  function automatic logic [SECTOR_W-1:0] bdata(int i);
    return {8'h5B, 216'(0), 32'(i) * 32'h0101_0101 + 32'h1234};
  endfunction

  // ------------------------------------------------------------ switch
  // Hub 0 transmits; the route is taken from the header flit and held for
  // the rest of the packet. Hub 1 never transmits (no SM traffic).
  function automatic gpu_t hdr_dst(flit_t f);
    line_pkt_t p;
    p = line_pkt_t'({f[HDR_BITS-1:0], LINE_W'(0)});
    return p.dst;
  endfunction
  function automatic logic [SECTORS-1:0] hdr_mask(flit_t f);
    line_pkt_t p;
    p = line_pkt_t'({f[HDR_BITS-1:0], LINE_W'(0)});
    return p.mask;
  endfunction

  logic in_pkt = 0;
  gpu_t cur_dst = 0, route;
  logic sink_ready = 1;
  int   sink_sec [NG];
  int   sink_pkts = 0;
  always_comb begin
    route       = in_pkt ? cur_dst : hdr_dst(tx_flit[0]);
    rx_valid[0] = tx_valid[0] && route == 0;
    rx_valid[1] = tx_valid[0] && route == 1;
    rx_flit[0]  = tx_flit[0];
    rx_flit[1]  = tx_flit[0];
    rx_last[0]  = tx_last[0];
    rx_last[1]  = tx_last[0];
    tx_ready[0] = (route == 0) ? rx_ready[0] : (route == 1) ? rx_ready[1] : sink_ready;
    tx_ready[1] = 1'b1;
  end
  always @(posedge clk) begin
    if (rst_n && tx_valid[0] && tx_ready[0]) begin
      if (!in_pkt) begin
        cur_dst <= hdr_dst(tx_flit[0]);
        if (hdr_dst(tx_flit[0]) > 1) begin
          sink_pkts++;
          sink_sec[hdr_dst(tx_flit[0])] += $countones(hdr_mask(tx_flit[0]));
        end
      end
      in_pkt <= !tx_last[0];
    end
  end
  always @(negedge clk) sink_ready = ($urandom % 3) != 0;

  // Link to GPU 1 congested in bursts; other links mostly ready.
  int cong_left = 0;
  always @(negedge clk) begin
    logic [NG-1:0] r;
    for (int g = 0; g < NG; g++) r[g] = ($urandom % 8) != 0;
    if (cong_left > 0) begin
      cong_left--;
      r[1] = 1'b0;
    end else if ($urandom % 200 == 0) cong_left = 20 + $urandom % 40;
    dst_ready[0] = r;
    dst_ready[1] = '1;
  end

  // ------------------------------------------------------ memory model
  // Keyed by {hub, sector address}.
  logic [SECTOR_W-1:0] mem [logic [ADDR_W:0]];
  typedef struct { int due; addr_t addr; int n; } ackq_t;
  ackq_t ackq [2][$];
  int    last_due [2] = '{0, 0};
  always @(negedge clk) begin
    mem_wr_ready[0] = ($urandom % 4) != 0;
    mem_wr_ready[1] = ($urandom % 4) != 0;
  end
  always @(posedge clk) begin
    for (int h = 0; h < 2; h++) begin
      ack_valid[h] <= 1'b0;
      if (rst_n && mem_wr_valid[h] && mem_wr_ready[h]) begin
        ackq_t a;
        for (int s = 0; s < SECTORS; s++)
          if (mem_wr[h].mask[s])
            mem[{1'(h), mem_wr[h].addr + addr_t'(s * SECTOR_BYTES)}] =
              mem_wr[h].data[s*SECTOR_W +: SECTOR_W];
        a.due  = cyc + 2 + int'($urandom % 8);
        if (a.due <= last_due[h]) a.due = last_due[h] + 1;
        last_due[h] = a.due;
        a.addr = mem_wr[h].addr;
        a.n    = $countones(mem_wr[h].mask);
        ackq[h].push_back(a);
      end
      if (ackq[h].size() > 0 && ackq[h][0].due <= cyc) begin
        ackq_t a;
        a = ackq[h].pop_front();
        ack_valid[h]   <= 1'b1;
        ack_addr[h]    <= a.addr;
        ack_sectors[h] <= 3'(a.n);
      end
    end
  end

  // ------------------------------------------------- spill area model
  spill_rec_t spill [logic [RAT_KEY_W:0]];
  int         rd_wait [2] = '{-1, -1};
  logic [RAT_KEY_W-1:0] rd_key [2];
  always @(negedge clk) begin
    sp_req_ready[0] = ($urandom % 4) != 0;
    sp_req_ready[1] = ($urandom % 4) != 0;
  end
  always @(posedge clk) begin
    for (int h = 0; h < 2; h++) begin
      sp_rsp_valid[h] <= 1'b0;
      if (rst_n && sp_req_valid[h] && sp_req_ready[h]) begin
        if (sp_req_we[h]) spill[{1'(h), sp_req_key[h]}] = sp_req_wdata[h];
        else begin
          rd_wait[h] = 2 + int'($urandom % 10);
          rd_key[h]  = sp_req_key[h];
        end
      end else if (rd_wait[h] > 0) begin
        rd_wait[h]--;
        if (rd_wait[h] == 0) begin
          sp_rsp_valid[h] <= 1'b1;
          sp_rsp_rdata[h] <= spill.exists({1'(h), rd_key[h]}) ?
                             spill[{1'(h), rd_key[h]}] : '0;
          rd_wait[h] = -1;
        end
      end
    end
  end

  // ------------------------------------------------------ event counts
  int n_merge, n_timeout, n_stall, n_hit, n_alloc, n_restore, n_evict;
  int n_overflow, n_unreg, n_bypass, n_drop, n_aptfull, n_cong, n_nop_pkts;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int h = 0; h < 2; h++) begin
        n_merge    += int'(ev[h].rpm_merge);
        n_timeout  += int'(ev[h].rpm_timeout);
        n_stall    += int'(ev[h].rpm_stall);
        n_hit      += int'(ev[h].aau_hit);
        n_alloc    += int'(ev[h].aau_alloc);
        n_restore  += int'(ev[h].aau_restore);
        n_evict    += int'(ev[h].aau_evict);
        n_overflow += int'(ev[h].aau_overflow);
        n_unreg    += int'(ev[h].aau_unreg);
        n_bypass   += int'(ev[h].bypass);
        n_drop     += int'(ev[h].sm_drop);
        n_aptfull  += int'(ev[h].apt_full);
      end
      // a packet leaves for another GPU while the link to GPU 1 is blocked
      if (tx_valid[0] && tx_ready[0] && !in_pkt && !dst_ready[0][1]) n_cong++;
      if (tx_valid[0] && tx_ready[0] && !in_pkt && tx_flit[0][HDR_BITS-2]) n_nop_pkts++;
      if (tx_valid[1]) check(1'b0, "hub 1 transmits without stores");
    end
  end

  // --------------------------------------------- DAM reference (hub 1)
  int   exp_cnt [NGRP];
  logic [NGRP-1:0] exp_ready = '0;
  int   acked1 = 0, thr_total = 0;
  logic prev_all = 0;
  int   n_ready_rise = 0, allready_at = -1;
  function automatic int grp_of(addr_t a);
    if (a >= BASE_A && a < BASE_A + addr_t'(N_DT_GRP * GRP_ROWS * ROWB))
      return int'((a - BASE_A) / (GRP_ROWS * ROWB));
    if (a >= BASE_B && a < BASE_B + addr_t'(N_BYP * SECTOR_BYTES)) return BYP_GRP;
    return -1;
  endfunction
  logic dam_track = 0;
  always @(posedge clk) begin
    if (rst_n && dam_track) begin
      check(tb_ready[1] == exp_ready, "tb_ready follows the acknowledgments by one cycle");
      if (all_ready[1] && !prev_all) begin
        allready_at = acked1;
        check(acked1 == thr_total, "AllReady rises exactly at the last expected sector");
      end
      prev_all <= all_ready[1];
      if (ack_valid[1]) begin
        int g;
        g = grp_of(ack_addr[1]);
        acked1 += int'(ack_sectors[1]);
        if (g >= 0) begin
          exp_cnt[g] += int'(ack_sectors[1]);
          if (exp_cnt[g] >= THR_TB && !exp_ready[g]) begin
            exp_ready[g] <= 1'b1;
            n_ready_rise++;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ driver
  task automatic mmio(int h, logic [11:0] a, logic [63:0] d);
    @(negedge clk);
    mmio_wr_valid[h] = 1; mmio_addr[h] = a; mmio_wdata[h] = d;
    @(negedge clk);
    mmio_wr_valid[h] = 0;
  endtask

  task automatic region(int h, mid_t m, addr_t base, addr_t range, addr_t rowsize);
    mmio(h, 12'h000, 64'(m));
    mmio(h, 12'h008, 64'(base));
    mmio(h, 12'h010, 64'(range));
    mmio(h, 12'h018, 64'(rowsize));
    mmio(h, 12'h020, 64'd0);
  endtask

  task automatic dt_entry(int h, int idx, addr_t lo, addr_t hi, int grp);
    mmio(h, 12'h100, 64'(lo));
    mmio(h, 12'h108, 64'(hi));
    mmio(h, 12'h110, 64'(grp));
    mmio(h, 12'h118, 64'(idx) | 64'h100);
  endtask

  logic sm_fire = 0;
  always @(posedge clk) sm_fire <= sm_valid[0] && sm_ready[0];

  sm_store_t stream [$];
  sm_store_t late   [$];

  function automatic sm_store_t rowsp_st(mid_t m, rowid_t r, int off, logic nop);
    sm_store_t s;
    s = '0;
    s.rowsp = 1'b1;
    s.nop   = nop;
    s.dreg  = (64'(m) << DREG_MID_LSB) | (64'(r) << DREG_ROWID_LSB) | 64'(off);
    s.data  = sdata(m, r, 16'(off));
    return s;
  endfunction

  function automatic sm_store_t plain_st(gpu_t g, addr_t a, logic [SECTOR_W-1:0] d);
    sm_store_t s;
    s = '0;
    s.addr    = a;
    s.tlb_gpu = g;
    s.data    = d;
    return s;
  endfunction

  // expected rows per consumer region
  int rows_a0 [$], rows_a1 [$], rows_o [$];
  int n_late = 0, n_sent_sink [NG];

  task automatic build();
    mid_t  dst_mid [4] = '{8'h02, 8'h12, 8'h32, 8'h52};
    sm_store_t win [$];
    for (int t = 0; t < TOKENS; t++) begin
      for (int k = 0; k < 2; k++) begin
        int     c;
        rowid_t r;
        mid_t   m;
        c = ($urandom % 8 < 5) ? 1 : ($urandom % 8 < 4) ? 0 : 2 + int'($urandom % 2);
        m = dst_mid[c];
        r = rowid_t'(2 * t + k);
        if (c == 0) rows_a0.push_back(int'(r));
        if (c == 1) rows_a1.push_back(int'(r));
        if (c >= 2) n_sent_sink[mid_gpu(m)] += 9;
        for (int o = 0; o < 256; o += 32) win.push_back(rowsp_st(m, r, o, 1'b0));
        if (c == 1 && $urandom % 16 == 0) begin
          late.push_back(rowsp_st(m, r, 256, 1'b1));
          n_late++;
        end else win.push_back(rowsp_st(m, r, 256, 1'b1));
      end
      if (t % 4 == 3) begin
        win.shuffle();
        foreach (win[i]) stream.push_back(win[i]);
        win.delete();
      end
      // sprinkle conventional stores
      if (t % 4 == 0 && t / 4 < N_BYP / 4)
        for (int s = 0; s < 4; s++)
          stream.push_back(plain_st(1, BASE_B + addr_t'((t + s) * SECTOR_BYTES),
                                    bdata(t + s)));
    end
    foreach (win[i]) stream.push_back(win[i]);
    // six rows into a four-row region on GPU 1
    for (int i = 0; i < 6; i++) begin
      rows_o.push_back(100000 + i);
      for (int o = 0; o < 256; o += 32)
        stream.push_back(rowsp_st(8'h13, rowid_t'(100000 + i), o, 1'b0));
    end
    // unregistered MallocID on GPU 1
    for (int o = 0; o < 64; o += 32) stream.push_back(rowsp_st(8'h1F, 7, o, 1'b0));
    // malformed: misaligned offset, and a GPU beyond the system
    for (int i = 0; i < 3; i++) stream.push_back(rowsp_st(8'h12, 5, 16 + 32 * i, 1'b0));
    stream.push_back(rowsp_st(8'h92, 5, 0, 1'b0));
    // conventional stores to a sink GPU
    for (int i = 0; i < 8; i++) begin
      stream.push_back(plain_st(4, 48'h0000_7000_0000 + addr_t'(i * 32), bdata(i)));
      n_sent_sink[4]++;
    end
    foreach (late[i]) stream.push_back(late[i]);
  endtask

  task automatic drive();
    foreach (stream[i]) begin
      while ($urandom % 8 == 0) begin
        @(negedge clk);
        sm_valid[0] = 0;
      end
      @(negedge clk);
      sm_valid[0] = 1;
      sm_txn[0]   = stream[i];
      do @(negedge clk); while (!sm_fire);
      sm_valid[0] = 0;
    end
  endtask

  // --------------------------------------------------- final checks
  task automatic check_region(int h, mid_t m, addr_t base, int rows [$], int nlines,
                              int max_rows, string name);
    int seen [int];
    int n;
    n = 0;
    for (int lr = 0; lr < max_rows; lr++) begin
      logic [ADDR_W:0] k0;
      int r;
      k0 = {1'(h), base + addr_t'(lr * ROWB)};
      if (!mem.exists(k0)) break;
      r = int'(mem[k0][239:220]);
      check(mem[k0][247:240] == m, $sformatf("%s row %0d MallocID", name, lr));
      check(!seen.exists(r), $sformatf("%s RowID %0d stored once", name, r));
      seen[r] = lr;
      for (int o = 0; o < nlines * 128; o += 32) begin
        logic [ADDR_W:0] k;
        if (o >= 256 && o != 256) continue;
        k = {1'(h), base + addr_t'(lr * ROWB + o)};
        check(mem.exists(k) && mem[k] == sdata(m, rowid_t'(r), 16'(o)),
              $sformatf("%s LocalRowID %0d offset %0d data", name, lr, o));
      end
      n++;
    end
    check(n == max_rows || !mem.exists({1'(h), base + addr_t'(n * ROWB + 32)}),
          $sformatf("%s nothing written after the last row", name));
    foreach (rows[i]) if (n == rows.size()) check(seen.exists(rows[i]),
          $sformatf("%s RowID %0d present", name, rows[i]));
    if (max_rows >= rows.size())
      check(n == rows.size(), $sformatf("%s holds %0d rows, expected %0d", name, n, rows.size()));
    else
      check(n == max_rows, $sformatf("%s holds %0d rows, expected %0d", name, n, max_rows));
  endtask

  initial begin
    #50_000_000;
    $display("FAIL watchdog at cycle %0d", cyc);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int quiet;
    for (int h = 0; h < 2; h++) begin
      sm_valid[h] = 0; sm_txn[h] = '0; mmio_wr_valid[h] = 0;
      mmio_addr[h] = '0; mmio_wdata[h] = '0;
      ack_valid[h] = 0; ack_addr[h] = '0; ack_sectors[h] = '0;
      sp_rsp_valid[h] = 0; sp_rsp_rdata[h] = '0;
      mem_wr_ready[h] = 1; sp_req_ready[h] = 1;
      dst_ready[h] = '1; sm_txn[h] = '0;
    end
    for (int g = 0; g < NG; g++) begin sink_sec[g] = 0; n_sent_sink[g] = 0; end
    for (int g = 0; g < NGRP; g++) exp_cnt[g] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    build();
    // --- configuration, as the driver would do before the kernels
    region(0, 8'h02, BASE_A, 48'(2048 * ROWB), 48'(ROWB));
    region(1, 8'h12, BASE_A, 48'(2048 * ROWB), 48'(ROWB));
    region(1, 8'h13, BASE_O, 48'(4 * ROWB), 48'(ROWB));
    for (int g = 0; g < N_DT_GRP; g++)
      dt_entry(1, g, BASE_A + addr_t'(g * GRP_ROWS * ROWB),
               BASE_A + addr_t'((g + 1) * GRP_ROWS * ROWB - 1), g);
    dt_entry(1, N_DT_GRP, BASE_B, BASE_B + addr_t'(N_BYP * SECTOR_BYTES - 1), BYP_GRP);
    thr_total = rows_a1.size() * 9 + N_BYP + 4 * 8;
    mmio(1, 12'h200, 64'(THR_TB));
    mmio(1, 12'h208, 64'(thr_total));
    mmio(1, 12'h210, 64'd1);
    @(negedge clk);
    dam_track = 1;
    $display("rows: gpu0 %0d, gpu1 %0d (late source info %0d), stores %0d",
             rows_a0.size(), rows_a1.size(), n_late, stream.size());

    drive();
    // drain: wait until nothing moved for a while
    quiet = 0;
    while (quiet < 400) begin
      @(negedge clk);
      if (tx_valid[0] || mem_wr_valid[0] || mem_wr_valid[1] || ackq[0].size() > 0 ||
          ackq[1].size() > 0 || ack_valid[0] || ack_valid[1]) quiet = 0;
      else quiet++;
    end
    repeat (3) @(negedge clk);

    // --- data placement
    check_region(0, 8'h02, BASE_A, rows_a0, 3, 2048, "GPU0 region 2");
    check_region(1, 8'h12, BASE_A, rows_a1, 3, 2048, "GPU1 region 2");
    check_region(1, 8'h13, BASE_O, rows_o, 2, 4, "GPU1 region 3");
    for (int i = 0; i < N_BYP; i++) begin
      logic [ADDR_W:0] k;
      k = {1'b1, BASE_B + addr_t'(i * SECTOR_BYTES)};
      check(mem.exists(k) && mem[k] == bdata(i), $sformatf("st. sector %0d at its address", i));
    end
    for (int g = 2; g < NG; g++)
      check(sink_sec[g] == n_sent_sink[g],
            $sformatf("GPU %0d received %0d sectors, sent %0d", g, sink_sec[g], n_sent_sink[g]));

    // --- DAM
    check(all_ready[1], "AllReady at the end");
    check(acked1 == thr_total, $sformatf("acknowledged %0d sectors, expected %0d", acked1, thr_total));
    for (int g = 0; g < NGRP; g++) begin
      check(tb_dealloc[1][g] == (exp_cnt[g] == 0), $sformatf("dealloc of group %0d", g));
      check(tb_ready[1][g] == (exp_cnt[g] >= THR_TB), $sformatf("Ready of group %0d", g));
    end
    check(tb_ready[1][BYP_GRP], "group of the st. stores Ready");
    check(tb_ready[1][rows_a1.size() / GRP_ROWS - 1], "last full row group Ready");

    // --- mechanisms
    $display("merge %0d timeout %0d stall %0d congestion-skip %0d nop-packets %0d",
             n_merge, n_timeout, n_stall, n_cong, n_nop_pkts);
    $display("aau hit %0d alloc %0d evict %0d restore %0d overflow %0d unreg %0d",
             n_hit, n_alloc, n_evict, n_restore, n_overflow, n_unreg);
    $display("bypass %0d decode-drop %0d ready %0d allready-at %0d dealloc %0d sink-pkts %0d cycles %0d",
             n_bypass, n_drop, n_ready_rise, allready_at, $countones(tb_dealloc[1]),
             sink_pkts, cyc);
    check(n_merge > 0,     "mechanism: RPM merge");
    check(n_timeout > 0,   "mechanism: RPM timer bypass");
    check(n_stall > 0,     "mechanism: RPM stall on a full partition");
    check(n_cong > 0,      "mechanism: congested link skipped");
    check(n_nop_pkts > 0,  "mechanism: .nop packets");
    check(n_hit > 0,       "mechanism: AAU RAT hit");
    check(n_alloc == rows_a0.size() + rows_a1.size() + 6,
          $sformatf("mechanism: AAU allocations %0d", n_alloc));
    check(n_evict > 0,     "mechanism: RAT eviction");
    check(n_restore > 0,   "mechanism: RAT restore");
    check(n_overflow >= 4, "mechanism: region overflow");
    check(n_unreg > 0,     "mechanism: unregistered MallocID");
    check(n_bypass > 0,    "mechanism: st. bypass of the AAU");
    check(n_drop == 4,     $sformatf("mechanism: malformed stores dropped (%0d)", n_drop));
    check(n_aptfull == 0,  "no APT overflow");
    check(n_ready_rise > 0, "mechanism: TB group Ready");
    check(allready_at > 0, "mechanism: AllReady");
    check(tb_dealloc[1] != '0, "mechanism: dealloc of empty groups");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
