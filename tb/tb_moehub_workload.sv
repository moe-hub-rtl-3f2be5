// tb_moehub_workload: the dispatch of one MoE layer for each model the
// MoE-Hub evaluation uses, at the real row sizes and expert placement, with a
// small number of tokens.
//
// Models (hidden size, top-k, experts): Mixtral 8x7B (4096, 2, 8),
// Qwen2-MoE-2.7B (2048, 4, 64) and Phi-3.5-MoE (4096, 2, 16). Eight GPUs;
// expert e lives on GPU e % 8 in region e / 8 of that GPU, so a region holds
// one expert. A token row is hidden * 2 bytes of bf16 activations (st.rowsp)
// followed by one 32-byte source-information sector (st.rowsp.nop); RowSize is
// the data plus one 128-byte line. GPU 0 dispatches TOKENS tokens, each to
// top-k distinct random experts, with RowID = token * k + j. The sectors of
// one token are stored in order, tokens one after another, as a dispatch
// kernel that writes each row when its expert is known would.
//
// The same two full-size hubs, switch, memory and spill models as in the
// end-to-end testbench are used. Packets for GPU 0 loop back, packets for GPU 1
// go to the second hub, the rest go to a sink. Between models the regions are
// registered again and the DAM is cleared.
//
// Checks per model: every expert region on GPU 0 and GPU 1 holds exactly the
// rows routed to that expert, densely from LocalRowID 0 and intact; the sinks
// receive every sector sent to GPUs 2-7; on GPU 1 the DAM has one TB group per
// row slot of the GPU 1 expert that received most rows, with the row's sector count as threshold: tb_ready
// follows a reference one cycle after each acknowledgment, the first row is
// Ready before the whole dispatch has arrived (the early start the hub exists
// for), and AllReady rises exactly at the last sector sent to GPU 1.
module tb_moehub_workload;
  import moehub_pkg::*;

  localparam int    NG     = 8;
  localparam int    NGRP   = 64;
  localparam int    TOKENS = 8;
  localparam addr_t BASE   = 48'h0000_1000_0000;  // region r at BASE + r * REG_B
  localparam addr_t REG_B  = 48'h0000_0100_0000;

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

  // Links mostly ready.
  always @(negedge clk) begin
    logic [NG-1:0] r;
    for (int g = 0; g < NG; g++) r[g] = ($urandom % 8) != 0;
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

  // ------------------------------------------------------- model setup
  int    H, K, E, ROWB, DB, SPR;   // hidden, top-k, experts, row bytes, data bytes, sectors per row
  string mname;
  int    rows_at [int][$];         // expert -> RowIDs routed to it
  int    n_sent_sink [NG];
  int    sec_to_g1;
  int    dam_e;                    // expert on GPU 1 whose rows the DAM tracks

  function automatic mid_t mid_of(int e);
    return mid_t'({4'(e % NG), 4'(e / NG)});
  endfunction

  // --------------------------------------------- DAM reference (hub 1)
  // group g = LocalRowID g of expert dam_e's region
  int   exp_cnt [NGRP];
  logic [NGRP-1:0] exp_ready = '0;
  int   acked1 = 0, thr_total = 0, first_ready_at = -1, all_ready_at = -1;
  logic prev_all = 0, dam_track = 0;
  always @(posedge clk) begin
    if (rst_n && dam_track) begin
      check(tb_ready[1] == exp_ready, "tb_ready follows the acknowledgments by one cycle");
      if (tb_ready[1] != '0 && first_ready_at < 0) first_ready_at = acked1;
      if (all_ready[1] && !prev_all) begin
        all_ready_at = acked1;
        check(acked1 == thr_total, $sformatf("%s: AllReady exactly at the last sector", mname));
      end
      prev_all <= all_ready[1];
      if (ack_valid[1]) begin
        addr_t b;
        b = BASE + REG_B * addr_t'(dam_e / NG);
        acked1 += int'(ack_sectors[1]);
        if (ack_addr[1] >= b && ack_addr[1] < b + addr_t'(NGRP * ROWB)) begin
          int g;
          g = int'((ack_addr[1] - b) / addr_t'(ROWB));
          exp_cnt[g] += int'(ack_sectors[1]);
          if (exp_cnt[g] >= SPR) exp_ready[g] <= 1'b1;
        end
      end
    end
  end

  int n_timeout = 0, n_merge = 0, n_hit = 0, n_alloc = 0;
  always @(posedge clk)
    if (rst_n)
      for (int h = 0; h < 2; h++) begin
        n_timeout += int'(ev[h].rpm_timeout);
        n_merge   += int'(ev[h].rpm_merge);
        n_hit     += int'(ev[h].aau_hit);
        n_alloc   += int'(ev[h].aau_alloc);
        if (ev[h].aau_overflow || ev[h].aau_unreg || ev[h].sm_drop || ev[h].apt_full)
          check(1'b0, "no drop in a well-formed dispatch");
      end

  // ------------------------------------------------------------ driver
  task automatic mmio(int h, logic [11:0] a, logic [63:0] d);
    @(negedge clk);
    mmio_wr_valid[h] = 1; mmio_addr[h] = a; mmio_wdata[h] = d;
    @(negedge clk);
    mmio_wr_valid[h] = 0;
  endtask

  logic sm_fire = 0;
  always @(posedge clk) sm_fire <= sm_valid[0] && sm_ready[0];

  sm_store_t sq [$];
  task automatic store(mid_t m, rowid_t r, int off, logic nop);
    sm_store_t s;
    s = '0;
    s.rowsp = 1'b1;
    s.nop   = nop;
    s.dreg  = (64'(m) << DREG_MID_LSB) | (64'(r) << DREG_ROWID_LSB) | 64'(off);
    s.data  = sdata(m, r, 16'(off));
    sq.push_back(s);
  endtask

  // issue the queued stores back to back, one per cycle when accepted
  task automatic drive();
    foreach (sq[i]) begin
      sm_valid[0] = 1;
      sm_txn[0]   = sq[i];
      do @(negedge clk); while (!sm_fire);
    end
    sm_valid[0] = 0;
    sq.delete();
  endtask

  task automatic wait_quiet();
    int quiet;
    quiet = 0;
    while (quiet < 400) begin
      @(negedge clk);
      if (tx_valid[0] || mem_wr_valid[0] || mem_wr_valid[1] || ackq[0].size() > 0 ||
          ackq[1].size() > 0 || ack_valid[0] || ack_valid[1]) quiet = 0;
      else quiet++;
    end
  endtask

  task automatic check_expert(int e);
    int h, n;
    addr_t base;
    int seen [int];
    h    = e % NG;
    base = BASE + REG_B * addr_t'(e / NG);
    n    = 0;
    for (int lr = 0; lr < rows_at[e].size() + 1; lr++) begin
      logic [ADDR_W:0] k0;
      int r;
      k0 = {1'(h), base + addr_t'(lr * ROWB)};
      if (!mem.exists(k0)) break;
      r = int'(mem[k0][239:220]);
      check(!seen.exists(r), $sformatf("%s expert %0d RowID %0d once", mname, e, r));
      seen[r] = lr;
      for (int o = 0; o <= DB; o += 32) begin
        logic [ADDR_W:0] k;
        k = {1'(h), base + addr_t'(lr * ROWB + o)};
        check(mem.exists(k) && mem[k] == sdata(mid_of(e), rowid_t'(r), 16'(o)),
              $sformatf("%s expert %0d LocalRowID %0d offset %0d", mname, e, lr, o));
      end
      n++;
    end
    check(n == rows_at[e].size(),
          $sformatf("%s expert %0d holds %0d rows, sent %0d", mname, e, n, rows_at[e].size()));
    foreach (rows_at[e][i])
      check(seen.exists(rows_at[e][i]), $sformatf("%s expert %0d has RowID %0d", mname, e, rows_at[e][i]));
  endtask

  task automatic run_model(string name, int hid, int k, int ne);
    mname = name; H = hid; K = k; E = ne;
    DB = H * 2; ROWB = DB + 128; SPR = DB / 32 + 1;
    rows_at.delete();
    mem.delete();
    for (int g = 0; g < NG; g++) n_sent_sink[g] = 0;
    for (int g = 2; g < NG; g++) sink_sec[g] = 0;
    for (int g = 0; g < NGRP; g++) exp_cnt[g] = 0;
    sec_to_g1 = 0;
    exp_ready = '0;
    acked1 = 0; first_ready_at = -1; all_ready_at = -1;
    n_alloc = 0;
    // routing
    for (int t = 0; t < TOKENS; t++) begin
      int pick [$];
      while (pick.size() < K) begin
        int e, dup;
        e = int'($urandom % E);
        dup = 0;
        foreach (pick[i]) if (pick[i] == e) dup = 1;
        if (!dup) pick.push_back(e);
      end
      foreach (pick[j]) rows_at[pick[j]].push_back(t * K + j);
    end
    for (int e = 0; e < E; e++) if (!rows_at.exists(e)) rows_at[e] = {};
    dam_e = 1;
    for (int e = 1; e < E; e += NG) if (rows_at[e].size() > rows_at[dam_e].size()) dam_e = e;
    // one region per expert on every GPU; DAM of GPU 1 on expert 1
    for (int e = 0; e < E; e++)
      if (e % NG < 2) begin
        mmio(e % NG, 12'h000, 64'(mid_of(e)));
        mmio(e % NG, 12'h008, 64'(BASE + REG_B * addr_t'(e / NG)));
        mmio(e % NG, 12'h010, 64'(TOKENS * ROWB));
        mmio(e % NG, 12'h018, 64'(ROWB));
        mmio(e % NG, 12'h020, 64'd0);
      end
    for (int e = 0; e < E; e++) begin
      if (e % NG == 1) sec_to_g1 += rows_at.exists(e) ? rows_at[e].size() * SPR : 0;
      if (e % NG >= 2 && rows_at.exists(e)) n_sent_sink[e % NG] += rows_at[e].size() * SPR;
    end
    for (int g = 0; g < NGRP; g++) begin
      addr_t b;
      b = BASE + REG_B * addr_t'(dam_e / NG);
      mmio(1, 12'h100, 64'(b + addr_t'(g * ROWB)));
      mmio(1, 12'h108, 64'(b + addr_t'((g + 1) * ROWB - 1)));
      mmio(1, 12'h110, 64'(g));
      mmio(1, 12'h118, 64'(g) | 64'h100);
    end
    thr_total = sec_to_g1;
    mmio(1, 12'h210, 64'd1);
    mmio(1, 12'h200, 64'(SPR));
    mmio(1, 12'h208, 64'(thr_total));
    @(negedge clk);
    dam_track = 1;
    // dispatch: tokens in order, each row's sectors in order
    for (int t = 0; t < TOKENS; t++)
      for (int e = 0; e < E; e++)
        if (rows_at.exists(e))
          foreach (rows_at[e][i])
            if (rows_at[e][i] / K == t) begin
              for (int o = 0; o < DB; o += 32) store(mid_of(e), rowid_t'(rows_at[e][i]), o, 1'b0);
              store(mid_of(e), rowid_t'(rows_at[e][i]), DB, 1'b1);
            end
    drive();
    wait_quiet();
    repeat (3) @(negedge clk);
    dam_track = 0;
    for (int e = 0; e < E; e++)
      if (e % NG < 2 && rows_at.exists(e)) check_expert(e);
    for (int g = 2; g < NG; g++)
      check(sink_sec[g] == n_sent_sink[g], $sformatf("%s GPU %0d got %0d sectors, sent %0d",
                                                     name, g, sink_sec[g], n_sent_sink[g]));
    check(all_ready[1] == (thr_total > 0), $sformatf("%s AllReady", name));
    if (rows_at[dam_e].size() > 1)
      check(first_ready_at >= 0 && first_ready_at < thr_total,
            $sformatf("%s first row Ready after %0d of %0d sectors", name, first_ready_at, thr_total));
    for (int g = 0; g < NGRP; g++)
      check(tb_ready[1][g] == (g < rows_at[dam_e].size()),
            $sformatf("%s Ready of row slot %0d", name, g));
    $display("%s: hidden %0d top-%0d of %0d, %0d tokens, %0d sectors to GPU 1, expert %0d: %0d rows, first Ready at %0d, cycles %0d",
             name, H, K, E, TOKENS, thr_total, dam_e, rows_at[dam_e].size(), first_ready_at, cyc);
  endtask

  initial begin
    #20_000_000;
    $display("FAIL watchdog at cycle %0d", cyc);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int h = 0; h < 2; h++) begin
      sm_valid[h] = 0; sm_txn[h] = '0; mmio_wr_valid[h] = 0;
      mmio_addr[h] = '0; mmio_wdata[h] = '0;
      ack_valid[h] = 0; ack_addr[h] = '0; ack_sectors[h] = '0;
      sp_rsp_valid[h] = 0; sp_rsp_rdata[h] = '0;
      mem_wr_ready[h] = 1; sp_req_ready[h] = 1;
      dst_ready[h] = '1;
    end
    for (int g = 0; g < NG; g++) sink_sec[g] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_model("Mixtral 8x7B", 4096, 2, 8);
    run_model("Qwen2-MoE-2.7B", 2048, 4, 64);
    run_model("Phi-3.5-MoE", 4096, 2, 16);
    check(n_merge > 0 && n_hit > 0 && n_timeout > 0, "merge, RAT hit and timer bypass seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
