// tb_aau: self-checking test of the Address Allocation Unit (with its APT and
// RAT).
//
// A small RAT (2 banks x 2 ways) forces evictions. The spill area is a
// behavioural memory here: random request acceptance and 1-6 cycle read
// latency. Two regions are registered; random st.rowsp packets arrive for
// interleaved rows, and a reference assigns LocalRowIDs per region in
// first-arrival order, so every write must land at
//   BaseAddr + LocalRowID * RowSize + RowOffset
// with the packet's mask and data, in arrival order. Checked besides:
//   * rows evicted from the RAT are restored from the spill area with the
//     same LocalRowID (restore and evict events seen);
//   * a region that runs out of AddrRange drops the excess rows (overflow);
//   * packets of an unregistered MallocID are dropped;
//   * reinitialising a region restarts allocation at LocalRowID 0 and never
//     restores a mapping spilled before the reinitialisation;
//   * resident rows stream at one write per cycle.
module tb_aau;
  import moehub_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       cfg_valid = 0, cfg_free = 0, cfg_err;
  mid_t       cfg_mid = 0;
  addr_t      cfg_base = 0, cfg_range = 0, cfg_rowsize = 0;
  logic       in_valid = 0, in_ready, out_valid, out_ready;
  line_pkt_t  in_pkt;
  mem_wr_t    out_wr;
  logic       sp_req_valid, sp_req_ready, sp_req_we, sp_rsp_valid;
  logic [RAT_KEY_W-1:0] sp_req_key;
  spill_rec_t sp_req_wdata, sp_rsp_rdata;
  logic       ev_hit, ev_alloc, ev_restore, ev_evict, ev_overflow, ev_unreg;
  int checks = 0, failures = 0;
  int n_hit = 0, n_alloc = 0, n_restore = 0, n_evict = 0, n_ovf = 0, n_unreg = 0;
  longint cyc = 0;

  aau #(.IN_DEPTH(4), .OUT_DEPTH(4), .N_REGIONS(4), .RAT_BANKS(2), .RAT_WAYS(2)) dut (
    .clk, .rst_n, .cfg_valid, .cfg_free, .cfg_mid, .cfg_base, .cfg_range, .cfg_rowsize,
    .cfg_err, .in_valid, .in_ready, .in_pkt, .out_valid, .out_ready, .out_wr,
    .sp_req_valid, .sp_req_ready, .sp_req_we, .sp_req_key, .sp_req_wdata,
    .sp_rsp_valid, .sp_rsp_rdata,
    .ev_hit, .ev_alloc, .ev_restore, .ev_evict, .ev_overflow, .ev_unreg);

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0d)", what, cyc); end
  endtask

  // ------------------------------------------------ spill area model
  spill_rec_t spill [logic [RAT_KEY_W-1:0]];
  int         rd_wait = -1;
  logic [RAT_KEY_W-1:0] rd_key;
  always @(negedge clk) sp_req_ready = ($urandom % 4) != 0;
  always @(posedge clk) begin
    sp_rsp_valid <= 1'b0;
    if (rst_n && sp_req_valid && sp_req_ready) begin
      if (sp_req_we) spill[sp_req_key] = sp_req_wdata;
      else begin
        rd_wait = 1 + $urandom % 6;
        rd_key  = sp_req_key;
      end
    end else if (rd_wait > 0) begin
      rd_wait--;
      if (rd_wait == 0) begin
        sp_rsp_valid <= 1'b1;
        sp_rsp_rdata <= spill.exists(rd_key) ? spill[rd_key] : '0;
        rd_wait = -1;
      end
    end
  end

  // ------------------------------------------------ reference
  typedef struct { addr_t base; addr_t range; addr_t rowsize; int next; int lrow [int]; logic valid; } region_t;
  region_t reg_m [int];
  mem_wr_t exp_q[$];
  longint  out_t[$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin
      out_t.push_back(cyc);
      check(exp_q.size() > 0, "unexpected write");
      if (exp_q.size() > 0) begin
        mem_wr_t e;
        e = exp_q.pop_front();
        check(out_wr.addr == e.addr, $sformatf("address got %h exp %h", out_wr.addr, e.addr));
        check(out_wr.mask == e.mask && out_wr.data == e.data, "mask/data");
      end
    end
    if (rst_n) begin
    n_hit += ev_hit; n_alloc += ev_alloc; n_restore += ev_restore;
    n_evict += ev_evict; n_ovf += ev_overflow; n_unreg += ev_unreg;
    end
  end

  task automatic region(int mid, addr_t base, addr_t range, addr_t rowsize);
    @(negedge clk);
    cfg_valid = 1; cfg_free = 0; cfg_mid = mid_t'(mid);
    cfg_base = base; cfg_range = range; cfg_rowsize = rowsize;
    @(negedge clk) cfg_valid = 0;
    reg_m[mid].base = base; reg_m[mid].range = range; reg_m[mid].rowsize = rowsize;
    reg_m[mid].next = 0; reg_m[mid].lrow.delete(); reg_m[mid].valid = 1;
  endtask

  task automatic send(int mid, int rowid, int line);
    line_pkt_t p;
    p = '0;
    p.rowsp = 1; p.mid = mid_t'(mid); p.rowid = rowid_t'(rowid); p.rowline = 9'(line);
    p.mask = 4'($urandom % 15 + 1);
    for (int i = 0; i < LINE_W / 32; i++) p.data[i*32 +: 32] = $urandom;
    if (reg_m.exists(mid) && reg_m[mid].valid) begin
      int l;
      if (!reg_m[mid].lrow.exists(rowid)) begin
        reg_m[mid].lrow[rowid] = reg_m[mid].next;
        reg_m[mid].next++;
      end
      l = reg_m[mid].lrow[rowid];
      if (addr_t'(l) * reg_m[mid].rowsize + addr_t'(line) * 128 + 128 <= reg_m[mid].range)
        exp_q.push_back('{reg_m[mid].base + addr_t'(l) * reg_m[mid].rowsize + addr_t'(line) * 128,
                          p.mask, p.data});
    end
    @(negedge clk);
    in_pkt = p; in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic drain();
    repeat (4000) begin
      @(posedge clk);
      if (exp_q.size() == 0 && !out_valid) break;
    end
    repeat (20) @(posedge clk);
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    region(8'h13, 48'h1_0000_0000, 48'd256 * 64, 48'd256);   // 2 lines per row
    region(8'h15, 48'h2_0000_0000, 48'd128 * 8, 48'd128);    // 8 rows only
    // random interleaved traffic, random XBAR back-pressure
    fork
      begin
        for (int i = 0; i < 400; i++) begin
          int r;
          r = $urandom % 3;
          if (r == 0)      send(8'h15, 1000 + $urandom % 12, 0);
          else if (r == 1) send(8'h13, $urandom % 40, $urandom % 2);
          else             send(8'h13, 10 + $urandom % 6, $urandom % 2);
          if (i % 97 == 0) send(8'h77, i, 0);              // unregistered
        end
      end
      begin
        repeat (6000) @(negedge clk) out_ready = ($urandom % 4) != 0;
        out_ready = 1;
      end
    join_any
    out_ready = 1;
    drain();
    check(exp_q.size() == 0, "all expected writes seen");
    check(n_restore > 0, "restore from spill exercised");
    check(n_evict > 0, "eviction exercised");
    check(n_ovf > 0, "overflow exercised");
    check(n_unreg == 5, "unregistered packets dropped");
    check(n_alloc == reg_m[8'h13].next + reg_m[8'h15].next, "one allocation per distinct row");

    // reinitialise region 0x13: allocation restarts, old spills ignored
    region(8'h13, 48'h3_0000_0000, 48'd256 * 64, 48'd256);
    for (int i = 0; i < 30; i++) send(8'h13, 39 - i, 0);
    drain();
    check(exp_q.size() == 0, "writes after reinit");

    // streaming: a resident row writes once per cycle
    out_t.delete();
    send(8'h13, 39, 1);
    drain();
    out_t.delete();
    fork
      begin
        for (int i = 0; i < 3; i++) begin
          line_pkt_t p;
          p = '0; p.rowsp = 1; p.mid = 8'h13; p.rowid = 39; p.rowline = 1; p.mask = 4'hf;
          exp_q.push_back('{48'h3_0000_0000 + 48'd128, 4'hf, '0});
          @(negedge clk); in_pkt = p; in_valid = 1;
          @(posedge clk); while (!in_ready) @(posedge clk);
        end
        #1 in_valid = 0;
      end
    join
    drain();
    check(out_t.size() == 3, "three streamed writes");
    if (out_t.size() == 3) check(out_t[2] - out_t[0] == 2, "one write per cycle on hits");

    $display("events: hit %0d alloc %0d restore %0d evict %0d overflow %0d unreg %0d",
             n_hit, n_alloc, n_restore, n_evict, n_ovf, n_unreg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
