// tb_rpm: self-checking test of the Runtime Packet Manager.
//
// Scenarios, each compared with packets predicted here:
//   1. four sectors of one st.rowsp line merge into one full line that leaves
//      one cycle after the last sector (3 merge events);
//   2. consumer-aware order inside one partition: normal lines by rising RowID,
//      then .nop lines by rising RowID;
//   3. round-robin across partitions whose links are ready;
//   4. a congested destination (dst_ready low) does not hold back the others;
//   5. timer bypass: a lone sector leaves on the (TIMEOUT+1)th clock edge after it was
//      accepted, as a partial line;
//   6. st. and st.rowsp lines, and normal and .nop lines, never merge;
//   7. a full partition stalls the next request (in_ready low).
module tb_rpm;
  import moehub_pkg::*;

  localparam int unsigned NG = 8, NE = 4, TO = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          in_valid = 0, in_ready, out_valid, out_ready = 1;
  hub_req_t      in_req;
  logic [NG-1:0] dst_ready = '1;
  line_pkt_t     out_pkt;
  logic          ev_merge, ev_timeout, ev_stall;
  int checks = 0, failures = 0, n_merge = 0, n_timeout = 0, n_stall = 0;
  longint cyc = 0;

  rpm #(.N_GPUS(NG), .ENTRIES(NE), .TIMEOUT(TO)) dut (
    .clk, .rst_n, .my_gpu(4'd1), .in_valid, .in_ready, .in_req, .dst_ready,
    .out_valid, .out_ready, .out_pkt, .ev_merge, .ev_timeout, .ev_stall);

  line_pkt_t got[$];
  longint    got_t[$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin
      got.push_back(out_pkt);
      got_t.push_back(cyc);
    end
    if (ev_merge) n_merge++;
    if (ev_timeout) n_timeout++;
    if (ev_stall) n_stall++;
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0d)", what, cyc); end
  endtask

  function automatic logic [SECTOR_W-1:0] pat(int a, int b);
    return {8{32'(a * 65536 + b)}};
  endfunction

  function automatic hub_req_t rs(int dst, int rowid, int sec, logic nop, int line = 0);
    hub_req_t r = '0;
    r.rowsp = 1; r.nop = nop; r.dst = gpu_t'(dst); r.mid = {gpu_t'(dst), 4'd3};
    r.rowid = rowid_t'(rowid); r.rowoff = 16'(line * 128 + sec * 32);
    r.data = pat(rowid, sec);
    return r;
  endfunction

  // Offer one request and wait until it is accepted; returns accept cycle.
  task automatic send(hub_req_t r, output longint t);
    @(negedge clk);
    in_req = r; in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    t = cyc;
    #1 in_valid = 0;
  endtask

  task automatic send_line(int dst, int rowid, logic nop);
    longint t;
    for (int s = 0; s < SECTORS; s++) send(rs(dst, rowid, s, nop), t);
  endtask

  task automatic expect_row(int idx, int dst, int rowid, logic nop, logic [3:0] mask);
    check(got.size() > idx, "packet count");
    if (got.size() > idx) begin
      check(got[idx].dst == gpu_t'(dst), $sformatf("dst pkt %0d", idx));
      check(got[idx].rowid == rowid_t'(rowid), $sformatf("rowid pkt %0d got %0d exp %0d", idx, got[idx].rowid, rowid));
      check(got[idx].nop == nop && got[idx].rowsp, "flags");
      check(got[idx].mask == mask, "mask");
      check(got[idx].src == 4'd1, "src");
      for (int s = 0; s < SECTORS; s++)
        if (mask[s]) check(got[idx].data[s*SECTOR_W +: SECTOR_W] == pat(rowid, s), "data");
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. merge to a full line, latency one cycle after the last sector
    send(rs(2, 40, 2, 0), t0);
    send(rs(2, 40, 0, 0), t0);
    send(rs(2, 40, 3, 0), t0);
    send(rs(2, 40, 1, 0), t1);
    repeat (3) @(posedge clk);
    check(got.size() == 1, "one merged packet");
    expect_row(0, 2, 40, 0, 4'hf);
    if (got_t.size() > 0) check(got_t[0] == t1 + 1, $sformatf("full line latency %0d", got_t[0] - t1));
    check(n_merge == 3, "three merges");
    got.delete(); got_t.delete();

    // 2. consumer-aware order in partition 3
    dst_ready[3] = 0;
    send_line(3, 9, 0);
    send_line(3, 5, 1);
    send_line(3, 7, 0);
    send_line(3, 3, 1);
    @(negedge clk) dst_ready[3] = 1;
    repeat (8) @(posedge clk);
    expect_row(0, 3, 7, 0, 4'hf);
    expect_row(1, 3, 9, 0, 4'hf);
    expect_row(2, 3, 3, 1, 4'hf);
    expect_row(3, 3, 5, 1, 4'hf);
    got.delete(); got_t.delete();

    // 3. round robin across partitions 1, 4, 6
    @(negedge clk) dst_ready = '0;
    send_line(6, 100, 0); send_line(6, 101, 0);
    send_line(1, 110, 0); send_line(1, 111, 0);
    send_line(4, 120, 0); send_line(4, 121, 0);
    @(negedge clk) dst_ready = '1;
    repeat (10) @(posedge clk);
    check(got.size() == 6, "six packets");
    if (got.size() == 6) begin
      // after the last grant (partition 3) the pointer sits at 4
      check(got[0].dst == 4 && got[1].dst == 6 && got[2].dst == 1 &&
            got[3].dst == 4 && got[4].dst == 6 && got[5].dst == 1, "round-robin order");
    end
    got.delete(); got_t.delete();

    // 4. congested destination 5 does not block destination 2
    @(negedge clk) dst_ready = '1; dst_ready[5] = 0;
    send_line(5, 200, 0);
    send_line(2, 201, 0);
    repeat (4) @(posedge clk);
    check(got.size() == 1, "only the uncongested line left");
    if (got.size() == 1) check(got[0].dst == 2, "uncongested destination first");
    @(negedge clk) dst_ready[5] = 1;
    repeat (3) @(posedge clk);
    check(got.size() == 2, "congested line leaves when ready");
    got.delete(); got_t.delete();

    // 5. timer bypass of a partial line
    n_timeout = 0;
    send(rs(7, 300, 1, 0), t0);
    repeat (TO + 5) @(posedge clk);
    check(got.size() == 1, "partial line released");
    if (got.size() == 1) begin
      expect_row(0, 7, 300, 0, 4'b0010);
      check(got_t[0] - t0 == TO + 1, $sformatf("timeout latency %0d", got_t[0] - t0));
    end
    check(n_timeout == 1, "timeout event");
    got.delete(); got_t.delete();

    // 6. no merge across kind or priority
    n_merge = 0;
    @(negedge clk) dst_ready[6] = 0;
    begin
      hub_req_t a;
      a = rs(6, 0, 0, 0);            // rowsp, row 0, line 0
      send(a, t0);
      a.nop = 1; send(a, t0);        // same row, .nop
      a = '0; a.dst = 6; a.addr = 48'h0; a.data = pat(0, 0);  // st. to address 0
      send(a, t0);
    end
    check(n_merge == 0, "no merge across kind/priority");
    @(negedge clk) dst_ready[6] = 1;
    repeat (TO + 4) @(posedge clk);
    check(got.size() == 3, "three separate partial lines");
    got.delete(); got_t.delete();

    // 7. full partition stalls
    n_stall = 0;
    @(negedge clk) dst_ready[4] = 0;
    for (int r = 0; r < NE; r++) begin
      send(rs(4, 500 + r, 0, 0), t0);
    end
    @(negedge clk);
    in_req = rs(4, 600, 0, 0); in_valid = 1;
    @(posedge clk); #1;
    check(!in_ready, "in_ready low when partition full");
    check(n_stall > 0, "stall event");
    @(negedge clk) dst_ready[4] = 1;
    @(posedge clk); while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
    repeat (TO + 6) @(posedge clk);
    check(got.size() == NE + 1, "all stalled lines drained");

    $display("merges/timeouts/stalls seen: %0d/%0d/%0d", n_merge, n_timeout, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
