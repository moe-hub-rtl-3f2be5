// tb_dam: self-checking test of the Data Availability Manager.
//
// The Dependency Table is loaded with the two ranges of the DAM figure
// (0xc0000000-0xc007ffff -> group 0, 0xc0080000-0xc00fffff -> group 1), a range
// straddling both (group 2) and a second range of group 0 inside the first
// (so one acknowledgment can count twice for group 0). Random acknowledgments
// of 1-4 sectors,
// some outside every range, are applied one per cycle with gaps. A reference
// counts per group and in total; one cycle after every acknowledgment tb_ready
// must equal (count >= TB threshold), all_ready must equal (total >= total
// threshold) and tb_dealloc must mark exactly the zero-count groups once
// all_ready is up. A clear must reset everything for the next kernel.
module tb_dam;
  import moehub_pkg::*;

  localparam int unsigned NE = 8, NG = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          dt_wr_valid = 0, dt_wr_en = 0, clear = 0, ack_valid = 0;
  logic [7:0]    dt_wr_idx = 0, dt_wr_group = 0;
  addr_t         dt_wr_start = 0, dt_wr_end = 0, ack_addr = 0;
  logic [2:0]    ack_sectors = 0;
  logic [31:0]   thr_tb = 0, thr_total = 0;
  logic [NG-1:0] tb_ready, tb_dealloc;
  logic          all_ready;
  int checks = 0, failures = 0;

  dam #(.DT_ENTRIES(NE), .TB_GROUPS(NG), .CNT_W(32)) dut (.clk, .rst_n,
    .dt_wr_valid, .dt_wr_idx, .dt_wr_en, .dt_wr_start, .dt_wr_end, .dt_wr_group,
    .thr_tb, .thr_total, .clear, .ack_valid, .ack_addr, .ack_sectors, .tb_ready, .all_ready, .tb_dealloc);

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  addr_t lo[4] = '{48'hc0000000, 48'hc0080000, 48'hc0070000, 48'hc0000000};
  addr_t hi[4] = '{48'hc007ffff, 48'hc00fffff, 48'hc008ffff, 48'hc000ffff};
  int    gr[4] = '{0, 1, 2, 0};
  int    cnt[NG];
  int    total;

  task automatic dt_write(int idx, addr_t a, addr_t b, int g);
    @(negedge clk);
    dt_wr_valid = 1; dt_wr_idx = 8'(idx); dt_wr_en = 1;
    dt_wr_start = a; dt_wr_end = b; dt_wr_group = 8'(g);
    @(negedge clk) dt_wr_valid = 0;
  endtask

  task automatic run_kernel(int n_acks);
    foreach (cnt[g]) cnt[g] = 0;
    total = 0;
    for (int i = 0; i < n_acks; i++) begin
      addr_t a;
      case ($urandom % 4)
        0: a = 48'hc0000000 + 48'($urandom % 48'h10000);
        1: a = 48'hc0000000 + 48'($urandom % 48'h80000);
        2: a = 48'hc0070000 + 48'($urandom % 48'h30000);
        default: a = 48'hd0000000 + 48'($urandom % 48'h1000);
      endcase
      ack_valid = 1; ack_addr = a; ack_sectors = 3'(1 + $urandom % 4);
      for (int e = 0; e < 4; e++) if (a >= lo[e] && a <= hi[e]) cnt[gr[e]] += int'(ack_sectors);
      total += int'(ack_sectors);
      @(negedge clk);
      ack_valid = 0;
      for (int g = 0; g < NG; g++)
        check(tb_ready[g] == (cnt[g] >= int'(thr_tb) && cnt[g] > 0), $sformatf("ready g%0d cnt %0d", g, cnt[g]));
      check(all_ready == (total >= int'(thr_total)), "all_ready");
      for (int g = 0; g < NG; g++)
        check(tb_dealloc[g] == (all_ready && cnt[g] == 0), "dealloc");
      if ($urandom % 3 == 0) @(negedge clk);
    end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 4; e++) dt_write(e, lo[e], hi[e], gr[e]);
    thr_tb = 30; thr_total = 150;
    run_kernel(80);
    check(all_ready, "kernel 1 reached AllReady");
    check(tb_dealloc[NG-1] && !tb_dealloc[0], "unused group deallocated, used group kept");
    // next kernel: clear and use other thresholds
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    check(tb_ready == '0 && !all_ready, "clear");
    thr_tb = 12; thr_total = 60;
    run_kernel(30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
