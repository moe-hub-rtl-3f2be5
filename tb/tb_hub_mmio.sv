// tb_hub_mmio: self-checking test of the hub register block.
//
// Writes random region parameters and Dependency Table entries through the
// register map and checks that each commit write produces exactly one command
// pulse, one cycle later, carrying the staged values; that the thresholds hold
// their values; that DAM_CTRL pulses clear; and that writes to unmapped
// offsets change nothing.
module tb_hub_mmio;
  import moehub_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        wv = 0;
  logic [11:0] wa = 0;
  logic [63:0] wd = 0;
  logic        apt_cfg_valid, apt_cfg_free, dt_wr_valid, dt_wr_en, dam_clear;
  mid_t        apt_cfg_mid;
  addr_t       apt_cfg_base, apt_cfg_range, apt_cfg_rowsize, dt_wr_start, dt_wr_end;
  logic [7:0]  dt_wr_idx, dt_wr_group;
  logic [31:0] thr_tb, thr_total;
  int checks = 0, failures = 0, n_apt = 0, n_dt = 0, n_clr = 0;

  hub_mmio dut (.clk, .rst_n, .mmio_wr_valid(wv), .mmio_addr(wa), .mmio_wdata(wd),
    .apt_cfg_valid, .apt_cfg_free, .apt_cfg_mid, .apt_cfg_base, .apt_cfg_range,
    .apt_cfg_rowsize, .dt_wr_valid, .dt_wr_idx, .dt_wr_en, .dt_wr_start, .dt_wr_end,
    .dt_wr_group, .thr_tb, .thr_total, .dam_clear);

  always @(posedge clk) if (rst_n) begin
    n_apt += apt_cfg_valid; n_dt += dt_wr_valid; n_clr += dam_clear;
  end

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [11:0] a, logic [63:0] d);
    @(negedge clk); wv = 1; wa = a; wd = d;
    @(negedge clk); wv = 0;
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      logic [7:0] mid; logic [47:0] b, r, s, lo, hi; logic [7:0] idx, g; logic en, fr;
      int a0, d0;
      mid = 8'($urandom); b = {16'($urandom), 32'($urandom)}; r = 48'($urandom);
      s = 48'($urandom); fr = 1'($urandom);
      a0 = n_apt;
      wr(12'h000, {56'hffffff, mid}); wr(12'h008, {16'hdead, b});
      wr(12'h010, 64'(r)); wr(12'h018, 64'(s));
      check(n_apt == a0, "no command before commit");
      @(negedge clk); wv = 1; wa = 12'h020; wd = 64'(fr);
      @(negedge clk); wv = 0;
      check(apt_cfg_valid && apt_cfg_free == fr && apt_cfg_mid == mid &&
            apt_cfg_base == b && apt_cfg_range == r && apt_cfg_rowsize == s, "APT command");
      @(negedge clk);
      check(!apt_cfg_valid && n_apt == a0 + 1, "single APT pulse");
      lo = 48'($urandom); hi = 48'($urandom); idx = 8'($urandom); g = 8'($urandom); en = 1'($urandom);
      d0 = n_dt;
      wr(12'h100, 64'(lo)); wr(12'h108, 64'(hi)); wr(12'h110, 64'(g));
      wr(12'h3f8, 64'hffff_ffff_ffff_ffff);     // unmapped
      @(negedge clk); wv = 1; wa = 12'h118; wd = {55'h0, en, idx};
      @(negedge clk); wv = 0;
      check(dt_wr_valid && dt_wr_idx == idx && dt_wr_en == en && dt_wr_start == lo &&
            dt_wr_end == hi && dt_wr_group == g, "DT command");
      @(negedge clk);
      check(n_dt == d0 + 1, "single DT pulse");
      wr(12'h200, 64'(i * 3 + 1)); wr(12'h208, 64'(i * 1000 + 7));
      check(thr_tb == 32'(i * 3 + 1) && thr_total == 32'(i * 1000 + 7), "thresholds");
      wr(12'h210, 64'h0);
      @(negedge clk);
      check(n_clr == i + 1, "clear pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
