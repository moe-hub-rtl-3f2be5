// tb_packetizer: self-checking test of the link packetizer and depacketizer.
//
// Phase A drives random line packets into the packetizer with an always-ready
// sink and checks every flit against the expected sequence (header holding
// all non-data fields, then two flits per valid sector, lowest sector first),
// the flit_last marks, and the rate: back-to-back packets of k valid sectors
// take exactly 1 + 2k cycles each.
// Phase B connects the packetizer to the depacketizer, applies random
// back-pressure at the depacketizer output and checks that every packet is
// rebuilt exactly (invalid sectors read as zero) and in order.
module tb_packetizer;
  import moehub_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      in_valid = 0, in_ready;
  line_pkt_t in_pkt;
  logic      f_valid, f_ready, f_last;
  flit_t     f;
  logic      d_flit_ready, o_valid, o_ready;
  line_pkt_t o_pkt;
  logic      phase_b = 0;
  int checks = 0, failures = 0;
  longint cyc = 0;

  packetizer u_p (.clk, .rst_n, .in_valid, .in_ready, .in_pkt,
    .flit_valid(f_valid), .flit_ready(f_ready), .flit(f), .flit_last(f_last));
  depacketizer u_d (.clk, .rst_n, .flit_valid(f_valid && phase_b), .flit_ready(d_flit_ready),
    .flit(f), .flit_last(f_last), .out_valid(o_valid), .out_ready(o_ready), .out_pkt(o_pkt));
  assign f_ready = phase_b ? d_flit_ready : 1'b1;

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0d)", what, cyc); end
  endtask

  function automatic line_pkt_t rnd_pkt();
    line_pkt_t p;
    p.rowsp = 1'($urandom); p.nop = 1'($urandom);
    p.dst = 4'($urandom); p.src = 4'($urandom);
    p.mask = 4'($urandom % 15 + 1);
    p.line_addr = {2{32'($urandom)}};
    p.mid = 8'($urandom); p.rowid = 20'($urandom); p.rowline = 9'($urandom);
    for (int i = 0; i < LINE_W / 32; i++) p.data[i*32 +: 32] = $urandom;
    return p;
  endfunction

  function automatic line_pkt_t clean(line_pkt_t p);
    for (int s = 0; s < SECTORS; s++)
      if (!p.mask[s]) p.data[s*SECTOR_W +: SECTOR_W] = '0;
    return p;
  endfunction

  // expected flit stream of phase A
  flit_t  exp_f[$];
  logic   exp_l[$];
  line_pkt_t sent[$];
  int     n_flits = 0;
  longint first_t = -1, last_t = -1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && !phase_b && f_valid && f_ready) begin
      n_flits++;
      if (first_t < 0) first_t = cyc;
      last_t = cyc;
      check(exp_f.size() > 0, "unexpected flit");
      if (exp_f.size() > 0) begin
        check(f == exp_f.pop_front(), "flit content");
        check(f_last == exp_l.pop_front(), "flit_last");
      end
    end
    if (rst_n && phase_b && o_valid && o_ready) begin
      check(sent.size() > 0, "unexpected packet");
      if (sent.size() > 0) check(o_pkt == clean(sent.pop_front()), "rebuilt packet");
    end
  end

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_start, t_end;
    int     exp_cycles;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- phase A
    exp_cycles = 0;
    @(negedge clk);
    for (int i = 0; i < 50; i++) begin
      line_pkt_t p;
      flit_t h;
      p = rnd_pkt();
      h = '0;
      h[HDR_BITS-1:0] = p[$bits(line_pkt_t)-1 -: HDR_BITS];
      exp_f.push_back(h);
      exp_l.push_back(1'b0);
      for (int s = 0; s < SECTORS; s++)
        if (p.mask[s]) begin
          exp_f.push_back(p.data[s*SECTOR_W +: FLIT_W]);
          exp_l.push_back(1'b0);
          exp_f.push_back(p.data[s*SECTOR_W + FLIT_W +: FLIT_W]);
          exp_l.push_back(1'b0);
        end
      exp_l[exp_l.size()-1] = 1'b1;
      exp_cycles += 1 + 2 * $countones(p.mask);
      in_pkt = p; in_valid = 1;
      @(posedge clk);
      if (i == 0) t_start = cyc;
      while (!in_ready) @(posedge clk);
      #1;
    end
    in_valid = 0;
    while (exp_f.size() > 0) @(posedge clk);
    t_end = cyc;
    check(n_flits == exp_cycles, "flit count");
    check(int'(last_t - first_t + 1) == exp_cycles,
          $sformatf("flit rate: %0d cycles for %0d flits", last_t - first_t + 1, exp_cycles));
    // ---- phase B
    repeat (2) @(posedge clk);
    @(negedge clk) phase_b = 1;
    for (int i = 0; i < 80; i++) begin
      line_pkt_t p;
      p = rnd_pkt();
      sent.push_back(p);
      in_pkt = p; in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
    end
    in_valid = 0;
    repeat (2000) begin
      @(posedge clk);
      if (sent.size() == 0) break;
    end
    check(sent.size() == 0, "all packets rebuilt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) o_ready = ($urandom % 3) != 0;
endmodule
