// tb_rat: self-checking test of the Row Allocation Table.
//
// With 4 banks of 4 ways, random (MallocID, RowID) mappings are inserted and
// looked up. A reference keeps one first-in-first-out list per bank
// (bank = RowID[1:0] xor MallocID[1:0]): an insert into a full bank must
// report the oldest mapping of that bank as the victim, and afterwards every
// mapping in the reference must hit with its LocalRowID and epoch while the
// victims must miss. Finally a flush of one MallocID must remove exactly that
// region's mappings.
module tb_rat;
  import moehub_pkg::*;

  localparam int unsigned B = 4, W = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [RAT_KEY_W-1:0] lk_key, wr_key, vic_key;
  logic                 lk_hit, wr_valid = 0, vic_valid, flush_valid = 0;
  lrow_t                lk_lrow, wr_lrow, vic_lrow;
  epoch_t               lk_epoch, wr_epoch, vic_epoch;
  mid_t                 flush_mid;
  int checks = 0, failures = 0, n_evict = 0;

  rat #(.BANKS(B), .WAYS(W)) dut (.clk, .rst_n, .lk_key, .lk_hit, .lk_lrow, .lk_epoch,
    .wr_valid, .wr_key, .wr_lrow, .wr_epoch, .vic_valid, .vic_key, .vic_lrow, .vic_epoch,
    .flush_valid, .flush_mid);

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  typedef struct { logic [RAT_KEY_W-1:0] k; lrow_t l; epoch_t e; } map_t;
  map_t fifo [B][$];
  logic [RAT_KEY_W-1:0] gone[$];

  function automatic int bank(logic [RAT_KEY_W-1:0] k);
    return int'(k[1:0] ^ k[ROWID_W +: 2]);
  endfunction

  task automatic lookup(logic [RAT_KEY_W-1:0] k, output logic hit, output lrow_t l, output epoch_t e);
    lk_key = k; #1;
    hit = lk_hit; l = lk_lrow; e = lk_epoch;
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic hit; lrow_t l; epoch_t e;
    lk_key = '0; wr_key = '0; wr_lrow = '0; wr_epoch = '0; flush_mid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 120; i++) begin
      logic [RAT_KEY_W-1:0] k;
      int b;
      // new unique key: mid from a small set, RowID = i
      k = {mid_t'(8'h20 + (i % 3)), rowid_t'(i * 7 + 1)};
      b = bank(k);
      @(negedge clk);
      wr_key = k; wr_lrow = lrow_t'(i); wr_epoch = epoch_t'(i % 16); wr_valid = 1;
      #1;
      if (fifo[b].size() == W) begin
        map_t old;
        old = fifo[b].pop_front();
        check(vic_valid, "victim reported on full bank");
        check(vic_key == old.k && vic_lrow == old.l && vic_epoch == old.e, "FIFO victim");
        gone.push_back(old.k);
        n_evict++;
      end else begin
        check(!vic_valid, "no victim while bank has room");
      end
      fifo[b].push_back('{k, lrow_t'(i), epoch_t'(i % 16)});
      @(posedge clk); #1 wr_valid = 0;
      // every mapping still held must hit
      for (int bb = 0; bb < B; bb++)
        foreach (fifo[bb][j]) begin
          lookup(fifo[bb][j].k, hit, l, e);
          check(hit && l == fifo[bb][j].l && e == fifo[bb][j].e, "resident mapping hits");
        end
      foreach (gone[j]) begin
        lookup(gone[j], hit, l, e);
        check(!hit, "evicted mapping misses");
      end
    end
    // flush MallocID 0x21
    @(negedge clk);
    flush_mid = 8'h21; flush_valid = 1;
    @(posedge clk); #1 flush_valid = 0;
    for (int bb = 0; bb < B; bb++)
      foreach (fifo[bb][j]) begin
        lookup(fifo[bb][j].k, hit, l, e);
        if (fifo[bb][j].k[RAT_KEY_W-1 -: MALLOCID_W] == 8'h21) check(!hit, "flushed region misses");
        else check(hit && l == fifo[bb][j].l, "other regions survive flush");
      end
    check(n_evict > 50, "evictions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
