// tb_rowsp_decode: self-checking test of the SM-side store routing.
//
// Drives random st. and st.rowsp transactions, including misaligned ones and
// ones that name a GPU beyond N_GPUS, and compares every output field, the
// handshake and the drop pulse with values computed here from the register
// layout: MallocID = dreg[63:56], RowID = dreg[55:36], RowOffset = dreg[15:0],
// target GPU = MallocID[7:4] for st.rowsp and the TLB's GPU for st.
module tb_rowsp_decode;
  import moehub_pkg::*;

  logic      in_valid, in_ready, out_valid, out_ready, err_drop;
  sm_store_t txn;
  hub_req_t  req;
  int checks = 0, failures = 0;

  rowsp_decode #(.N_GPUS(8)) dut (
    .in_valid, .in_ready, .in_txn(txn), .out_valid, .out_ready, .out_req(req), .err_drop);

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      logic [7:0]  mid;
      logic [19:0] rowid;
      logic [15:0] off;
      logic [3:0]  tgpu;
      logic        bad;
      gpu_t        exp_dst;
      mid   = 8'($urandom);
      rowid = 20'($urandom);
      off   = 16'($urandom) & ((i % 5 == 0) ? 16'hffff : 16'hffe0);
      tgpu  = 4'($urandom);
      txn.rowsp   = (i % 2 == 0);
      txn.nop     = 1'($urandom);
      txn.dreg    = {mid, rowid, 20'($urandom), off};
      txn.addr    = {48'($urandom) << 5} | ((i % 7 == 0) ? 48'h4 : 48'h0);
      txn.tlb_gpu = tgpu;
      txn.data    = {8{32'($urandom)}};
      in_valid    = 1'b1;
      out_ready   = 1'($urandom);
      #1;
      if (txn.rowsp) begin
        exp_dst = mid[7:4];
        bad = (off[4:0] != 0) || (mid[7:4] >= 8);
      end else begin
        exp_dst = tgpu;
        bad = (txn.addr[4:0] != 0) || (tgpu >= 8);
      end
      check(out_valid == !bad, "out_valid");
      check(err_drop == bad, "err_drop");
      check(in_ready == (bad ? 1'b1 : out_ready), "in_ready");
      if (!bad) begin
        check(req.dst == exp_dst, "dst");
        check(req.nop == txn.nop && req.rowsp == txn.rowsp, "flags");
        check(req.data == txn.data, "data");
        if (txn.rowsp)
          check(req.mid == mid && req.rowid == rowid && req.rowoff == off, "rowsp fields");
        else
          check(req.addr == txn.addr, "address");
      end
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
