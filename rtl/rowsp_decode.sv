// rowsp_decode: routes coalesced store transactions from an SM to the hub.
//
// A conventional remote store (st.) already has its peer GPU from the L1 TLB
// address lookup and keeps its byte address. A row-sparse store (st.rowsp)
// carries a logical destination in one register: MallocID, RowID and
// RowOffset. For it the instruction flag selects a small path beside the TLB
// that takes the target GPU from the upper MallocID bits, so the ordinary
// address translation is not disturbed. The .nop flag (transmission priority)
// is passed on unchanged.
//
// A request is dropped, with a one-cycle err_drop pulse, when its GPU id is not
// below N_GPUS or when its address/offset is not 32-byte aligned.
//
// Interface: valid/ready in, valid/ready out; combinational, no added latency.
// The flag-gated MallocID-to-GPU resolution follows the paper; the register
// packing and the drop rule are this design's own.
module rowsp_decode
  import moehub_pkg::*;
#(
  parameter int unsigned N_GPUS = 8
) (
  input  logic      in_valid,
  output logic      in_ready,
  input  sm_store_t in_txn,
  output logic      out_valid,
  input  logic      out_ready,
  output hub_req_t  out_req,
  output logic      err_drop
);

  logic bad;
  gpu_t dst;

  always_comb begin
    out_req        = '0;
    out_req.rowsp  = in_txn.rowsp;
    out_req.nop    = in_txn.nop;
    out_req.data   = in_txn.data;
    if (in_txn.rowsp) begin
      out_req.mid    = in_txn.dreg[DREG_MID_LSB +: MALLOCID_W];
      out_req.rowid  = in_txn.dreg[DREG_ROWID_LSB +: ROWID_W];
      out_req.rowoff = in_txn.dreg[ROWOFF_W-1:0];
      dst            = mid_gpu(out_req.mid);
      bad = (out_req.rowoff[SECTOR_SHIFT-1:0] != '0);
    end else begin
      out_req.addr = in_txn.addr;
      dst          = in_txn.tlb_gpu;
      bad = (in_txn.addr[SECTOR_SHIFT-1:0] != '0);
    end
    if (32'(dst) >= N_GPUS) bad = 1'b1;
    out_req.dst = dst;
  end

  assign out_valid = in_valid && !bad;
  // A bad request is consumed at once so it cannot block the SM.
  assign in_ready  = bad ? 1'b1 : out_ready;
  assign err_drop  = in_valid && bad;

endmodule
