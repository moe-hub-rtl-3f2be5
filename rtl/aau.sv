// aau: Address Allocation Unit, the consumer-side ingress of st.rowsp traffic.
//
// A st.rowsp packet names its destination as (MallocID, RowID, RowOffset).
// The AAU turns that into a device address on arrival, packing the rows of a
// region densely in arrival order:
//
//   address = BaseAddr + LocalRowID * RowSize + RowOffset
//
// Packets wait in the In FIFO. For the head packet the APT gives the region
// and the RAT is searched for the row's LocalRowID:
//   * RAT hit: the address is formed and the write goes to the Out FIFO
//     (one packet per cycle while hits continue);
//   * RAT miss: the spill record of (MallocID, RowID) is read from device
//     memory. A valid record of the region's current epoch means the mapping
//     was evicted earlier and is restored; otherwise the row is new and gets
//     the APT RowPointer as its LocalRowID, after which the RowPointer is
//     incremented. The mapping is then written into the RAT; if that displaces
//     the oldest mapping of the bank, the displaced one is first written to its
//     spill record. The packet is then looked up again and hits.
// A packet of an unregistered MallocID, or one that would land beyond the
// region's AddrRange, is dropped and reported (ev_unreg / ev_overflow).
// Region commands (cfg_*) go to the APT and flush the region's RAT entries.
//
// Spill port: a request (sp_req_valid/ready, write or read, key, record) and a
// read response (sp_rsp_valid, record); one read is outstanding at a time and
// the memory must return reads after earlier writes to the same key.
// Timing: hit 1 cycle per packet; miss = spill read latency + 2 cycles
// (+ the spill write handshake when a mapping is displaced).
// The RAT/APT roles, address formula, FIFO eviction with spill and restore,
// and the In/Out FIFOs follow the paper; reading the spill record to tell a
// new row from an evicted one, the epoch and the drop rules are this design's.
module aau
  import moehub_pkg::*;
#(
  parameter int unsigned IN_DEPTH  = 4,
  parameter int unsigned OUT_DEPTH = 4,
  parameter int unsigned N_REGIONS = 16,
  parameter int unsigned RAT_BANKS = 16,
  parameter int unsigned RAT_WAYS  = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // region commands (rowspMalloc via MMIO)
  input  logic                 cfg_valid,
  input  logic                 cfg_free,
  input  mid_t                 cfg_mid,
  input  addr_t                cfg_base,
  input  addr_t                cfg_range,
  input  addr_t                cfg_rowsize,
  output logic                 cfg_err,
  // packets from the link
  input  logic                 in_valid,
  output logic                 in_ready,
  input  line_pkt_t            in_pkt,
  // translated writes to the XBAR
  output logic                 out_valid,
  input  logic                 out_ready,
  output mem_wr_t              out_wr,
  // spill area
  output logic                 sp_req_valid,
  input  logic                 sp_req_ready,
  output logic                 sp_req_we,
  output logic [RAT_KEY_W-1:0] sp_req_key,
  output spill_rec_t           sp_req_wdata,
  input  logic                 sp_rsp_valid,
  input  spill_rec_t           sp_rsp_rdata,
  // events
  output logic                 ev_hit,
  output logic                 ev_alloc,
  output logic                 ev_restore,
  output logic                 ev_evict,
  output logic                 ev_overflow,
  output logic                 ev_unreg
);

  typedef enum logic [1:0] {S_LOOKUP, S_RD_REQ, S_RD_WAIT, S_INSERT} state_t;
  state_t state;

  // --------------------------------------------------------------- In FIFO
  line_pkt_t h;
  logic      in_full, in_empty, in_pop;
  sync_fifo #(.T(line_pkt_t), .DEPTH(IN_DEPTH)) u_in (
    .clk, .rst_n, .push(in_valid && !in_full), .wr_data(in_pkt),
    .pop(in_pop), .rd_data(h), .full(in_full), .empty(in_empty));
  assign in_ready = !in_full;

  // -------------------------------------------------------------- Out FIFO
  mem_wr_t wr;
  logic    out_full, out_empty, out_push;
  sync_fifo #(.T(mem_wr_t), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .push(out_push), .wr_data(wr),
    .pop(out_ready && !out_empty), .rd_data(out_wr), .full(out_full), .empty(out_empty));
  assign out_valid = !out_empty;

  // ------------------------------------------------------------- APT / RAT
  logic                 apt_hit, apt_inc;
  apt_entry_t           ae;
  logic [RAT_KEY_W-1:0] key;
  logic                 rat_hit, rat_wr;
  lrow_t                rat_lrow;
  epoch_t               rat_epoch;
  logic                 vic_valid;
  logic [RAT_KEY_W-1:0] vic_key;
  lrow_t                vic_lrow;
  epoch_t               vic_epoch;
  lrow_t                new_lrow;

  assign key = {h.mid, h.rowid};

  apt #(.N_REGIONS(N_REGIONS)) u_apt (
    .clk, .rst_n,
    .cfg_valid, .cfg_free, .cfg_mid, .cfg_base, .cfg_range, .cfg_rowsize, .cfg_err,
    .lk_mid(h.mid), .lk_hit(apt_hit), .lk_entry(ae),
    .inc_valid(apt_inc), .inc_mid(h.mid));

  rat #(.BANKS(RAT_BANKS), .WAYS(RAT_WAYS)) u_rat (
    .clk, .rst_n,
    .lk_key(key), .lk_hit(rat_hit), .lk_lrow(rat_lrow), .lk_epoch(rat_epoch),
    .wr_valid(rat_wr), .wr_key(key), .wr_lrow(new_lrow), .wr_epoch(ae.epoch),
    .vic_valid, .vic_key, .vic_lrow, .vic_epoch,
    .flush_valid(cfg_valid), .flush_mid(cfg_mid));

  // ------------------------------------------------------ address formation
  addr_t off;
  logic  ovf;
  always_comb begin
    off = addr_t'(rat_lrow) * ae.rowsize + (addr_t'(h.rowline) << LINE_SHIFT);
    ovf = (off + addr_t'(LINE_BYTES)) > ae.range;
    wr.addr = ae.base + off;
    wr.mask = h.mask;
    wr.data = h.data;
  end

  // ------------------------------------------------------------- control
  logic look;
  assign look = (state == S_LOOKUP) && !in_empty;

  assign ev_unreg    = look && !apt_hit;
  assign ev_overflow = look && apt_hit && rat_hit && ovf;
  assign ev_hit      = look && apt_hit && rat_hit && !ovf && !out_full;
  assign out_push    = ev_hit;
  assign in_pop      = ev_unreg || ev_overflow || ev_hit;

  always_comb begin
    sp_req_valid = 1'b0;
    sp_req_we    = 1'b0;
    sp_req_key   = key;
    sp_req_wdata = '0;
    rat_wr       = 1'b0;
    unique case (state)
      S_RD_REQ: sp_req_valid = 1'b1;
      S_INSERT: begin
        if (vic_valid) begin
          sp_req_valid = 1'b1;
          sp_req_we    = 1'b1;
          sp_req_key   = vic_key;
          sp_req_wdata = '{valid: 1'b1, epoch: vic_epoch, lrow: vic_lrow};
          rat_wr       = sp_req_ready;
        end else begin
          rat_wr = 1'b1;
        end
      end
      default: ;
    endcase
  end

  logic restore_ok;
  assign restore_ok = sp_rsp_rdata.valid && sp_rsp_rdata.epoch == ae.epoch;
  assign apt_inc    = (state == S_RD_WAIT) && sp_rsp_valid && !restore_ok;
  assign ev_alloc   = apt_inc;
  assign ev_restore = (state == S_RD_WAIT) && sp_rsp_valid && restore_ok;
  assign ev_evict   = (state == S_INSERT) && vic_valid && sp_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_LOOKUP;
      new_lrow <= '0;
    end else begin
      unique case (state)
        S_LOOKUP:  if (look && apt_hit && !rat_hit) state <= S_RD_REQ;
        S_RD_REQ:  if (sp_req_ready) state <= S_RD_WAIT;
        S_RD_WAIT: if (sp_rsp_valid) begin
                     new_lrow <= restore_ok ? sp_rsp_rdata.lrow : ae.rowptr;
                     state    <= S_INSERT;
                   end
        S_INSERT:  if (rat_wr) state <= S_LOOKUP;
        default:   state <= S_LOOKUP;
      endcase
    end
  end

  // A spill response only answers an outstanding read.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    sp_rsp_valid |-> state == S_RD_WAIT);

endmodule
