// moehub_top: the MoE-Hub of one GPU.
//
// The hub sits between the GPU's on-chip crossbar and its inter-GPU links and
// serves both roles of an all-to-all exchange:
//
//   producer side:  SM stores -> rowsp_decode -> rpm -> packetizer -> tx link
//   consumer side:  rx link -> depacketizer -> aau (st.rowsp) ----+-> XBAR write
//                                          \-> bypass (st.) ------+
//                   write acknowledgments -> dam -> TB dispatcher
//
// A producer stores a token row with st.rowsp as soon as it knows the expert,
// naming only {MallocID, RowID, RowOffset}. rowsp_decode finds the target GPU
// in the MallocID, the RPM merges the sectors of each 128-byte line per
// destination and schedules them (round-robin over destinations, normal
// before .nop, lowest RowID first, timer bypass for partial lines), and the
// packetizer sends them as 16-byte flits. On the consumer GPU the AAU gives
// each arriving row a LocalRowID in arrival order and writes it densely into
// the region that rowspMalloc registered; conventional remote stores skip the
// AAU. The DAM counts the write acknowledgments per address range and raises
// Ready for each thread-block group whose input is complete, and AllReady when
// the whole kernel input has arrived. hub_mmio decodes the driver's register
// writes that configure the AAU regions and the DAM tables.
//
// Outside the hub, and brought out as ports: the SMs, the links and switch
// (tx/rx flits, per-destination dst_ready), the XBAR/memory (mem_wr, ack),
// the RAT spill area in device memory (sp_*), and the TB dispatcher
// (tb_ready, tb_dealloc, all_ready). IOMMU translation after the AAU is not
// modelled. The XBAR port is shared by the AAU and the bypass path with a
// round-robin arbiter, which is this design's choice.
module moehub_top
  import moehub_pkg::*;
#(
  parameter int unsigned N_GPUS      = 8,
  parameter int unsigned RPM_ENTRIES = 16,
  parameter int unsigned RPM_TIMEOUT = 64,
  parameter int unsigned N_REGIONS   = 16,
  parameter int unsigned RAT_BANKS   = 16,
  parameter int unsigned RAT_WAYS    = 16,
  parameter int unsigned DT_ENTRIES  = 64,
  parameter int unsigned TB_GROUPS   = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  gpu_t                 my_gpu,
  // stores from the SMs
  input  logic                 sm_valid,
  output logic                 sm_ready,
  input  sm_store_t            sm_txn,
  // link transmit
  output logic                 tx_valid,
  input  logic                 tx_ready,
  output flit_t                tx_flit,
  output logic                 tx_last,
  input  logic [N_GPUS-1:0]    dst_ready,
  // link receive
  input  logic                 rx_valid,
  output logic                 rx_ready,
  input  flit_t                rx_flit,
  input  logic                 rx_last,
  // local XBAR / memory
  output logic                 mem_wr_valid,
  input  logic                 mem_wr_ready,
  output mem_wr_t              mem_wr,
  input  logic                 ack_valid,
  input  addr_t                ack_addr,
  input  logic [2:0]           ack_sectors,  // 32-byte sectors written
  // RAT spill area
  output logic                 sp_req_valid,
  input  logic                 sp_req_ready,
  output logic                 sp_req_we,
  output logic [RAT_KEY_W-1:0] sp_req_key,
  output spill_rec_t           sp_req_wdata,
  input  logic                 sp_rsp_valid,
  input  spill_rec_t           sp_rsp_rdata,
  // MMIO
  input  logic                 mmio_wr_valid,
  input  logic [11:0]          mmio_addr,
  input  logic [63:0]          mmio_wdata,
  // TB dispatcher
  output logic [TB_GROUPS-1:0] tb_ready,
  output logic [TB_GROUPS-1:0] tb_dealloc,
  output logic                 all_ready,
  // events
  output hub_ev_t              ev
);

  // ----------------------------------------------------------- MMIO block
  logic       apt_cfg_valid, apt_cfg_free;
  mid_t       apt_cfg_mid;
  addr_t      apt_cfg_base, apt_cfg_range, apt_cfg_rowsize;
  logic       dt_wr_valid, dt_wr_en, dam_clear;
  logic [7:0] dt_wr_idx, dt_wr_group;
  addr_t      dt_wr_start, dt_wr_end;
  logic [31:0] thr_tb, thr_total;

  hub_mmio #(.CNT_W(32)) u_mmio (
    .clk, .rst_n, .mmio_wr_valid, .mmio_addr, .mmio_wdata,
    .apt_cfg_valid, .apt_cfg_free, .apt_cfg_mid, .apt_cfg_base, .apt_cfg_range,
    .apt_cfg_rowsize, .dt_wr_valid, .dt_wr_idx, .dt_wr_en, .dt_wr_start,
    .dt_wr_end, .dt_wr_group, .thr_tb, .thr_total, .dam_clear);

  // -------------------------------------------------------- producer side
  logic      dec_valid, dec_ready;
  hub_req_t  dec_req;
  logic      rpm_valid, rpm_ready;
  line_pkt_t rpm_pkt;

  rowsp_decode #(.N_GPUS(N_GPUS)) u_dec (
    .in_valid(sm_valid), .in_ready(sm_ready), .in_txn(sm_txn),
    .out_valid(dec_valid), .out_ready(dec_ready), .out_req(dec_req),
    .err_drop(ev.sm_drop));

  rpm #(.N_GPUS(N_GPUS), .ENTRIES(RPM_ENTRIES), .TIMEOUT(RPM_TIMEOUT)) u_rpm (
    .clk, .rst_n, .my_gpu,
    .in_valid(dec_valid), .in_ready(dec_ready), .in_req(dec_req),
    .dst_ready, .out_valid(rpm_valid), .out_ready(rpm_ready), .out_pkt(rpm_pkt),
    .ev_merge(ev.rpm_merge), .ev_timeout(ev.rpm_timeout), .ev_stall(ev.rpm_stall));

  packetizer u_pkt (
    .clk, .rst_n, .in_valid(rpm_valid), .in_ready(rpm_ready), .in_pkt(rpm_pkt),
    .flit_valid(tx_valid), .flit_ready(tx_ready), .flit(tx_flit), .flit_last(tx_last));

  // -------------------------------------------------------- consumer side
  logic      rx_pkt_valid, rx_pkt_ready;
  line_pkt_t rx_pkt;

  depacketizer u_depkt (
    .clk, .rst_n, .flit_valid(rx_valid), .flit_ready(rx_ready), .flit(rx_flit),
    .flit_last(rx_last), .out_valid(rx_pkt_valid), .out_ready(rx_pkt_ready),
    .out_pkt(rx_pkt));

  logic    aau_in_ready, aau_out_valid, aau_out_ready;
  mem_wr_t aau_wr;

  aau #(.N_REGIONS(N_REGIONS), .RAT_BANKS(RAT_BANKS), .RAT_WAYS(RAT_WAYS)) u_aau (
    .clk, .rst_n,
    .cfg_valid(apt_cfg_valid), .cfg_free(apt_cfg_free), .cfg_mid(apt_cfg_mid),
    .cfg_base(apt_cfg_base), .cfg_range(apt_cfg_range), .cfg_rowsize(apt_cfg_rowsize),
    .cfg_err(ev.apt_full),
    .in_valid(rx_pkt_valid && rx_pkt.rowsp), .in_ready(aau_in_ready), .in_pkt(rx_pkt),
    .out_valid(aau_out_valid), .out_ready(aau_out_ready), .out_wr(aau_wr),
    .sp_req_valid, .sp_req_ready, .sp_req_we, .sp_req_key, .sp_req_wdata,
    .sp_rsp_valid, .sp_rsp_rdata,
    .ev_hit(ev.aau_hit), .ev_alloc(ev.aau_alloc), .ev_restore(ev.aau_restore),
    .ev_evict(ev.aau_evict), .ev_overflow(ev.aau_overflow), .ev_unreg(ev.aau_unreg));

  // Conventional remote stores carry their address and bypass the AAU.
  mem_wr_t byp_in, byp_wr;
  logic    byp_full, byp_empty, byp_pop;
  always_comb begin
    byp_in.addr = {rx_pkt.line_addr, LINE_SHIFT'(0)};
    byp_in.mask = rx_pkt.mask;
    byp_in.data = rx_pkt.data;
  end
  sync_fifo #(.T(mem_wr_t), .DEPTH(2)) u_byp (
    .clk, .rst_n, .push(rx_pkt_valid && !rx_pkt.rowsp && !byp_full), .wr_data(byp_in),
    .pop(byp_pop), .rd_data(byp_wr), .full(byp_full), .empty(byp_empty));
  assign ev.bypass    = rx_pkt_valid && !rx_pkt.rowsp && !byp_full;
  assign rx_pkt_ready = rx_pkt.rowsp ? aau_in_ready : !byp_full;

  // XBAR write port: round-robin between the AAU and the bypass queue.
  logic last_aau;
  logic pick_aau;
  always_comb begin
    if (aau_out_valid && !byp_empty) pick_aau = !last_aau;
    else                             pick_aau = aau_out_valid;
    mem_wr_valid  = aau_out_valid || !byp_empty;
    mem_wr        = pick_aau ? aau_wr : byp_wr;
    aau_out_ready = mem_wr_ready && pick_aau;
    byp_pop       = mem_wr_ready && !pick_aau && !byp_empty;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) last_aau <= 1'b0;
    else if (mem_wr_valid && mem_wr_ready) last_aau <= pick_aau;

  // ------------------------------------------------------------ DAM
  dam #(.DT_ENTRIES(DT_ENTRIES), .TB_GROUPS(TB_GROUPS), .CNT_W(32)) u_dam (
    .clk, .rst_n,
    .dt_wr_valid, .dt_wr_idx, .dt_wr_en, .dt_wr_start, .dt_wr_end, .dt_wr_group,
    .thr_tb, .thr_total, .clear(dam_clear),
    .ack_valid, .ack_addr, .ack_sectors, .tb_ready, .all_ready, .tb_dealloc);

endmodule
