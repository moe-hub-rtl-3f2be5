// hub_mmio: memory-mapped register block of the MoE-Hub.
//
// The driver programs the hub with 64-bit register writes. rowspMalloc stages
// a region (MallocID, BaseAddr, AddrRange, RowSize) and commits it with a
// write to APT_CMD, which issues one allocation or free command to the AAU.
// Dependency Table entries are staged the same way and committed with DT_CMD.
// The two DAM thresholds are plain registers; a write to DAM_CTRL clears the
// DAM counters at the start of a consumer kernel.
//
// Register map (byte offsets):
//   0x000 APT_MID      0x008 APT_BASE    0x010 APT_RANGE   0x018 APT_ROWSIZE
//   0x020 APT_CMD      bit 0: 0 = allocate/reinitialise, 1 = free
//   0x100 DT_START     0x108 DT_END      0x110 DT_GROUP
//   0x118 DT_CMD       bits 7:0 entry index, bit 8 entry valid
//   0x200 THR_TB       0x208 THR_TOTAL   0x210 DAM_CTRL (any write: clear)
// Timing: a command pulse (apt_cfg_valid, dt_wr_valid, dam_clear) is issued in
// the cycle after the commit write. The use of MMIO follows the paper; the
// register map is this design's own.
module hub_mmio
  import moehub_pkg::*;
#(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mmio_wr_valid,
  input  logic [11:0]      mmio_addr,
  input  logic [63:0]      mmio_wdata,
  // to the AAU
  output logic             apt_cfg_valid,
  output logic             apt_cfg_free,
  output mid_t             apt_cfg_mid,
  output addr_t            apt_cfg_base,
  output addr_t            apt_cfg_range,
  output addr_t            apt_cfg_rowsize,
  // to the DAM
  output logic             dt_wr_valid,
  output logic [7:0]       dt_wr_idx,
  output logic             dt_wr_en,
  output addr_t            dt_wr_start,
  output addr_t            dt_wr_end,
  output logic [7:0]       dt_wr_group,
  output logic [CNT_W-1:0] thr_tb,
  output logic [CNT_W-1:0] thr_total,
  output logic             dam_clear
);

  typedef enum logic [11:0] {
    R_APT_MID = 12'h000, R_APT_BASE = 12'h008, R_APT_RANGE = 12'h010,
    R_APT_ROWSIZE = 12'h018, R_APT_CMD = 12'h020,
    R_DT_START = 12'h100, R_DT_END = 12'h108, R_DT_GROUP = 12'h110, R_DT_CMD = 12'h118,
    R_THR_TB = 12'h200, R_THR_TOTAL = 12'h208, R_DAM_CTRL = 12'h210
  } reg_t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      apt_cfg_valid <= 1'b0; apt_cfg_free <= 1'b0; apt_cfg_mid <= '0;
      apt_cfg_base <= '0; apt_cfg_range <= '0; apt_cfg_rowsize <= '0;
      dt_wr_valid <= 1'b0; dt_wr_idx <= '0; dt_wr_en <= 1'b0;
      dt_wr_start <= '0; dt_wr_end <= '0; dt_wr_group <= '0;
      thr_tb <= '0; thr_total <= '0; dam_clear <= 1'b0;
    end else begin
      apt_cfg_valid <= 1'b0;
      dt_wr_valid   <= 1'b0;
      dam_clear     <= 1'b0;
      if (mmio_wr_valid) begin
        case (mmio_addr)
          R_APT_MID:     apt_cfg_mid     <= mmio_wdata[MALLOCID_W-1:0];
          R_APT_BASE:    apt_cfg_base    <= mmio_wdata[ADDR_W-1:0];
          R_APT_RANGE:   apt_cfg_range   <= mmio_wdata[ADDR_W-1:0];
          R_APT_ROWSIZE: apt_cfg_rowsize <= mmio_wdata[ADDR_W-1:0];
          R_APT_CMD: begin
            apt_cfg_valid <= 1'b1;
            apt_cfg_free  <= mmio_wdata[0];
          end
          R_DT_START:    dt_wr_start <= mmio_wdata[ADDR_W-1:0];
          R_DT_END:      dt_wr_end   <= mmio_wdata[ADDR_W-1:0];
          R_DT_GROUP:    dt_wr_group <= mmio_wdata[7:0];
          R_DT_CMD: begin
            dt_wr_valid <= 1'b1;
            dt_wr_idx   <= mmio_wdata[7:0];
            dt_wr_en    <= mmio_wdata[8];
          end
          R_THR_TB:      thr_tb    <= mmio_wdata[CNT_W-1:0];
          R_THR_TOTAL:   thr_total <= mmio_wdata[CNT_W-1:0];
          R_DAM_CTRL:    dam_clear <= 1'b1;
          default: ;
        endcase
      end
    end
  end

endmodule
