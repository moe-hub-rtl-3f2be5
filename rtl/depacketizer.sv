// depacketizer: rebuilds line packets from the flits arriving on a link.
//
// The first flit of a packet is the header: it restores every field of the
// line packet except the data and gives the sector mask. The following flits
// are written, two per sector, into the valid sectors from the lowest up;
// sectors whose mask bit is clear read as zero. When the flit marked last has
// been taken the packet is offered on out_valid and no further flit is
// accepted until it is consumed.
//
// Interface: valid/ready on both sides. Timing: a packet of 1 + 2k flits
// appears one cycle after its last flit; a one-cycle gap follows each packet
// while the output is handed over. The format is the inverse of the
// packetizer, which is this design's own.
module depacketizer
  import moehub_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      flit_valid,
  output logic      flit_ready,
  input  flit_t     flit,
  input  logic      flit_last,
  output logic      out_valid,
  input  logic      out_ready,
  output line_pkt_t out_pkt
);

  line_pkt_t          cur;
  logic               in_hdr;
  logic               half;
  logic [SECTORS-1:0] rem;
  logic [1:0]         sec;
  logic               done;
  logic               fire;

  always_comb begin
    sec = '0;
    for (int s = SECTORS - 1; s >= 0; s--)
      if (rem[s]) sec = 2'(s);
  end

  assign flit_ready = !done;
  assign fire       = flit_valid && flit_ready;
  assign out_valid  = done;
  assign out_pkt    = cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; in_hdr <= 1'b1; half <= 1'b0; rem <= '0; done <= 1'b0;
    end else begin
      if (done && out_ready) begin
        done   <= 1'b0;
        in_hdr <= 1'b1;
      end
      if (fire) begin
        if (in_hdr) begin
          cur[$bits(line_pkt_t)-1 -: HDR_BITS] <= flit[HDR_BITS-1:0];
          cur.data <= '0;
          rem      <= flit[HDR_BITS-1 - (1+1+GPU_W+GPU_W) -: SECTORS];
          in_hdr   <= 1'b0;
          half     <= 1'b0;
        end else begin
          cur.data[sec*SECTOR_W + (half ? FLIT_W : 0) +: FLIT_W] <= flit;
          if (half) rem[sec] <= 1'b0;
          half <= !half;
        end
        if (flit_last) done <= 1'b1;
      end
    end
  end

  // The flit marked last must complete the sectors named by the header.
  a_last_matches_mask: assert property (@(posedge clk) disable iff (!rst_n)
    (fire && flit_last && !in_hdr) |-> (half && $countones(rem) == 1));

endmodule
