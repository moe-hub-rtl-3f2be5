// packetizer: turns a merged 128-byte line into link flits.
//
// Each packet is one 16-byte header flit followed by two 16-byte data flits for
// every valid 32-byte sector, lowest sector first; sectors whose mask bit is
// clear are not sent. The header flit holds every field of the line packet
// except the data (kind, priority, destination, source, mask and the st.
// address or st.rowsp logical destination), packed at the low end of the flit.
//
// Interface: valid/ready on both sides; flit_last marks the final flit of a
// packet. Timing: a packet with k valid sectors takes 1 + 2k cycles of an
// always-ready link, and the next packet is accepted on the cycle its
// predecessor's last flit leaves, so packets go out back to back.
// The 16-byte flit and single header flit follow the paper; the header layout
// and the omission of empty sectors are this design's own.
module packetizer
  import moehub_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  line_pkt_t in_pkt,
  output logic      flit_valid,
  input  logic      flit_ready,
  output flit_t     flit,
  output logic      flit_last
);

  line_pkt_t          cur;
  logic               busy;
  logic               in_hdr;     // header flit not yet sent
  logic               half;       // second flit of the current sector
  logic [SECTORS-1:0] rem;        // sectors still to send
  logic [1:0]         sec;
  logic               fire;

  always_comb begin
    sec = '0;
    for (int s = SECTORS - 1; s >= 0; s--)
      if (rem[s]) sec = 2'(s);
  end

  always_comb begin
    flit      = '0;
    flit_last = 1'b0;
    if (in_hdr) begin
      flit[HDR_BITS-1:0] = cur[$bits(line_pkt_t)-1 -: HDR_BITS];
      flit_last = (rem == '0);
    end else begin
      flit      = cur.data[sec*SECTOR_W + (half ? FLIT_W : 0) +: FLIT_W];
      flit_last = half && ($countones(rem) == 1);
    end
  end

  assign flit_valid = busy;
  assign fire       = flit_valid && flit_ready;
  assign in_ready   = !busy || (fire && flit_last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; in_hdr <= 1'b0; half <= 1'b0; rem <= '0; cur <= '0;
    end else begin
      if (fire) begin
        if (in_hdr) begin
          in_hdr <= 1'b0;
          half   <= 1'b0;
        end else if (!half) begin
          half <= 1'b1;
        end else begin
          half     <= 1'b0;
          rem[sec] <= 1'b0;
        end
        if (flit_last) busy <= 1'b0;
      end
      if (in_valid && in_ready) begin
        cur    <= in_pkt;
        busy   <= 1'b1;
        in_hdr <= 1'b1;
        half   <= 1'b0;
        rem    <= in_pkt.mask;
      end
    end
  end

endmodule
