// spec_buffer: packet buffer of one Ethernet port; gathers Nt spectra.
//
// With many inputs each server gets only a few channels, so one spectrum of
// one port's sub-band would make a small packet. The F-engine therefore
// buffers Nt consecutive spectra per packet, keeping packets large and the
// network overhead low (this follows the paper). The memory has two banks of
// BUFW words. The write side fills one bank while the framer sends the other.
// Word (t, c) of a packet sits at address t*nch + (c - ch_lo). The FFT's
// bit-reversed channel order is thus put back into ascending order here, and
// each new time sample follows the previous one, as the packet format asks.
//
// A bank is complete after `nt` end-of-spectrum marks. If the framer has
// released the other bank, the banks swap and `pkt_valid` rises with the
// packet's sequence number. Otherwise the packet is dropped: `overflow`
// pulses and the bank is overwritten. The sequence number counts packet slots
// since `sync`, dropped ones included, so a receiver sees the gap as lost
// packets. It thereby also stamps time from the common PPS start. The
// double-bank scheme and the drop policy are this design's choices. The
// configuration (ch_lo, nch, nt) must hold nt*nch <= BUFW and be steady while
// running. A port with nch = 0 is off and sends nothing.
//
// Timing: writes take effect at once. Reads are synchronous: rd_data shows
// the addressed word one clock after a cycle with rd_en high, and holds it
// until the next rd_en.
module spec_buffer
  import fx_pkg::*;
#(
  parameter int unsigned NCH    = NFFT_DEF / 2,
  parameter int unsigned WW     = NA_DEF * 2 * QW,   // word width
  parameter int unsigned BUFW   = BUFW_DEF,          // words per bank
  parameter int unsigned NT_MAX = NT_MAX_DEF
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        sync,
  // configuration
  input  logic [$clog2(NCH)-1:0]      ch_lo,
  input  logic [$clog2(NCH):0]        nch,
  input  logic [$clog2(NT_MAX+1)-1:0] nt,
  // channel stream of this port
  input  logic                        in_valid,
  input  logic [$clog2(NCH)-1:0]      in_chan,
  input  logic [WW-1:0]               in_word,
  input  logic                        in_last,
  // completed packet towards the framer
  output logic                        pkt_valid,
  output logic [63:0]                 pkt_seq,
  output logic [$clog2(BUFW+1)-1:0]   pkt_len,
  input  logic                        rd_en,
  input  logic [$clog2(BUFW)-1:0]     rd_addr,
  output logic [WW-1:0]               rd_data,
  input  logic                        rd_done,
  // status
  output logic                        overflow
);
  localparam int unsigned AW = $clog2(BUFW);
  localparam int unsigned TW = $clog2(NT_MAX + 1);

  logic [WW-1:0] mem [2*BUFW];

  logic          wbank, rbank;
  logic [TW-1:0] t;
  logic [AW:0]   base;
  logic [63:0]   seq_cnt;
  logic          pend_eff;
  logic [AW:0]   waddr;

  assign pend_eff = pkt_valid && !rd_done;
  assign waddr    = base + (AW+1)'(in_chan - ch_lo);

  always_ff @(posedge clk) begin
    if (in_valid && waddr < (AW+1)'(BUFW)) mem[{wbank, waddr[AW-1:0]}] <= in_word;
    if (rd_en) rd_data <= mem[{rbank, rd_addr}];
  end

  always_ff @(posedge clk) begin
    if (rst || sync) begin
      wbank     <= 1'b0;
      rbank     <= 1'b1;
      t         <= '0;
      base      <= '0;
      seq_cnt   <= '0;
      pkt_valid <= 1'b0;
      pkt_seq   <= '0;
      pkt_len   <= '0;
      overflow  <= 1'b0;
    end else begin
      overflow <= 1'b0;
      if (rd_done) pkt_valid <= 1'b0;
      if (in_last && nch != '0) begin
        if (t + 1'b1 >= nt) begin
          t       <= '0;
          base    <= '0;
          seq_cnt <= seq_cnt + 1'b1;
          if (!pend_eff) begin
            pkt_valid <= 1'b1;
            pkt_seq   <= seq_cnt;
            pkt_len   <= ($clog2(BUFW+1))'(nt * nch);
            rbank     <= wbank;
            wbank     <= ~wbank;
          end else begin
            overflow <= 1'b1;
          end
        end else begin
          t    <= t + 1'b1;
          base <= base + (AW+1)'(nch);
        end
      end
    end
  end

  // The packet must fit the bank.
  assert property (@(posedge clk) disable iff (rst) in_last |-> (nt * nch) <= BUFW)
    else $error("spec_buffer: nt*nch exceeds BUFW");
endmodule
