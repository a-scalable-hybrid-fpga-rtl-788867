// chan_select: channel selection for the Ethernet ports of one F-engine.
//
// All NA requantised inputs of a board stream through in lock step, one
// channel per clock and all on the same channel. This block packs the NA
// 8-bit samples of a channel into one NA*8-bit word, with input 1 in the most
// significant byte, which is the first on the wire. That order matches the
// packet payload: for each channel, inputs 1..NA. It then marks, for each
// Ethernet port p, whether the channel lies in that port's sub-band
// [ch_lo[p], ch_hi[p]): Ch_s up to Ch_f, Ch_f itself excluded, so a packet
// holds Nt*NA*(Ch_f-Ch_s) bytes. Channels in no port's band are dropped.
// Restricting the sub-bands follows the paper; the per-port bands, the
// exclusive upper bound and the byte order are this design's choices.
//
// Timing: one register stage. `out_last` forwards the end-of-spectrum mark
// even when the last channel is not selected, so the buffers downstream can
// count spectra.
module chan_select
  import fx_pkg::*;
#(
  parameter int unsigned NA    = NA_DEF,
  parameter int unsigned NCH   = NFFT_DEF / 2,
  parameter int unsigned NPORT = NPORT_DEF
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [$clog2(NCH)-1:0]  ch_lo [NPORT],
  input  logic [$clog2(NCH):0]    ch_hi [NPORT],
  input  logic                    in_valid,
  input  logic [$clog2(NCH)-1:0]  in_chan,
  input  cq4_t                    in_q [NA],
  input  logic                    in_last,
  output logic                    out_valid,
  output logic [$clog2(NCH)-1:0]  out_chan,
  output logic [NA*2*QW-1:0]      out_word,
  output logic [NPORT-1:0]        out_hit,
  output logic                    out_last
);
  localparam int unsigned CW = $clog2(NCH);

  logic [NPORT-1:0]     hit;
  logic [NA*2*QW-1:0]   word;

  always_comb begin
    for (int p = 0; p < NPORT; p++)
      hit[p] = ((CW+1)'(in_chan) >= (CW+1)'(ch_lo[p])) && ((CW+1)'(in_chan) < ch_hi[p]);
    for (int a = 0; a < NA; a++)
      word[(NA-1-a)*2*QW +: 2*QW] = in_q[a];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_hit   <= '0;
    end else begin
      out_valid <= in_valid && (hit != '0);
      out_last  <= in_valid && in_last;
      out_hit   <= in_valid ? hit : '0;
    end
    out_chan <= in_chan;
    out_word <= word;
  end
endmodule
