// fengine_top: one F-engine board of the hybrid FPGA/GPU FX correlator.
//
// An FX correlator first turns each antenna signal into a spectrum (F), then
// multiplies the spectra of every pair of inputs (X). Here the O(N) F stage
// runs on FPGA boards and the O(N^2) X stage on GPU servers. A network switch
// in between starts the corner turn: each server receives one sub-band from
// every board. This module is the FPGA side for one board with NA inputs.
//   ADC samples -> pfb_fir -> fft_r2sdf -> requant    (one chain per input)
//              -> chan_select (NA inputs packed per channel, port sub-bands)
//              -> spec_buffer -> pkt_framer            (one pair per port)
// The ADCs, the 10 GbE cores and the host register bus are outside: their
// signals are this module's ports. pps_sync starts the whole pipeline on a
// PPS edge after the host arms it, so every board's sequence numbers count
// from the same instant.
//
// Defaults are the paper's field system: 8 inputs, 8-bit samples, a 2-tap
// 8192-point PFB giving 4096 channels of 36-bit complex data, 4+4-bit
// requantisation. The four ports (a port whose band is empty is off), the
// 1024-word (8 kB) packet bank and up to
// 16 spectra per packet are this design's choices. Every input chain runs at
// one sample per clock (the field system clocks 200 MS/s ADCs and the FPGA at
// 200 MHz), so the chains stay in lock step and lane 0's control signals
// stand for all of them.
//
// Configuration inputs are static registers: change them only while the
// engine is not running. For each port p, ch_lo[p] <= ch_hi[p] <= NFFT/2 and
// nt*(ch_hi[p]-ch_lo[p]) <= BUFW must hold. Gains are written one channel of
// one input at a time.
// Timing: spectrum k is computed from ADC frames k..k+TAPS-1 (frames counted
// from the sync) and leaves the FFT during frame k+TAPS. Its packet starts
// once the last of the packet's nt spectra is complete.
module fengine_top
  import fx_pkg::*;
#(
  parameter int unsigned NA     = NA_DEF,
  parameter int unsigned NFFT   = NFFT_DEF,
  parameter int unsigned TAPS   = TAPS_DEF,
  parameter int unsigned DW     = DW_DEF,
  parameter int unsigned NPORT  = NPORT_DEF,
  parameter int unsigned BUFW   = BUFW_DEF,
  parameter int unsigned NT_MAX = NT_MAX_DEF
) (
  input  logic                              clk,
  input  logic                              rst,
  // ADC samples, one per input per clock
  input  logic                              adc_valid,
  input  logic signed [ADC_W-1:0]           adc [NA],
  // timing
  input  logic                              pps,
  input  logic                              arm,
  // configuration registers
  input  logic [$clog2(NFFT)-1:0]           fft_shift,
  input  logic [15:0]                       fid,
  input  logic [$clog2(NFFT/2)-1:0]         ch_lo [NPORT],
  input  logic [$clog2(NFFT/2):0]           ch_hi [NPORT],
  input  logic [$clog2(NT_MAX+1)-1:0]       nt,
  input  logic                              gain_we,
  input  logic [$clog2(NA > 1 ? NA : 2)-1:0] gain_input,
  input  logic [$clog2(NFFT/2)-1:0]         gain_chan,
  input  logic [GAIN_W-1:0]                 gain_val,
  // Ethernet streams, one per port
  output logic [63:0]                       tx_data  [NPORT],
  output logic                              tx_valid [NPORT],
  output logic                              tx_eof   [NPORT],
  input  logic                              tx_ready [NPORT],
  // status
  output logic                              armed,
  output logic                              running,
  output logic [31:0]                       sat_count,
  output logic [31:0]                       ovf_count [NPORT]
);
  localparam int unsigned NCH = NFFT / 2;
  localparam int unsigned CW  = $clog2(NCH);
  localparam int unsigned WW  = NA * 2 * QW;

  logic sync;
  pps_sync u_sync (.clk, .rst, .arm, .pps, .armed, .sync, .running);

  // ---- per-input channeliser chains --------------------------------------
  logic                 rq_valid [NA];
  logic [CW-1:0]        rq_chan  [NA];
  cq4_t                 rq_q     [NA];
  logic                 rq_last  [NA];
  logic                 rq_sat   [NA];

  for (genvar a = 0; a < NA; a++) begin : g_input
    logic                     pf_valid;
    logic signed [DW-1:0]     pf_y;
    logic                     ff_valid, ff_last;
    logic signed [DW-1:0]     ff_re, ff_im;
    logic [$clog2(NFFT)-1:0]  ff_bin;

    pfb_fir #(.NFFT(NFFT), .TAPS(TAPS), .IN_W(ADC_W), .OUT_W(DW)) u_pfb (
      .clk, .rst, .sync,
      .in_valid (adc_valid && running),
      .in_x     (adc[a]),
      .out_valid(pf_valid),
      .out_y    (pf_y)
    );

    fft_r2sdf #(.NFFT(NFFT), .DW(DW), .HALF(1'b1)) u_fft (
      .clk, .rst, .sync,
      .shift_sched(fft_shift),
      .in_valid (pf_valid),
      .in_re    (pf_y),
      .in_im    ('0),
      .out_valid(ff_valid),
      .out_re   (ff_re),
      .out_im   (ff_im),
      .out_bin  (ff_bin),
      .out_last (ff_last)
    );

    requant #(.NCH(NCH), .DW(DW)) u_rq (
      .clk, .rst,
      .gain_we   (gain_we && (gain_input == ($bits(gain_input))'(a))),
      .gain_addr (gain_chan),
      .gain_wdata(gain_val),
      .in_valid  (ff_valid),
      .in_chan   (ff_bin[CW-1:0]),
      .in_re     (ff_re),
      .in_im     (ff_im),
      .in_last   (ff_last),
      .out_valid (rq_valid[a]),
      .out_chan  (rq_chan[a]),
      .out_q     (rq_q[a]),
      .out_last  (rq_last[a]),
      .out_sat   (rq_sat[a])
    );
  end

  // ---- saturation monitor ------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst || sync) sat_count <= '0;
    else begin
      logic [31:0] n;
      n = '0;
      for (int a = 0; a < NA; a++) n += 32'(rq_sat[a]);
      sat_count <= sat_count + n;
    end
  end

  // ---- channel selection -------------------------------------------------
  logic                 cs_valid, cs_last;
  logic [CW-1:0]        cs_chan;
  logic [WW-1:0]        cs_word;
  logic [NPORT-1:0]     cs_hit;

  chan_select #(.NA(NA), .NCH(NCH), .NPORT(NPORT)) u_sel (
    .clk, .rst,
    .ch_lo, .ch_hi,
    .in_valid (rq_valid[0]),
    .in_chan  (rq_chan[0]),
    .in_q     (rq_q),
    .in_last  (rq_last[0]),
    .out_valid(cs_valid),
    .out_chan (cs_chan),
    .out_word (cs_word),
    .out_hit  (cs_hit),
    .out_last (cs_last)
  );

  // ---- per-port buffering and packet assembly ----------------------------
  for (genvar p = 0; p < NPORT; p++) begin : g_port
    logic                       pkt_valid, rd_en, rd_done, overflow;
    logic [63:0]                pkt_seq;
    logic [$clog2(BUFW+1)-1:0]  pkt_len;
    logic [$clog2(BUFW)-1:0]    rd_addr;
    logic [WW-1:0]              rd_data;

    spec_buffer #(.NCH(NCH), .WW(WW), .BUFW(BUFW), .NT_MAX(NT_MAX)) u_buf (
      .clk, .rst, .sync,
      .ch_lo    (ch_lo[p]),
      .nch      (ch_hi[p] - (CW+1)'(ch_lo[p])),
      .nt,
      .in_valid (cs_valid && cs_hit[p]),
      .in_chan  (cs_chan),
      .in_word  (cs_word),
      .in_last  (cs_last),
      .pkt_valid, .pkt_seq, .pkt_len,
      .rd_en, .rd_addr, .rd_data, .rd_done,
      .overflow
    );

    pkt_framer #(.WW(WW), .BUFW(BUFW)) u_tx (
      .clk, .rst,
      .fid,
      .pkt_valid, .pkt_seq, .pkt_len,
      .rd_en, .rd_addr, .rd_data, .rd_done,
      .tx_data  (tx_data[p]),
      .tx_valid (tx_valid[p]),
      .tx_eof   (tx_eof[p]),
      .tx_ready (tx_ready[p])
    );

    always_ff @(posedge clk) begin
      if (rst || sync) ovf_count[p] <= '0;
      else if (overflow) ovf_count[p] <= ovf_count[p] + 1'b1;
    end
  end
endmodule
