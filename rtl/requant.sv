// requant: equalisation and 4-bit requantisation of one input's spectrum.
//
// After the filter bank each channel is a 36-bit complex word (two DW-bit
// components). Since every channel of a Nyquist sample is noise-like, it can
// be cut to 4 bits real and 4 bits imaginary (this follows the paper), which
// shrinks the F-engine output and the network load. Each channel is first
// multiplied by its own equalisation gain, an unsigned GAIN_W-bit number with
// GAIN_FRAC fraction bits, held in a gain RAM the host writes. The result is
// rounded to its top QW bits: shift right by GAIN_FRAC+DW-QW with rounding.
// It then saturates to the symmetric range -(2^(QW-1)-1)..2^(QW-1)-1, so -8
// never appears. The gain format, the symmetric range and the start-up gain of
// 1.0 are this design's choices; the paper names the operation only.
//
// Timing: two clocks of latency (gain RAM read, then multiply and round), one
// channel per clock. `out_sat` flags a channel whose real or imaginary part
// was clipped.
module requant
  import fx_pkg::*;
#(
  parameter int unsigned NCH = NFFT_DEF / 2,   // channels held in the gain RAM
  parameter int unsigned DW  = DW_DEF
) (
  input  logic                     clk,
  input  logic                     rst,
  // gain RAM write port (host side)
  input  logic                     gain_we,
  input  logic [$clog2(NCH)-1:0]   gain_addr,
  input  logic [GAIN_W-1:0]        gain_wdata,
  // channel stream in
  input  logic                     in_valid,
  input  logic [$clog2(NCH)-1:0]   in_chan,
  input  logic signed [DW-1:0]     in_re,
  input  logic signed [DW-1:0]     in_im,
  input  logic                     in_last,
  // requantised stream out
  output logic                     out_valid,
  output logic [$clog2(NCH)-1:0]   out_chan,
  output cq4_t                     out_q,
  output logic                     out_last,
  output logic                     out_sat
);
  localparam int unsigned CW    = $clog2(NCH);
  localparam int unsigned PW    = DW + GAIN_W + 1;
  localparam int unsigned SHIFT = GAIN_FRAC + DW - QW;
  localparam int          QMAX  = (1 << (QW - 1)) - 1;

  logic [GAIN_W-1:0] gain_ram [NCH];
  initial for (int c = 0; c < NCH; c++) gain_ram[c] = GAIN_W'(1 << GAIN_FRAC);

  always_ff @(posedge clk) if (gain_we) gain_ram[gain_addr] <= gain_wdata;

  // stage 1: read the gain, hold the sample
  logic                 s1_valid, s1_last;
  logic [CW-1:0]        s1_chan;
  logic signed [DW-1:0] s1_re, s1_im;
  logic [GAIN_W-1:0]    s1_gain;

  always_ff @(posedge clk) begin
    if (rst) s1_valid <= 1'b0;
    else     s1_valid <= in_valid;
    s1_last <= in_last && in_valid;
    s1_chan <= in_chan;
    s1_re   <= in_re;
    s1_im   <= in_im;
    s1_gain <= gain_ram[in_chan];
  end

  // stage 2: scale, round, saturate
  function automatic logic signed [QW-1:0] quant(input logic signed [DW-1:0] x,
                                                 input logic [GAIN_W-1:0] g,
                                                 output logic clipped);
    logic signed [PW-1:0] p;
    p = (PW'(x) * $signed({1'b0, g}) + PW'(1 << (SHIFT - 1))) >>> SHIFT;
    clipped = 1'b0;
    if (p > PW'(QMAX)) begin
      clipped = 1'b1;
      return QW'(QMAX);
    end
    if (p < -PW'(QMAX)) begin
      clipped = 1'b1;
      return QW'(-QMAX);
    end
    return p[QW-1:0];
  endfunction

  logic             c_re, c_im;
  logic [QW-1:0]    q_re, q_im;
  always_comb begin
    q_re = quant(s1_re, s1_gain, c_re);
    q_im = quant(s1_im, s1_gain, c_im);
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= s1_valid;
    out_last <= s1_last && s1_valid;
    out_chan <= s1_chan;
    out_q    <= '{re: q_re, im: q_im};
    out_sat  <= s1_valid && (c_re || c_im);
  end
endmodule
