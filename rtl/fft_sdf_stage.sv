// fft_sdf_stage: one radix-2 single-path delay-feedback (SDF) stage of a
// decimation-in-frequency FFT, used by fft_r2sdf.
//
// A stage with butterfly span D works on blocks of 2D samples. During the first
// D samples of a block it stores them in a D-deep feedback memory and sends out
// what the memory held before: the twiddled differences of the previous block.
// During the second D samples it pairs each input b with the stored a, sends
// out a+b, and stores (a-b)*W^j, where j is the position in the half-block and
// W = exp(-2*pi*i/(2D)). With `shift` high, both a+b and a-b are halved with
// rounding (one bit of a CASPER-style FFT shift schedule); results saturate to
// DW bits. The rotation for j = 0 is exactly 1 and bypasses the multiplier.
//
// Timing: one sample per clock when in_valid is high. The output is
// registered. The stage delays the stream by D samples plus that register.
// out_valid stays low for the first D samples after `sync`. After that every
// valid input yields one valid output.
// The feedback memory is read asynchronously (distributed RAM); the twiddle
// table is computed into a ROM at start-up. Both are this design's choices.
module fft_sdf_stage #(
  parameter int unsigned D  = 4,
  parameter int unsigned DW = 18,
  parameter int unsigned TW = 18
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 sync,
  input  logic                 shift,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_re,
  input  logic signed [DW-1:0] in_im,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_re,
  output logic signed [DW-1:0] out_im
);
  localparam int unsigned JW = (D > 1) ? $clog2(D) : 1;
  localparam real         PI = 3.14159265358979323846;
  localparam int          WMAX = (1 << (TW - 1)) - 1;

  logic signed [DW-1:0] mem_re [D];
  logic signed [DW-1:0] mem_im [D];
  logic signed [TW-1:0] tw_re  [D];
  logic signed [TW-1:0] tw_im  [D];

  initial begin
    for (int j = 0; j < D; j++) begin
      tw_re[j] = TW'($rtoi($cos(PI * real'(j) / real'(D)) * real'(WMAX)));
      tw_im[j] = TW'(-$rtoi($sin(PI * real'(j) / real'(D)) * real'(WMAX)));
    end
  end

  logic [JW-1:0] j;        // position in the half block
  logic          phase;    // 0: fill, 1: butterfly
  logic          primed;

  logic signed [DW-1:0] a_re, a_im;
  assign a_re = mem_re[j];
  assign a_im = mem_im[j];

  function automatic logic signed [DW-1:0] sat(input logic signed [DW+TW:0] x);
    if (x > (DW+TW+1)'((1 << (DW - 1)) - 1)) return DW'((1 << (DW - 1)) - 1);
    if (x < -(DW+TW+1)'(1 << (DW - 1)))      return DW'(-(1 << (DW - 1)));
    return x[DW-1:0];
  endfunction

  // Butterfly with optional rounding halve.
  function automatic logic signed [DW-1:0] bfly(input logic signed [DW:0] x, input logic sh);
    logic signed [DW+TW:0] w;
    w = (DW+TW+1)'(x);
    if (sh) w = (w + 1) >>> 1;
    return sat(w);
  endfunction

  logic signed [DW-1:0] s_re, s_im, d_re, d_im;
  assign s_re = bfly((DW+1)'(a_re) + (DW+1)'(in_re), shift);
  assign s_im = bfly((DW+1)'(a_im) + (DW+1)'(in_im), shift);
  assign d_re = bfly((DW+1)'(a_re) - (DW+1)'(in_re), shift);
  assign d_im = bfly((DW+1)'(a_im) - (DW+1)'(in_im), shift);

  // Complex rotation of the difference, rounded back to DW bits.
  logic signed [DW+TW:0] p_re, p_im;
  logic signed [DW-1:0]  r_re, r_im;
  always_comb begin
    p_re = (DW+TW+1)'(d_re) * (DW+TW+1)'(tw_re[j]) - (DW+TW+1)'(d_im) * (DW+TW+1)'(tw_im[j]);
    p_im = (DW+TW+1)'(d_re) * (DW+TW+1)'(tw_im[j]) + (DW+TW+1)'(d_im) * (DW+TW+1)'(tw_re[j]);
    if (j == '0) begin
      r_re = d_re;
      r_im = d_im;
    end else begin
      r_re = sat((p_re + (DW+TW+1)'(1 << (TW - 2))) >>> (TW - 1));
      r_im = sat((p_im + (DW+TW+1)'(1 << (TW - 2))) >>> (TW - 1));
    end
  end

  always_ff @(posedge clk) begin
    if (rst || sync) begin
      j         <= '0;
      phase     <= 1'b0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && (primed || phase);
      if (in_valid) begin
        if (!phase) begin
          out_re <= a_re;
          out_im <= a_im;
        end else begin
          out_re <= s_re;
          out_im <= s_im;
          primed <= 1'b1;
        end
        if (D == 1 || j == JW'(D - 1)) begin
          j     <= '0;
          phase <= ~phase;
        end else begin
          j <= j + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !(rst || sync)) begin
      mem_re[j] <= phase ? r_re : in_re;
      mem_im[j] <= phase ? r_im : in_im;
    end
  end
endmodule
