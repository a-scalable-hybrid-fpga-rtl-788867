// fft_r2sdf: streaming NFFT-point FFT, one complex sample per clock.
//
// The second half of the polyphase filter bank: log2(NFFT) radix-2
// decimation-in-frequency SDF stages (fft_sdf_stage) with spans NFFT/2 down
// to 1. The paper takes its FFT from the CASPER library and does not describe
// how it works; this pipeline is the simplest one that keeps up with one ADC
// sample per clock, as a 200 MS/s ADC on a 200 MHz FPGA clock needs.
//
// Bits of `shift_sched` (bit s for stage s, span NFFT/2^(s+1)) halve that
// stage's butterfly outputs, as a CASPER FFT shift schedule does.
// Results leave in bit-reversed order; `out_bin` gives the natural bin
// number. The F-engine input is real, so bins NFFT/2..NFFT-1 mirror the lower
// half. With HALF=1 only bins 0..NFFT/2-1 are flagged valid: every other
// output clock. `out_last` marks the last valid bin of a frame.
// Timing: latency from the first sample of a frame to its first result is
// NFFT-1 sample clocks plus log2(NFFT) register stages. A steady input stream
// gives a steady output stream. `sync` restarts the frame alignment.
module fft_r2sdf #(
  parameter int unsigned NFFT = 8192,
  parameter int unsigned DW   = 18,
  parameter int unsigned TW   = 18,
  parameter bit          HALF = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     sync,
  input  logic [$clog2(NFFT)-1:0]  shift_sched,
  input  logic                     in_valid,
  input  logic signed [DW-1:0]     in_re,
  input  logic signed [DW-1:0]     in_im,
  output logic                     out_valid,
  output logic signed [DW-1:0]     out_re,
  output logic signed [DW-1:0]     out_im,
  output logic [$clog2(NFFT)-1:0]  out_bin,
  output logic                     out_last
);
  localparam int unsigned L = $clog2(NFFT);

  logic                 v  [L+1];
  logic signed [DW-1:0] re [L+1];
  logic signed [DW-1:0] im [L+1];

  assign v[0]  = in_valid;
  assign re[0] = in_re;
  assign im[0] = in_im;

  for (genvar s = 0; s < L; s++) begin : g_stage
    fft_sdf_stage #(.D(NFFT >> (s + 1)), .DW(DW), .TW(TW)) u_stage (
      .clk, .rst, .sync,
      .shift    (shift_sched[s]),
      .in_valid (v[s]),
      .in_re    (re[s]),
      .in_im    (im[s]),
      .out_valid(v[s+1]),
      .out_re   (re[s+1]),
      .out_im   (im[s+1])
    );
  end

  // Output position counter; the bin is its bit reversal.
  logic [L-1:0] pos;
  logic [L-1:0] bin;
  always_comb for (int b = 0; b < L; b++) bin[b] = pos[L-1-b];

  always_ff @(posedge clk) begin
    if (rst || sync) pos <= '0;
    else if (v[L])   pos <= pos + 1'b1;
  end

  assign out_valid = v[L] && (!HALF || !bin[L-1]);
  assign out_re    = re[L];
  assign out_im    = im[L];
  assign out_bin   = bin;
  assign out_last  = out_valid && (pos == (HALF ? L'(NFFT - 2) : L'(NFFT - 1)));
endmodule
