// tb_chan_select: streams random 4-input channel samples in shuffled channel
// order through chan_select with two overlapping port bands, [3,10) and
// [8,20), and checks the packed word (input 1 in the top byte, real nibble
// above imaginary), the per-port hit bits, the dropping of channels outside
// both bands, the forwarding of the end mark and the 1-clock latency.
module tb_chan_select;
  import fx_pkg::*;
  localparam int NA = 4, NCH = 32, NPORT = 2, N = 400;

  logic clk = 1'b0, rst = 1'b1;
  logic [4:0] ch_lo [NPORT];
  logic [5:0] ch_hi [NPORT];
  logic in_valid = 1'b0, in_last = 1'b0;
  logic [4:0] in_chan = '0;
  cq4_t in_q [NA];
  logic out_valid, out_last;
  logic [4:0] out_chan;
  logic [NA*8-1:0] out_word;
  logic [NPORT-1:0] out_hit;
  int checks = 0, failures = 0;

  chan_select #(.NA(NA), .NCH(NCH), .NPORT(NPORT)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  int exp_valid, exp_last, exp_chan, nkept = 0, ndrop = 0, nlast = 0;
  logic [NA*8-1:0] exp_word;
  logic [1:0] exp_hit;

  initial begin
    ch_lo[0] = 5'd3;  ch_hi[0] = 6'd10;
    ch_lo[1] = 5'd8;  ch_hi[1] = 6'd20;
    for (int a = 0; a < NA; a++) in_q[a] = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int k = 0; k < N; k++) begin
      automatic int c = int'($urandom_range(NCH - 1));
      in_valid = ($urandom_range(5) != 0);
      in_chan = 5'(c);
      in_last = (k % 32 == 31);
      for (int a = 0; a < NA; a++) in_q[a] = cq4_t'($urandom_range(255));
      // reference, from the inputs as they stand
      exp_hit[0] = in_valid && c >= 3 && c < 10;
      exp_hit[1] = in_valid && c >= 8 && c < 20;
      exp_valid  = int'(exp_hit != 0);
      exp_last   = int'(in_valid && in_last);
      exp_chan   = c;
      for (int a = 0; a < NA; a++) exp_word[8*(NA-1-a) +: 8] = {in_q[a].re, in_q[a].im};
      @(posedge clk);
      #1;
      check(int'(out_valid) == exp_valid, $sformatf("valid for channel %0d", c));
      check(out_hit == exp_hit, $sformatf("hit %b want %b for channel %0d", out_hit, exp_hit, c));
      check(int'(out_last) == exp_last, "end mark");
      if (exp_valid) begin
        check(int'(out_chan) == exp_chan && out_word == exp_word,
              $sformatf("word %h want %h", out_word, exp_word));
        nkept++;
      end else if (in_valid) ndrop++;
      if (exp_last) nlast++;
      @(negedge clk);
    end
    check(nkept > 0 && ndrop > 0 && nlast > 0, "kept, dropped and end-marked channels all seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
