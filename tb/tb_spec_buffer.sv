// tb_spec_buffer: writes spectra of 16 channels, in bit-reversed channel
// order, into a spec_buffer that keeps channels [5,11) and gathers nt=3
// spectra per packet. A reader model drains each completed packet through
// the synchronous read port and checks every word against the expected
// (time sample, channel) order, plus the sequence number and the length.
// In the middle of the run the reader stalls so packets complete while the
// other bank is still pending: those must be dropped with an overflow pulse
// and leave a gap in the sequence numbers.
module tb_spec_buffer;
  localparam int NCH = 16, WW = 32, BUFW = 32, NT_MAX = 4;
  localparam int LO = 5, NC = 6, NT = 3, NSPEC = 60;

  logic clk = 1'b0, rst = 1'b1, sync = 1'b0;
  logic [3:0] ch_lo = 4'(LO);
  logic [4:0] nch = 5'(NC);
  logic [2:0] nt = 3'(NT);
  logic in_valid = 1'b0, in_last = 1'b0;
  logic [3:0] in_chan = '0;
  logic [WW-1:0] in_word = '0;
  logic pkt_valid, overflow;
  logic [63:0] pkt_seq;
  logic [5:0] pkt_len;
  logic rd_en = 1'b0, rd_done = 1'b0;
  logic [4:0] rd_addr = '0;
  logic [WW-1:0] rd_data;
  int checks = 0, failures = 0;

  spec_buffer #(.NCH(NCH), .WW(WW), .BUFW(BUFW), .NT_MAX(NT_MAX)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  // The word for spectrum s, channel c is a function of both.
  function automatic logic [WW-1:0] word_of(int s, int c);
    return WW'(32'h1000_0000 ^ (s << 8) ^ c ^ (s * 32'h9e37_79b9));
  endfunction

  int n_ovf = 0, n_pkt = 0, last_seq = -1, n_gap = 0;
  bit stall = 0;
  always @(posedge clk) if (!rst && overflow) n_ovf <= n_ovf + 1;

  // writer: one spectrum of NCH channels per NCH+2 clocks, bit-reversed order
  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    @(negedge clk); sync = 1'b1; @(negedge clk); sync = 1'b0;
    for (int s = 0; s < NSPEC; s++) begin
      for (int p = 0; p < NCH; p++) begin
        automatic int c = int'({p[0], p[1], p[2], p[3]});
        in_chan  = 4'(c);
        in_word  = word_of(s, c);
        in_valid = (c >= LO && c < LO + NC);
        in_last  = (p == NCH - 1);
        @(negedge clk);
      end
      in_valid = 1'b0;
      in_last  = 1'b0;
      repeat (2) @(negedge clk);
      if (s == 20) stall = 1;
      if (s == 35) stall = 0;
    end
    repeat (200) @(negedge clk);
    check(n_pkt >= 10, $sformatf("%0d packets read", n_pkt));
    check(n_ovf > 0, "overflow happened");
    check(n_gap > 0, "sequence gap after overflow");
    check(n_pkt + n_ovf == NSPEC / NT, $sformatf("%0d sent + %0d dropped", n_pkt, n_ovf));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reader
  initial begin
    @(negedge rst);
    forever begin
      @(negedge clk);
      if (pkt_valid && !stall) begin
        automatic int seq = int'(pkt_seq);
        check(pkt_len == 6'(NT * NC), $sformatf("length %0d", pkt_len));
        if (last_seq >= 0 && seq != last_seq + 1) n_gap++;
        check(seq > last_seq, "sequence increases");
        last_seq = seq;
        for (int a = 0; a < NT * NC; a++) begin
          rd_en = 1'b1; rd_addr = 5'(a);
          @(negedge clk);
          rd_en = 1'b0;
          check(rd_data == word_of(seq * NT + a / NC, LO + a % NC),
                $sformatf("seq %0d word %0d got %h want %h", seq, a, rd_data, word_of(seq*NT + a/NC, LO + a%NC)));
          // rd_data holds without rd_en
          @(negedge clk);
          check(rd_data == word_of(seq * NT + a / NC, LO + a % NC), "read data holds");
        end
        rd_done = 1'b1;
        @(negedge clk);
        rd_done = 1'b0;
        n_pkt++;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
