// tb_pkt_framer: offers pkt_framer a series of packets from a buffer model
// with a synchronous read port and takes the Ethernet stream with a random
// tx_ready. Checks the two header words (sequence number, identifier with
// the F-engine id), each data word in order, tx_eof on the last word only,
// the rd_done release and, in a first packet with tx_ready held high, that
// a packet of len words takes len+2 clocks.
module tb_pkt_framer;
  import fx_pkg::*;
  localparam int WW = 64, BUFW = 64, NPKT = 12;

  logic clk = 1'b0, rst = 1'b1;
  logic [15:0] fid = 16'h0a5c;
  logic pkt_valid = 1'b0;
  logic [63:0] pkt_seq = '0;
  logic [6:0] pkt_len = '0;
  logic rd_en, rd_done;
  logic [5:0] rd_addr;
  logic [WW-1:0] rd_data;
  logic [63:0] tx_data;
  logic tx_valid, tx_eof;
  logic tx_ready = 1'b1;
  int checks = 0, failures = 0;

  pkt_framer #(.WW(WW), .BUFW(BUFW)) dut (.*);

  always #5 clk = ~clk;

  logic [WW-1:0] mem [BUFW];
  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [63:0] dword(int pkt, int k);
    return {32'(pkt), 32'(k)} ^ 64'hdead_beef_0000_0000;
  endfunction

  bit random_ready = 0;
  int cyc = 0, n_rdy_low = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) begin
    tx_ready = random_ready ? ($urandom_range(2) != 0) : 1'b1;
    if (!tx_ready && tx_valid) n_rdy_low++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int p = 0; p < NPKT; p++) begin
      automatic int len = (p == 0) ? 40 : int'($urandom_range(BUFW - 1)) + 1;
      automatic int k = -2, t0 = -1, n_done = 0;
      for (int a = 0; a < BUFW; a++) mem[a] = dword(p, a);
      random_ready = (p != 0);
      @(negedge clk);
      pkt_valid = 1'b1;
      pkt_seq = 64'h0123_4567_0000_0000 + 64'(p);
      pkt_len = 7'(len);
      // collect the stream
      while (k < len) begin
        @(posedge clk);
        if (rd_done) n_done++;
        if (tx_valid && tx_ready) begin
          if (t0 < 0) t0 = cyc;
          if (k == -2) check(tx_data == pkt_seq, $sformatf("seq word %h", tx_data));
          else if (k == -1) check(tx_data == {48'd0, fid}, $sformatf("id word %h", tx_data));
          else check(tx_data == dword(p, k), $sformatf("pkt %0d word %0d got %h", p, k, tx_data));
          check(tx_eof == (k == len - 1), $sformatf("eof at %0d of %0d", k, len));
          if (k == len - 1) begin
            check(n_done == 1 && rd_done, "rd_done with the last word only");
            if (p == 0) check(cyc - t0 + 1 == len + 2, $sformatf("packet took %0d clocks", cyc - t0 + 1));
          end
          k++;
        end
      end
      @(negedge clk);
      pkt_valid = 1'b0;
      repeat (3) @(negedge clk);
      check(!tx_valid, "idle after the packet");
    end
    check(n_rdy_low > 0, "backpressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
