// tb_requant: writes random equalisation gains into half of a 16-channel
// requant (the other half keeps the start-up gain of 1.0), streams random
// 18-bit samples through and compares each 4-bit output with
// clip(round(x*g / 2^(GAIN_FRAC+DW-QW)), -7, 7) worked out here, along with
// the clip flag, the channel number, the end mark and the 2-clock latency.
module tb_requant;
  import fx_pkg::*;
  localparam int NCH = 16, DW = 18, N = 600;
  localparam int SHIFT = GAIN_FRAC + DW - QW;

  logic clk = 1'b0, rst = 1'b1;
  logic gain_we = 1'b0;
  logic [3:0] gain_addr = '0;
  logic [GAIN_W-1:0] gain_wdata = '0;
  logic in_valid = 1'b0, in_last = 1'b0;
  logic [3:0] in_chan = '0;
  logic signed [DW-1:0] in_re = '0, in_im = '0;
  logic out_valid, out_last, out_sat;
  logic [3:0] out_chan;
  cq4_t out_q;
  int checks = 0, failures = 0;

  requant #(.NCH(NCH), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  int g [NCH];
  int xr [N], xi [N], ch [N];
  int cyc = 0, n_out = 0, n_sat = 0, in_cyc [N];

  function automatic int q(int x, int gg, output bit c);
    longint p = (longint'(x) * gg + (longint'(1) <<< (SHIFT-1))) >>> SHIFT;
    c = 0;
    if (p > 7)  begin c = 1; return 7;  end
    if (p < -7) begin c = 1; return -7; end
    return int'(p);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && out_valid) begin
      automatic bit cr, ci;
      automatic int k = n_out;
      automatic int wr = q(xr[k], g[ch[k]], cr);
      automatic int wi = q(xi[k], g[ch[k]], ci);
      check(int'(out_q.re) == wr && int'(out_q.im) == wi,
            $sformatf("sample %0d ch %0d got (%0d,%0d) want (%0d,%0d)", k, ch[k], out_q.re, out_q.im, wr, wi));
      check(out_sat == (cr || ci), "clip flag");
      check(int'(out_chan) == ch[k], "channel tag");
      check(out_last == (k % NCH == NCH - 1), "end mark");
      check(cyc - in_cyc[k] == 2, $sformatf("latency %0d", cyc - in_cyc[k]));
      if (out_sat) n_sat <= n_sat + 1;
      n_out <= n_out + 1;
    end
  end

  initial begin
    for (int c = 0; c < NCH; c++) g[c] = 1 << GAIN_FRAC;
    for (int k = 0; k < N; k++) begin
      ch[k] = k % NCH;
      xr[k] = int'($urandom_range((1 << DW) - 1)) - (1 << (DW-1));
      xi[k] = int'($urandom_range((1 << DW) - 1)) - (1 << (DW-1));
      if (k % 5 == 0) begin   // small values too
        xr[k] = xr[k] / 64;
        xi[k] = xi[k] / 64;
      end
    end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // odd channels get random gains from 0 to 16.0
    for (int c = 1; c < NCH; c += 2) begin
      g[c] = int'($urandom_range(4096));
      gain_we = 1'b1; gain_addr = 4'(c); gain_wdata = GAIN_W'(g[c]);
      @(negedge clk);
    end
    gain_we = 1'b0;
    for (int k = 0; k < N; k++) begin
      in_valid = 1'b1;
      in_chan = 4'(ch[k]);
      in_re = DW'(xr[k]);
      in_im = DW'(xi[k]);
      in_last = (ch[k] == NCH - 1);
      in_cyc[k] = cyc;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    check(n_out == N, $sformatf("%0d outputs", n_out));
    check(n_sat > 0 && n_sat < N, "clipping happened but not everywhere");
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
