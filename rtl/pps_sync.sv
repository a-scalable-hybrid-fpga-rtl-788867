// pps_sync: starts the F-engine on a pulse-per-second edge.
//
// Every F-engine board receives the same PPS. The host arms each board; the
// first PPS rising edge after arming produces a one-cycle `sync` pulse that
// clears every frame and packet counter in the pipeline and sets `running`,
// which lets ADC samples into the filter bank. Because all boards start on the
// same edge, a packet sequence number is a timestamp relative to that edge and
// no other timing hardware is needed (this part follows the paper).
//
// The PPS input is asynchronous; it passes a two-flop synchroniser and is then
// edge-detected, so `sync` comes 3 clocks after the edge reaches `pps`. Arming
// while running restarts the engine on the next edge. Synchroniser depth,
// restart-on-rearm and the `armed` status are this design's choices.
module pps_sync (
  input  logic clk,
  input  logic rst,       // synchronous, active high
  input  logic arm,       // one-cycle request from the host
  input  logic pps,       // asynchronous pulse per second
  output logic armed,     // waiting for the next PPS edge
  output logic sync,      // one-cycle start pulse
  output logic running    // high from sync onwards
);
  logic [2:0] pps_sr;     // two synchroniser flops plus one for the edge
  logic       pps_rise;

  assign pps_rise = pps_sr[1] & ~pps_sr[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      pps_sr  <= '0;
      armed   <= 1'b0;
      sync    <= 1'b0;
      running <= 1'b0;
    end else begin
      pps_sr <= {pps_sr[1:0], pps};
      sync   <= 1'b0;
      if (arm) begin
        armed <= 1'b1;
      end else if (armed && pps_rise) begin
        armed   <= 1'b0;
        sync    <= 1'b1;
        running <= 1'b1;
      end
    end
  end
endmodule
