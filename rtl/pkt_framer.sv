// pkt_framer: packet assembly for one Ethernet port.
//
// Sends each packet the spec_buffer completes as a stream of 64-bit words:
//   word 0            64-bit sequence number
//   word 1            64-bit identifier (F-engine id in the low 16 bits, rest reserved)
//   words 2..len+1    data: per time sample, per channel Ch_s..Ch_f-1, one byte
//                     per input (4-bit real, 4-bit imaginary), inputs 1..NA
// The 16-byte header made of a sequence number and an F-engine identifier,
// and the data order, follow the paper. Together the two numbers tell the
// receiving server where in memory the packet belongs, whatever order
// packets arrive in. The identifier layout is this design's choice.
//
// The stream goes to a 10 GbE core (not part of this design). A word is
// transferred in a cycle with tx_valid and tx_ready both high; tx_eof marks
// the last word. While tx_valid is high and tx_ready low, the word holds
// steady. Without backpressure a packet of len data words takes len+2
// clocks. The buffer is read one word ahead through its synchronous read
// port. `rd_done` releases the bank on the last transfer.
module pkt_framer
  import fx_pkg::*;
#(
  parameter int unsigned WW   = NA_DEF * 2 * QW,
  parameter int unsigned BUFW = BUFW_DEF
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [15:0]                fid,
  // from spec_buffer
  input  logic                       pkt_valid,
  input  logic [63:0]                pkt_seq,
  input  logic [$clog2(BUFW+1)-1:0]  pkt_len,
  output logic                       rd_en,
  output logic [$clog2(BUFW)-1:0]    rd_addr,
  input  logic [WW-1:0]              rd_data,
  output logic                       rd_done,
  // towards the 10 GbE core
  output logic [63:0]                tx_data,
  output logic                       tx_valid,
  output logic                       tx_eof,
  input  logic                       tx_ready
);
  localparam int unsigned AW = $clog2(BUFW);
  localparam int unsigned LW = $clog2(BUFW + 1);

  typedef enum logic [1:0] {IDLE, HDR_SEQ, HDR_ID, DATA} state_t;
  state_t  state;
  logic [LW-1:0] k;          // index of the data word on the output
  logic          xfer;
  pkt_hdr_t      hdr;

  assign xfer = tx_valid && tx_ready;
  assign hdr  = '{seq: pkt_seq, ident: make_ident(fid)};

  always_comb begin
    tx_valid = (state != IDLE);
    tx_eof   = (state == DATA) && (k == pkt_len - 1'b1);
    unique case (state)
      HDR_SEQ: tx_data = hdr.seq;
      HDR_ID:  tx_data = hdr.ident;
      DATA:    tx_data = 64'(rd_data);
      default: tx_data = '0;
    endcase
    // Fetch word 0 as the identifier leaves, then word k+1 as word k leaves.
    rd_en   = xfer && ((state == HDR_ID) || (state == DATA && !tx_eof));
    rd_addr = (state == HDR_ID) ? '0 : AW'(k + 1'b1);
    rd_done = xfer && tx_eof;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= IDLE;
      k     <= '0;
    end else begin
      unique case (state)
        IDLE:    if (pkt_valid && pkt_len != '0) state <= HDR_SEQ;
        HDR_SEQ: if (xfer) state <= HDR_ID;
        HDR_ID:  if (xfer) begin
                   state <= DATA;
                   k     <= '0;
                 end
        DATA:    if (xfer) begin
                   if (tx_eof) state <= IDLE;
                   else        k <= k + 1'b1;
                 end
        default: state <= IDLE;
      endcase
    end
  end

  // Stream rule: a word offered and not taken stays put.
  assert property (@(posedge clk) disable iff (rst)
                   tx_valid && !tx_ready |=> tx_valid && $stable(tx_data) && $stable(tx_eof))
    else $error("pkt_framer: word changed under backpressure");
endmodule
