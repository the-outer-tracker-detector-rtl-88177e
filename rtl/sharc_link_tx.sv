`timescale 1ns/1ps
// sharc_link_tx: transmit-only link port towards a SHARC DSP.
//
// Bytes from the protocol control unit are packed, first byte in the most
// significant position, into 48-bit words. A full word is sent as 12 nibbles on
// the four data lines, most significant nibble first, one nibble per system
// clock; the link clock line toggles with every nibble, so the receiver takes
// a nibble on each transition. A word starts only while the receiver holds
// `lack` (acknowledge) high. Collection and transmission overlap, so words
// follow each other without gaps: 4 bits per clock, i.e. 15 MByte/s at 30 MHz
// and 13.5 MByte/s at the 27 MHz used in the Outer Tracker.
// Four data lines, clock, acknowledge, 48-bit words and transmit-only
// operation follow the paper; the nibble order, the toggle clocking and the
// meaning of `lack` are this design's choices. `byte_ready` is registered.
module sharc_link_tx (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] byte_in,
  input  logic       byte_valid,
  output logic       byte_ready,
  input  logic       lack,
  output logic       lclk,
  output logic [3:0] ldata,
  output logic [15:0] words_sent
);
  logic [47:0] cbuf, sreg;
  logic [2:0]  ccnt;     // bytes collected, 0..6
  logic [3:0]  scnt;     // nibbles left to send, 0..12
  logic        load;

  assign byte_ready = (ccnt != 3'd6);
  assign load       = (scnt <= 4'd1) && (ccnt == 3'd6) && lack;

  always_ff @(posedge clk)
    if (rst) begin
      cbuf <= '0; sreg <= '0; ccnt <= '0; scnt <= '0;
      lclk <= 1'b0; ldata <= '0; words_sent <= '0;
    end else begin
      if (scnt != 0) begin
        ldata <= sreg[47:44];
        sreg  <= sreg << 4;
        lclk  <= ~lclk;
        scnt  <= scnt - 1'b1;
      end
      if (load) begin
        sreg       <= cbuf;
        scnt       <= 4'd12;
        ccnt       <= '0;
        words_sent <= words_sent + 1'b1;
      end else if (byte_valid && byte_ready) begin
        cbuf <= {cbuf[39:0], byte_in};
        ccnt <= ccnt + 1'b1;
      end
    end
endmodule
