`timescale 1ns/1ps
// pcu: Protocol Control Unit of the TDC board.
//
// When every chip has an event waiting, the PCU sends one Event Format Block of
// HDR_BYTES + N_CHIPS*8 + TRL_BYTES bytes (144 with the default 16 chips) to the
// link transmitter: a header, then the data field read from all channels in
// sequence (chip 0 channel 0 first, channel address fastest) through the chip
// and channel select pins, then a trailer. Each data byte is taken from the
// shared data bus and removed from its derandomizer with one `rd` strobe, in
// the same clock in which the transmitter accepts it, so a block takes one
// clock per byte when the link keeps up.
// Header: 0xB5, board address, event number (2 bytes, MSB first), number of
// data bytes, three zero bytes. Trailer: XOR of the data bytes, the 16 chip
// overflow flags (2 bytes, chip 15 first), event number LSB, three zero bytes,
// 0xE5. The paper gives the sequential addressing, the 144-byte length and the
// three fields; their contents are defined in a reference it cites and are this
// design's own here. The overflow flags come from the BX clock domain and are
// synchronised with two flops.
module pcu
  import tdc_pkg::*;
#(
  parameter int N_CHIPS   = 16,
  parameter int HDR_BYTES = 8,
  parameter int TRL_BYTES = 8
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [7:0]         board_addr,
  input  logic               events_ready,   // every chip has an event waiting
  input  logic [N_CHIPS-1:0] overflow,       // BX clock domain
  input  time_t              bus_data,
  output logic               chip_preselect,
  output logic [CHIP_AW-1:0] chip_addr,
  output logic [CHAN_AW-1:0] chan_addr,
  output logic               rd,
  output logic [7:0]         byte_out,
  output logic               byte_valid,
  input  logic               byte_ready,
  output logic [15:0]        event_count
);
  localparam int N_DATA = N_CHIPS * N_CH;
  localparam int IW     = $clog2(N_DATA + 1);

  typedef enum logic [1:0] {P_IDLE, P_HDR, P_DATA, P_TRL} pstate_e;
  pstate_e state;

  logic [IW-1:0]      idx;
  logic [7:0]         xsum;
  logic [N_CHIPS-1:0] ovf_s1, ovf_s2;
  logic [15:0]        ovf16;
  logic               take;

  always_ff @(posedge clk)
    if (rst) {ovf_s2, ovf_s1} <= '0;
    else     {ovf_s2, ovf_s1} <= {ovf_s1, overflow};

  assign ovf16 = 16'(ovf_s2);
  assign take  = byte_valid && byte_ready;

  always_comb begin
    byte_out = 8'h00;
    unique case (state)
      P_HDR: case (idx)
        0: byte_out = 8'hB5;
        1: byte_out = board_addr;
        2: byte_out = event_count[15:8];
        3: byte_out = event_count[7:0];
        4: byte_out = 8'(N_DATA);
        default: byte_out = 8'h00;
      endcase
      P_DATA: byte_out = bus_data;
      P_TRL: case (idx)
        0: byte_out = xsum;
        1: byte_out = ovf16[15:8];
        2: byte_out = ovf16[7:0];
        3: byte_out = event_count[7:0];
        7: byte_out = 8'hE5;
        default: byte_out = 8'h00;
      endcase
      default: byte_out = 8'h00;
    endcase
  end

  assign byte_valid     = (state != P_IDLE);
  assign chip_preselect = (state == P_DATA);
  assign rd             = (state == P_DATA) && byte_ready;
  assign chan_addr      = (state == P_DATA) ? idx[CHAN_AW-1:0] : '0;
  assign chip_addr      = (state == P_DATA) ? CHIP_AW'(idx >> CHAN_AW) : '0;

  always_ff @(posedge clk)
    if (rst) begin
      state <= P_IDLE; idx <= '0; xsum <= '0; event_count <= '0;
    end else begin
      unique case (state)
        P_IDLE: if (events_ready) begin
          state <= P_HDR; idx <= '0; xsum <= '0;
        end
        P_HDR: if (take) begin
          if (idx == IW'(HDR_BYTES - 1)) begin state <= P_DATA; idx <= '0; end
          else idx <= idx + 1'b1;
        end
        P_DATA: if (take) begin
          xsum <= xsum ^ bus_data;
          if (idx == IW'(N_DATA - 1)) begin state <= P_TRL; idx <= '0; end
          else idx <= idx + 1'b1;
        end
        P_TRL: if (take) begin
          if (idx == IW'(TRL_BYTES - 1)) begin
            state <= P_IDLE; idx <= '0; event_count <= event_count + 1'b1;
          end else idx <= idx + 1'b1;
        end
        default: state <= P_IDLE;
      endcase
    end
endmodule
