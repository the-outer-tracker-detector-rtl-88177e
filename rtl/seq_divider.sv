`timescale 1ns/1ps
// seq_divider: unsigned restoring divider, one quotient bit per clock.
//
// Helper of the calibration unit, which needs one division per calibrated
// channel (gain = 256 * 2^F / slope) and one per re-calibration
// (correction = slope_ref * 2^F / slope). `start` loads the operands; NW
// clocks later `done` pulses with `quo` = floor(num / den). Division by zero
// returns all ones.
module seq_divider #(
  parameter int NW = 20,
  parameter int DW = 10
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quo
);
  logic [DW:0]           rem;
  logic [DW-1:0]         d;
  logic [$clog2(NW+1)-1:0] cnt;

  always_ff @(posedge clk)
    if (rst) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0; rem <= '0; quo <= '0; d <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        quo  <= num;
        d    <= den;
        rem  <= '0;
        cnt  <= ($clog2(NW+1))'(NW);
        busy <= 1'b1;
      end else if (busy) begin
        logic [DW+1:0] r;
        r = {rem, quo[NW-1]};
        if (r >= {2'b00, d}) begin
          rem <= (DW+1)'(r - {2'b00, d});
          quo <= {quo[NW-2:0], 1'b1};
        end else begin
          rem <= r[DW:0];
          quo <= {quo[NW-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
endmodule
