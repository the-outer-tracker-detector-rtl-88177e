`timescale 1ns/1ps
// cal_unit: internal calibration of the nine time channels.
//
// Runs on the 10 MHz gauge clock. After reset it calibrates every channel in
// turn: it fires the channel's delay line with a START on one gauge edge and a
// STOP one gauge period later (100 ns), reads the raw count, then repeats with
// two periods (200 ns). From the two counts r100 and r200 it forms the straight
// line of raw count against time,
//   slope  = r200 - r100          (counts per 100 ns)
//   offset = r100 - slope         (count at zero interval)
//   gain   = 256 * 2^F / slope    (maps 100 ns onto 256 output counts)
// and writes offset and gain into the calibration memory. The slope of the
// calibration channel (index 8) is kept as the reference. Every RECAL_CYCLES
// gauge periods (0.8 s at 10 MHz) it re-measures only the calibration channel
// and writes the correction factor corr = 2^F * slope_ref / slope_now, which the
// multiplier applies to all channels; the eight time channels keep taking data
// meanwhile. Intervals, the 100/200 ns points, the 0.8 s period and the use of
// the calibration channel follow the paper; the order of the measurements,
// the fixed-point format and the sequential divider are this design's choices.
// `ready` goes high when the start-up calibration has finished; `recal_done`
// pulses after each re-calibration.
module cal_unit
  import tdc_pkg::*;
#(
  parameter int unsigned RECAL_CYCLES = 8_000_000
) (
  input  logic                     clk,       // gauge clock
  input  logic                     rst,
  input  logic [RAW_W-1:0]         cal_raw [N_CALCH],
  output logic [N_CALCH-1:0]       cal_start,
  output logic [N_CALCH-1:0]       cal_stop,
  output logic                     ch_we,
  output logic [3:0]               ch_addr,
  output logic signed [OFS_W-1:0]  ch_offset,
  output logic        [GAIN_W-1:0] ch_gain,
  output logic                     corr_we,
  output logic        [CORR_W-1:0] corr_out,
  output logic                     ready,
  output logic                     recal_done
);
  localparam int NW = RAW_W + CAL_F;
  localparam int TW = $clog2(RECAL_CYCLES + 1);

  typedef enum logic [2:0] {S_IDLE, S_START, S_WAIT, S_READ, S_DIV, S_WDIV, S_WRITE} state_e;
  state_e state;

  logic [3:0]        ch;
  logic              init;       // start-up calibration (all channels) vs re-calibration
  logic              second;     // 0: 100 ns measurement, 1: 200 ns measurement
  logic [1:0]        cnt;
  logic [RAW_W-1:0]  r100, slope_ref;
  logic signed [RAW_W+1:0] slope_s;
  logic [TW-1:0]     timer;

  logic          div_start, div_busy, div_done;
  logic [NW-1:0] div_num, div_quo;
  logic [RAW_W-1:0] div_den;

  seq_divider #(.NW(NW), .DW(RAW_W)) u_div (
    .clk (clk), .rst (rst), .start (div_start), .num (div_num), .den (div_den),
    .busy (div_busy), .done (div_done), .quo (div_quo)
  );

  function automatic logic [RAW_W-1:0] pos_slope(input logic signed [RAW_W+1:0] s);
    if (s <= 0) return '0;                              // divider then saturates
    if (s > (RAW_W+2)'((1 << RAW_W) - 1)) return '1;
    return RAW_W'(s);
  endfunction

  always_ff @(posedge clk)
    if (rst) begin
      state <= S_IDLE; ch <= '0; init <= 1'b1; second <= 1'b0; cnt <= '0;
      r100 <= '0; slope_ref <= '0; slope_s <= '0; timer <= '0;
      cal_start <= '0; cal_stop <= '0;
      ch_we <= 1'b0; ch_addr <= '0; ch_offset <= '0; ch_gain <= '0;
      corr_we <= 1'b0; corr_out <= '0; ready <= 1'b0; recal_done <= 1'b0;
      div_start <= 1'b0; div_num <= '0; div_den <= '0;
    end else begin
      ch_we      <= 1'b0;
      corr_we    <= 1'b0;
      recal_done <= 1'b0;
      div_start  <= 1'b0;
      if (ready && state == S_IDLE) timer <= timer + 1'b1;

      unique case (state)
        S_IDLE: begin
          if (!ready) begin
            init <= 1'b1; ch <= '0; second <= 1'b0; state <= S_START;
          end else if (timer >= TW'(RECAL_CYCLES - 1)) begin
            timer <= '0;
            init <= 1'b0; ch <= 4'(CAL_CH); second <= 1'b0; state <= S_START;
          end
        end
        S_START: begin                         // START on this gauge edge
          cal_start[ch] <= 1'b1;
          cnt   <= second ? 2'd1 : 2'd0;
          state <= S_WAIT;
        end
        S_WAIT: begin                          // STOP one or two periods later
          cal_start <= '0;
          if (cnt == 0) begin
            cal_stop[ch] <= 1'b1;
            state <= S_READ;
          end else cnt <= cnt - 1'b1;
        end
        S_READ: begin                          // result settled at the STOP edge
          cal_stop <= '0;
          if (!second) begin
            r100   <= cal_raw[ch];
            second <= 1'b1;
            state  <= S_START;
          end else begin
            slope_s <= $signed({2'b00, cal_raw[ch]}) - $signed({2'b00, r100});
            state   <= S_DIV;
          end
        end
        S_DIV: begin
          div_start <= 1'b1;
          div_den   <= pos_slope(slope_s);
          if (init) div_num <= NW'(256) << CAL_F;
          else      div_num <= NW'(slope_ref) << CAL_F;
          state <= S_WDIV;
        end
        S_WDIV: if (div_done && !div_busy) state <= S_WRITE;
        S_WRITE: begin
          if (init) begin
            ch_we     <= 1'b1;
            ch_addr   <= ch;
            ch_offset <= OFS_W'($signed({2'b00, r100}) - slope_s);
            ch_gain   <= (div_quo > NW'((1 << GAIN_W) - 1)) ? '1 : GAIN_W'(div_quo);
            if (ch == 4'(CAL_CH)) slope_ref <= pos_slope(slope_s);
            if (ch == 4'(N_CALCH - 1)) begin
              ready <= 1'b1;
              timer <= '0;
              state <= S_IDLE;
            end else begin
              ch <= ch + 1'b1; second <= 1'b0; state <= S_START;
            end
          end else begin
            corr_we    <= 1'b1;
            corr_out   <= (div_quo > NW'((1 << CORR_W) - 1)) ? '1 : CORR_W'(div_quo);
            recal_done <= 1'b1;
            state      <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
endmodule
