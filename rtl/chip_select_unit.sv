`timescale 1ns/1ps
// chip_select_unit: decides whether the readout addresses this chip.
//
// A chip answers on the shared data bus only while CHIP PRESELECT is active and
// the CHIP ADDRESS equals the chip's own position, which is strapped on the
// board (`chip_id`). The paper names the unit and its two pin groups; the
// widths (a single preselect line, four address bits for 16 chips per board)
// and the strapped identity are this design's choices. Combinational.
module chip_select_unit
  import tdc_pkg::*;
(
  input  logic               chip_preselect,
  input  logic [CHIP_AW-1:0] chip_addr,
  input  logic [CHIP_AW-1:0] chip_id,
  output logic               selected
);
  assign selected = chip_preselect && (chip_addr == chip_id);
endmodule
