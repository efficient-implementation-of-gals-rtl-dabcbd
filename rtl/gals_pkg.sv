`timescale 1ps/1ps
// gals_pkg: types and helper functions shared by the GALS blocks.
//
// data_t is the width of the data words carried between processing blocks
// (8 bits, this design's choice: the paper leaves the data path to the
// application).
package gals_pkg;
  parameter int unsigned DATA_W = 8;
  typedef logic [DATA_W-1:0] data_t;

endpackage
