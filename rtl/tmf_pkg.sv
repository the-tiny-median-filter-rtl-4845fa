// tmf_pkg: constants shared by the Tiny Median Filter modules.
//
// The filter finds the M-th highest value of a data set of N unsigned
// integers by a quaternary search: each stage looks at two more data bits and
// decides two more bits of the result. The defaults below are the basic 8-bit
// single-core configuration: 8-bit data, 8-bit counters, and a 256-word data
// pipe (one FPGA block RAM shared by four pipes). FINDER_LAT is the number of
// register steps in one median finding stage (five); the data pipe between
// two stages therefore has to delay by N + FINDER_LAT cycles. The rank M is
// given to the filter as the counter preset 2**(CNT_W-1) - M (128 - M).
package tmf_pkg;

  localparam int unsigned DATA_W_DEF     = 8;   // bits per data point
  localparam int unsigned CNT_W_DEF      = 8;   // counter width
  localparam int unsigned PIPE_DEPTH_DEF = 256; // data pipe words
  localparam int unsigned FINDER_LAT     = 5;   // register steps per stage


endpackage
