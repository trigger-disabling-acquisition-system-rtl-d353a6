// td_pkg: constants shared by the trigger-disabling acquisition system.
//
// NUM_DET_DEF = 2 is the pairwise configuration (two detectors ORed into the
// disable flip-flop). CACHE_DEPTH_DEF = 8192 is the size of one cache block,
// equal to the number of triggers per block used in the performance model of
// the design. CNT_W_DEF (dead-time counter width) is this design's choice:
// 16 bits cover dead times far beyond the ~80 trigger periods of a 10 us
// blocking time at an 8 MHz trigger rate.
`timescale 1ns / 1ps
package td_pkg;
  parameter int unsigned NUM_DET_DEF     = 2;
  parameter int unsigned CNT_W_DEF       = 16;
  parameter int unsigned CACHE_DEPTH_DEF = 8192;
endpackage
