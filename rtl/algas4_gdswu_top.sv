// algas4_gdswu_top -- the gamma sliding-window stage of a four-core landing
// guidance processor.
//
// The landing guidance system has one processing core per spatial corner of
// the drone (four in all).  In each core a fuzzy-logic node estimates the
// altitude above the landing surface, and a gamma-distribution sliding window
// unit (GDSWU) turns the stream of those estimates into a weighted average
// of the last 16, which goes on to the link towards the central processor.
// This module holds the four GDSWUs, one per corner, each with its own sample
// strobe.  The fuzzy-logic nodes, sensor front ends, filters, malfunction
// monitor and links of each core are outside this design: their connections
// to the GDSWU appear here as ports.
//
// Ports (index c = corner 0..CORES-1):
//   fls_valid[c], fls_out[c]   estimate of corner c and its strobe (en_in / b
//                              of that corner's GDSWU)
//   avg_valid[c], average_out[c], sum_sample[c]
//                              result of corner c, see gdswu for its timing
//                              (6 clock edges after the sample is taken)
// Four cores and one GDSWU per core follow the paper; putting the four units
// side by side in one module with independent strobes is this design's choice.
module algas4_gdswu_top
  import gdswu_pkg::*;
#(
  parameter int unsigned CORES       = 4,
  parameter int unsigned TAPS        = GDSWU_TAPS,
  parameter int unsigned DATA_W      = GDSWU_DATA_W,
  parameter int unsigned GAMMA_A     = GDSWU_GAMMA_A,
  parameter int unsigned GAMMA_B     = GDSWU_GAMMA_B,
  parameter int unsigned WEIGHT_FRAC = GDSWU_WEIGHT_FRAC
) (
  input  logic                                                   clk,
  input  logic                                                   rst_n,
  input  logic [CORES-1:0]                                       fls_valid,
  input  logic [CORES-1:0][DATA_W-1:0]                           fls_out,
  output logic [CORES-1:0]                                       avg_valid,
  output logic [CORES-1:0][DATA_W+WEIGHT_FRAC+$clog2(TAPS)-1:0]  sum_sample,
  output logic [CORES-1:0][DATA_W-1:0]                           average_out
);
  for (genvar c = 0; c < CORES; c++) begin : g_core
    gdswu #(
      .TAPS        (TAPS),
      .DATA_W      (DATA_W),
      .GAMMA_A     (GAMMA_A),
      .GAMMA_B     (GAMMA_B),
      .WEIGHT_FRAC (WEIGHT_FRAC)
    ) u_gdswu (
      .clk         (clk),
      .rst_n       (rst_n),
      .en_in       (fls_valid[c]),
      .b           (fls_out[c]),
      .out_valid   (avg_valid[c]),
      .sum_sample  (sum_sample[c]),
      .average_out (average_out[c])
    );
  end
endmodule
