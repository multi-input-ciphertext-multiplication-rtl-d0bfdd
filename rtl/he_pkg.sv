// he_pkg: constants shared by the RNS-CKKS multiplier datapath.
//
// Every unit of the datapath is a fixed-latency pipeline that takes two
// coefficients per clock (the "2-parallel" organisation) and carries a valid
// flag and a start-of-frame flag alongside the data. The latencies below let
// a parent align parallel paths and let testbenches check cycle counts.
//   MM_LAT    : Barrett modular multiplier, three pipeline stages.
//   PE_LAT    : one (I)NTT butterfly element, five pipeline stages.
//   BCONV_LAT : (scaled) basis conversion, two multiplier ranks plus a
//               registered modular sum, seven stages.
//   ntt_lat() : a full N-point 2-parallel (I)NTT, N/2-1 cycles of
//               delay-commutator storage plus five stages per butterfly rank.
//
// The 3- and 5-stage figures and the 7-clock BConv come from the paper; the
// (I)NTT latency formula is this design's own, chosen so that the totals
// match the paper's latency table.
package he_pkg;
  localparam int MM_LAT    = 3;
  localparam int PE_LAT    = 5;
  localparam int BCONV_LAT = 2 * MM_LAT + 1;

  function automatic int ntt_lat(input int n);
    return n / 2 - 1 + PE_LAT * $clog2(n);
  endfunction
endpackage
