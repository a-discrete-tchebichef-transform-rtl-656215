// adtt_pkg: constants shared by the 8-point approximate discrete Tchebichef
// transform (DTT) cores.
//
// The forward core computes X = T* x with T* entries in {-1,0,1}; the sum of
// the magnitudes of any row of T* is at most 8, so the outputs need 3 bits
// more than the inputs. The inverse core computes y = T1 X with T1 entries
// in {0,+-1,+-2,+-3}; the largest row magnitude sum of T1 is 13 (< 16), so
// the outputs need 4 bits more than the inputs. Both cores are pipelined
// with three register stages and accept one 8-point vector per clock; the
// latencies below are this design's choice, not numbers from the paper.
package adtt_pkg;

  // Transform length (the paper's 8-point DTT).
  localparam int unsigned N = 8;

  // Word growth of the forward (T*) and inverse (T1) cores.
  localparam int unsigned FWD_GROWTH = 3;
  localparam int unsigned INV_GROWTH = 4;

  // Clock cycles from an accepted input vector to its output vector.
  localparam int unsigned FWD_LATENCY = 3;
  localparam int unsigned INV_LATENCY = 3;

endpackage
