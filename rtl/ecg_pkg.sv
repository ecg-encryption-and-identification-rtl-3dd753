// ecg_pkg: shared definitions of the ECG identification accelerator.
//
// The accelerator keeps four arrays that software loads before each run:
// the test ECG signal and the mean training signal (n words each), the
// projected training matrix (i rows of m words) and the Eigen ECG matrix
// (m rows of n words). ecg_mem_e names them on the array write port.
package ecg_pkg;

  typedef enum logic [1:0] {
    MEM_TEST  = 2'd0,
    MEM_MEAN  = 2'd1,
    MEM_TRAIN = 2'd2,
    MEM_EIG   = 2'd3
  } ecg_mem_e;

  // Width of a squared Euclidean distance summed over m features of w bits.
  function automatic int unsigned dist_width(input int unsigned w, input int unsigned m);
    return 2 * (w + 1) + $clog2(m);
  endfunction

endpackage
