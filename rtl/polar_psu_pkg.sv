// polar_psu_pkg: constants and index arithmetic shared by the partial-sums
// unit of a successive-cancellation (SC) polar decoder and its testbenches.
//
// A code of length N = 2**n is decoded one bit u_t per step, t = 0..N-1.
// The partial sum S_{m,q} (row m, column q of the factor graph) becomes valid
// at step tau(m,q) = (floor(m/2**q)+1)*2**q - 1 and then lies in shift-register
// stage tau-m. A tree decoder has N-1 processing elements PE(x,y),
// 0 <= y < n, 0 <= x < 2**y; every partial sum PE(x,y) ever needs lies in the
// same stage, 2**y - 1 - x. The processing elements are numbered in heap order,
// PE(x,y) -> 2**y - 1 + x, which is this design's own convention.
package polar_psu_pkg;

  // Default code length: 2**20, the code length the generator unit is sized
  // for. Tests override it with small values.
  localparam int unsigned N_DEFAULT = 32'd1 << 20;

  // Step at which partial sum S_{m,q} becomes valid.
  function automatic int unsigned ps_tau(int unsigned m, int unsigned q);
    return (((m >> q) + 1) << q) - 1;
  endfunction

  // Shift-register stage that holds every partial sum needed by PE(x,y).
  function automatic int unsigned pe_stage(int unsigned x, int unsigned y);
    return (32'd1 << y) - 1 - (x % (32'd1 << y));
  endfunction

  // Flat (heap-order) number of PE(x,y) on the per-PE output bus.
  function automatic int unsigned pe_index(int unsigned x, int unsigned y);
    return (32'd1 << y) - 1 + x;
  endfunction

endpackage
