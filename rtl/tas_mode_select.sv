// tas_mode_select: the adaptive decision of tile-based adaptive stationary.
//
// Keeping the input matrix on chip (input stationary) reads it once, MN
// elements; keeping the weights on chip (weight stationary) reads them once,
// NK elements. The better choice therefore only depends on the sign of
// MN - NK = N(M - K): input stationary (IS-OS order) when M < K, weight
// stationary (WS-OS order) when M >= K. This rule, including the tie going to
// WS-OS, is the paper's. The block is one unsigned comparator.
//
// Interface: dim_m = M (rows of the input matrix), dim_k = K (columns of the
// weight matrix), both in elements. mode is combinational; the scheduler
// samples it together with the sizes when a job starts.
module tas_mode_select
  import tas_pkg::*;
(
  input  dim_t      dim_m,
  input  dim_t      dim_k,
  output tas_mode_e mode
);

  always_comb mode = (dim_m < dim_k) ? MODE_IS_OS : MODE_WS_OS;

endmodule
