// mk_pkg -- constants and elaboration-time helpers shared by the multi-kernel
// (MK) polar encoder modules.
//
// A code of length N = 2^n * 3^m is described by its kernel ordering
// KER = {l0, l1, ..., ls}: the generator matrix is T_l0 (x) T_l1 (x) ... (x) T_ls.
// The unrolled encoder applies one kernel stage per entry, starting with the
// last entry (PEs on adjacent bits) and ending with l0 (PEs spanning N/l0).
//
// pipe_after() decides where the P internal pipeline registers of an encoder
// sit. The placement rule (registers spread as evenly as possible over the
// stage boundaries) is this design's own choice; only the count P and the
// resulting latency of P+1 cycles come from the published tables.
package mk_pkg;

  // Largest number of kernel stages supported: N_max = 32768 = 2^15.
  localparam int unsigned MAX_STAGES = 15;

  // Kernel sizes the design knows.
  typedef enum int unsigned {
    KER_BINARY  = 2,
    KER_TERNARY = 3
  } kernel_e;

  // True when a pipeline register follows the first 'done' stages of an
  // encoder with 'stages' stages and 'p' internal registers (0 <= p < stages).
  // Register m (1..p) sits after stage floor(m*stages/(p+1)).
  function automatic bit pipe_after(int unsigned done, int unsigned stages, int unsigned p);
    for (int unsigned m = 1; m <= p; m++) begin
      if ((m * stages) / (p + 1) == done) return 1'b1;
    end
    return 1'b0;
  endfunction

endpackage
