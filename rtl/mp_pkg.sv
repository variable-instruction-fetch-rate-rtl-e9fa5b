// mp_pkg: types shared by the multi-path (eager execution) front end.
//
// The fetch policy selects how the eager thread policy scheduler divides the
// fetch width among the live thread paths. Both policies are the two schemes
// proposed for disjoint-eager execution: a fixed share for each of a set of
// high-confidence paths (selective DEE) and a share proportional to each
// path's confidence (dynamic DEE, the variable fetch rate).
package mp_pkg;

  typedef enum logic {
    POL_SELECTIVE = 1'b0,  // a set of the most confident paths, fixed instructions each
    POL_DYNAMIC   = 1'b1   // fetch width divided in proportion to path confidence
  } fetch_policy_e;

  // Instructions are 4 bytes; program counters are byte addresses.
  localparam int unsigned INSN_BYTES = 4;

endpackage
