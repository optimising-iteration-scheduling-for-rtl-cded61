// pair_index_gen: amplitude indices of the pair touched by one iteration.
//
// For target qubit t the pair is (k, k + 2^t) where k has bit t clear. The
// global iteration index i enumerates these k in order: k is i with a zero bit
// inserted at position t (the "ithCleared" operation): the bits of i below t stay
// where they are and the bits from t upwards move up by one. pe1 = pe0 + 2^t.
// Purely combinational. The mapping follows the paper; the logic form is ours.
module pair_index_gen
  import qsim_pkg::*;
#(
  parameter int unsigned IDX_W = 32
) (
  input  logic [IDX_W-1:0] idx,
  input  qidx_t            target,
  output logic [IDX_W-1:0] pe0,
  output logic [IDX_W-1:0] pe1
);
  logic [IDX_W-1:0] low_mask;

  always_comb begin
    low_mask = (IDX_W'(1) << target) - IDX_W'(1);
    pe0 = ((idx & ~low_mask) << 1) | (idx & low_mask);
    pe1 = pe0 | (IDX_W'(1) << target);
  end
endmodule
