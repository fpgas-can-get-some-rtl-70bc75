// implication_selector: picks one unit implication when several clause
// processors produce one in the same cycle.
//
// It is a fixed-priority multiplexer: the valid implication from the lowest
// numbered clause processor wins. It is purely combinational; the control
// unit samples its output in the Evaluate state.
//
// Following the original design: a multiplexer choosing a single implication,
// with no conflict detection of its own (conflicts are found when the chosen
// implication has been propagated and the clauses are evaluated again). The
// priority order is this design's own choice.
module implication_selector
  import sat_pkg::*;
#(
  parameter int unsigned N = CP_COUNT  // number of clause processors
) (
  input  impl_t [N-1:0] impl_in,
  output impl_t         impl_out  // impl_out.valid: any input valid
);

  always_comb begin
    impl_out = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (impl_in[i].valid) begin
        impl_out = impl_in[i];
      end
    end
  end

endmodule
