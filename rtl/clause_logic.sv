// clause_logic: evaluates one beat of a clause against the input.
//
// A beat carries LANES automaton states of one clause together with the LANES
// literal values they belong to. A literal is included in the clause when its
// state is above N, with N = 2^(STATE_BITS-1) - 1, so inclusion is the state's
// most significant bit. The clause output is the AND of its included literals;
// this block reports, for the beat, whether any included literal is 0
// ("violation"). The caller ORs the violations of all beats of a clause; the
// clause output is the inverse. Purely combinational; the `included` output is
// simply the MSB of each state, brought out for observation.
// Follows the paper: the inclusion rule and the AND. Own choice: N = 2^(b-1)-1.
module clause_logic #(
  parameter int unsigned LANES      = 16,
  parameter int unsigned STATE_BITS = 8
) (
  input  logic [LANES*STATE_BITS-1:0] states,   // lane i in bits [i*STATE_BITS +: STATE_BITS]
  input  logic [LANES-1:0]            literals, // literal value of lane i
  output logic [LANES-1:0]            included, // state > N
  output logic                        violation // some included literal is 0
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      included[i] = states[i*STATE_BITS + STATE_BITS - 1];
    end
    violation = |(included & ~literals);
  end
endmodule
