// empa_alloc: chooses the core the supervisor rents for a requester.
//
// A core is rented from the requester's own preallocated cores when one of them
// is idle (so a loop keeps reusing the child it reserved), otherwise from the
// common pool of available cores. Within a mask the lowest-numbered core wins;
// this priority is this design's choice, the architecture only says a core is
// rented "from the pool". The output is a one-hot Identity mask. 'any_avail'
// is the processor-level "ALU available" signal: high while at least one core
// of the pool can accept work. Purely combinational.
module empa_alloc #(
  parameter int unsigned NCORES = 32
) (
  input  logic [NCORES-1:0] avail_i,    // pool: not running, not reserved, not disabled
  input  logic [NCORES-1:0] prefer_i,   // idle cores preallocated to the requester
  output logic [NCORES-1:0] grant_o,    // one-hot Identity of the chosen core, or 0
  output logic              found_o,
  output logic              any_avail_o // "ALU available"
);

  logic [NCORES-1:0] cand;

  always_comb begin
    cand    = (|prefer_i) ? prefer_i : avail_i;
    grant_o = cand & (~cand + 1'b1);    // isolate the lowest set bit
    found_o = |cand;
  end

  assign any_avail_o = |avail_i;

endmodule
