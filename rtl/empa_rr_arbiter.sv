// empa_rr_arbiter: round-robin arbiter that serialises the cores' requests to
// the supervisor.
//
// The supervisor owns every shared resource and therefore performs one
// operation at a time; this arbiter picks which core's request is served in a
// cycle. The search starts one position after the last grant, so every
// requesting core is served within NCORES grants. Fairness by round robin is
// this design's choice. Combinational grant, registered pointer that advances
// only when a grant is issued.
module empa_rr_arbiter #(
  parameter int unsigned NCORES = 32
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic [NCORES-1:0] req_i,
  output logic [NCORES-1:0] gnt_o,     // one-hot or 0
  output logic [$clog2(NCORES > 1 ? NCORES : 2)-1:0] idx_o
);

  localparam int unsigned IW = $clog2(NCORES > 1 ? NCORES : 2);

  logic [IW-1:0] last_q;

  always_comb begin
    int unsigned k;
    gnt_o = '0;
    idx_o = '0;
    for (int unsigned i = 1; i <= NCORES; i++) begin
      k = (int'(last_q) + i) % NCORES;
      if (req_i[k] && gnt_o == '0) begin
        gnt_o[k] = 1'b1;
        idx_o    = IW'(k);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      last_q <= IW'(NCORES - 1);
    else if (|req_i)  last_q <= idx_o;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o));
  assert property (@(posedge clk_i) disable iff (!rst_ni) (|req_i) |-> (|gnt_o));

endmodule
