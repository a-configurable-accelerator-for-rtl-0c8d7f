// empa_sumup_adder: the adder a parent core opens for its children in SUMUP mode.
//
// One input is the summand a child just transferred into the parent's latched
// FromChild register, the other is the adder's own previous output (the partial
// sum), so a vector is summed without any read or write-back of a register by
// an instruction. 'clr_i' starts a new sum, 'add_i' accumulates 'summand_i' at
// the next clock edge; 'sum_o' is the registered partial sum, which the parent
// reads out through its pseudo register. Clear has priority over add. The
// accumulator width equals the core word; overflow wraps as in a Y86 addl.
module empa_sumup_adder
  import empa_pkg::*;
(
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  clr_i,
  input  logic  add_i,
  input  word_t summand_i,
  output word_t sum_o
);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)     sum_o <= '0;
    else if (clr_i)  sum_o <= '0;
    else if (add_i)  sum_o <= sum_o + summand_i;
  end

endmodule
