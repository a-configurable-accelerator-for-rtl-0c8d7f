// empa_core_ext: the EMPA extension of one core - the registers and signals a
// core gains so that the supervisor can rent it, clone into it and exchange
// data with its parent and children.
//
// Registers (all written by the supervisor except where the core itself writes
// its pseudo register):
//   Identity      hard one-hot mask, bit ID
//   Parent        Identity of the parent core, 0 for a root QT
//   Children      OR of the Identities of the running child QTs
//   Preallocated  OR of the Identities of the cores reserved for this core
//   Offset        address of the QT the core runs
//   Mode          NORMAL, FOR or SUMUP
//   ForChild      written by this core as parent, latched into a child's
//                 FromParent when the child is created
//   FromChild     FOR: remaining iterations; SUMUP: last summand received
//   ForParent     written by this core as child, moved to the parent's
//                 FromChild when the child terminates (FOR) or at once (SUMUP)
//   FromParent    the parent's ForChild, latched when this core was created
//   Latched Reg   the link register of a terminated child, held until this
//                 core waits
// Pseudo register %esv: the core reads and writes one register address whose
// meaning depends on the role it selects ('psr_role_i'): as parent (0) a read
// returns FromChild (the running sum in SUMUP mode) and a write goes to
// ForChild; as child (1) a read returns FromParent and a write goes to
// ForParent. The explicit role bit stands in for the context rules the
// architecture defers to its programming documentation.
// Signals to and from the supervisor follow the core's Avail, Enable and Wait
// lines; Avail is high when the core runs no QT, is not preallocated and is
// not disabled from outside (e.g. overheating). All updates take effect at the
// next clock edge; reads are combinational.
module empa_core_ext
  import empa_pkg::*;
#(
  parameter int unsigned NCORES = 32,
  parameter int unsigned ID     = 0,
  parameter bit          BOOT   = 1'b0    // enabled out of reset (the first QT)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // core side
  input  logic              disable_i,
  input  logic              psr_we_i,
  input  logic              psr_role_i,
  input  word_t             psr_wdata_i,
  output word_t             psr_rdata_o,
  output logic              enable_o,
  output logic              wait_o,
  // supervisor side
  input  core_cmd_t         cmd_i,
  input  logic              parent_we_i,
  input  logic [NCORES-1:0] parent_i,
  input  logic [NCORES-1:0] children_set_i,
  input  logic [NCORES-1:0] children_clr_i,
  input  logic [NCORES-1:0] prealloc_set_i,
  input  logic              prealloc_clr_all_i,
  output core_state_t       state_o,
  output logic [NCORES-1:0] identity_o,
  output logic [NCORES-1:0] parent_o,
  output logic [NCORES-1:0] children_o,
  output logic [NCORES-1:0] prealloc_o
);

  logic              running_q, reserved_q;
  logic [NCORES-1:0] parent_q, children_q, prealloc_q;
  word_t             offset_q, for_child_q, from_child_q, for_parent_q;
  word_t             from_parent_q, latch_q, count_q, acc;
  mode_e             mode_q;
  logic              fp_valid_q, fp_pending_q, latch_valid_q, loop_q;
  wait_e             wait_q;

  assign identity_o = NCORES'(1) << ID;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      running_q     <= BOOT;
      reserved_q    <= 1'b0;
      parent_q      <= '0;
      children_q    <= '0;
      prealloc_q    <= '0;
      offset_q      <= '0;
      mode_q        <= MODE_NORMAL;
      for_child_q   <= '0;
      from_child_q  <= '0;
      for_parent_q  <= '0;
      fp_valid_q    <= 1'b0;
      fp_pending_q  <= 1'b0;
      from_parent_q <= '0;
      latch_q       <= '0;
      latch_valid_q <= 1'b0;
      count_q       <= '0;
      loop_q        <= 1'b0;
      wait_q        <= WAIT_NONE;
    end else begin
      if (cmd_i.run_set)      running_q  <= 1'b1;
      else if (cmd_i.run_clr) running_q  <= 1'b0;
      if (cmd_i.rsv_set)      reserved_q <= 1'b1;
      else if (cmd_i.rsv_clr) reserved_q <= 1'b0;

      if (parent_we_i) parent_q <= parent_i;
      children_q <= (children_q & ~children_clr_i) | children_set_i;
      prealloc_q <= prealloc_clr_all_i ? '0 : (prealloc_q | prealloc_set_i);

      if (cmd_i.offset_we)      offset_q      <= cmd_i.offset;
      if (cmd_i.mode_we)        mode_q        <= cmd_i.mode;
      if (cmd_i.from_parent_we) from_parent_q <= cmd_i.from_parent;

      if (cmd_i.for_child_step)                  for_child_q <= for_child_q + WORD_BYTES;
      else if (psr_we_i && psr_role_i == 1'b0)   for_child_q <= psr_wdata_i;

      if (cmd_i.from_child_we)       from_child_q <= cmd_i.from_child;
      else if (cmd_i.from_child_dec) from_child_q <= from_child_q - 1'b1;

      if (cmd_i.count_we)       count_q <= cmd_i.count;
      else if (cmd_i.count_dec) count_q <= count_q - 1'b1;

      // ForParent: a write by the core wins over the supervisor consuming it
      if (psr_we_i && psr_role_i == 1'b1) begin
        for_parent_q <= psr_wdata_i;
        fp_valid_q   <= 1'b1;
        if (mode_q == MODE_SUMUP) fp_pending_q <= 1'b1;
      end else begin
        if (cmd_i.fp_clr)   fp_valid_q   <= 1'b0;
        if (cmd_i.fp_clr || cmd_i.pend_clr) fp_pending_q <= 1'b0;
      end

      if (cmd_i.latch_we) begin
        latch_q       <= cmd_i.latch;
        latch_valid_q <= 1'b1;
      end else if (cmd_i.latch_clr) begin
        latch_valid_q <= 1'b0;
      end

      if (cmd_i.loop_set)      loop_q <= 1'b1;
      else if (cmd_i.loop_clr) loop_q <= 1'b0;

      if (cmd_i.wait_we) wait_q <= cmd_i.wait_why;
    end
  end

  empa_sumup_adder u_adder (
    .clk_i,
    .rst_ni,
    .clr_i     (cmd_i.acc_clr),
    .add_i     (cmd_i.acc_add),
    .summand_i (cmd_i.from_child),
    .sum_o     (acc)
  );

  always_comb begin
    if (psr_role_i) psr_rdata_o = from_parent_q;
    else            psr_rdata_o = (mode_q == MODE_SUMUP) ? acc : from_child_q;
  end

  assign enable_o = running_q;
  assign wait_o   = (wait_q != WAIT_NONE);

  always_comb begin
    state_o             = '0;
    state_o.running     = running_q;
    state_o.reserved    = reserved_q;
    state_o.avail       = !running_q && !reserved_q && !disable_i;
    state_o.offset      = offset_q;
    state_o.mode        = mode_q;
    state_o.for_child   = for_child_q;
    state_o.from_child  = from_child_q;
    state_o.for_parent  = for_parent_q;
    state_o.fp_valid    = fp_valid_q;
    state_o.fp_pending  = fp_pending_q;
    state_o.from_parent = from_parent_q;
    state_o.latch       = latch_q;
    state_o.latch_valid = latch_valid_q;
    state_o.count       = count_q;
    state_o.acc         = acc;
    state_o.loop        = loop_q;
    state_o.wait_why    = wait_q;
  end

  assign parent_o   = parent_q;
  assign children_o = children_q;
  assign prealloc_o = prealloc_q;

endmodule
