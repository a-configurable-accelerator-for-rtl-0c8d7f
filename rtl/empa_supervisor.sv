// empa_supervisor: the second control layer above the cores. It owns every
// shared resource of the processor and therefore performs one operation per
// clock: a round-robin arbiter picks one requesting core and the supervisor
// executes that core's metainstruction; in the same cycle one SUMUP summand
// can be moved into a parent's adder.
//
// Operations (one per cycle, on the granted core g):
//   Q_CREATE/Q_CALL  rent a core c (g's idle preallocated cores first, then the
//                    pool), set c's Parent and g's Children bit, clone g's
//                    register file and load c's PC with the QT address (Offset),
//                    latch g's ForChild into c's FromParent, enable c; g resumes
//                    at 'next_pc' in the same cycle. No core: g is put in Wait.
//   Q_TERM           blocked (Wait) while g's Children mask is not empty. Then
//                    g is disabled and returned to the pool, its preallocated
//                    cores are released, and, if g has a parent p, g's link
//                    register (%eax) is latched in p, g's bit is cleared in p's
//                    Children and, in FOR mode, a ForParent written by g is
//                    copied to p's FromChild (this is how a child breaks a loop).
//   Q_WAIT           blocked while Children is not empty; then the latched link
//                    value, if any, is written into g's %eax and g resumes.
//   Q_ALLOC          preallocates one core per grant until g holds 'arg' of
//                    them; each gets the requested Mode and g's ForChild.
//   Q_IWAIT          an interrupt-servicing core waits, idle, for interrupt
//                    line 'arg'. While the line is low the core is held in
//                    Wait and does not request again. When it is high the
//                    core is acknowledged, its PC is loaded with the service
//                    routine 'target' and the line is acknowledged on
//                    'irq_ack_o' (the source then drops it); nothing has to be
//                    saved or restored. Several cores may wait on one line:
//                    the arbiter gives each raised interrupt to one of them.
//   Q_FCREATE        mass-processing loop; g's PC stays on the metainstruction
//                    and g is granted again and again. First grant: iteration
//                    count loaded (FOR: into FromChild; SUMUP: into Count, sum
//                    cleared). FOR: each grant with no child running checks
//                    FromChild; if not zero it starts the next iteration on a
//                    child (clone, with the child's previous %eax cloned back),
//                    decrements FromChild and advances ForChild by one word.
//                    SUMUP: each grant launches one more preallocated child
//                    while Count is not zero; summands arrive through the
//                    transfer below. When the count is exhausted and no child
//                    runs, g resumes at 'next_pc'.
//   transfer         a SUMUP child's write to its ForParent is latched into the
//                    parent's FromChild and added into the parent's adder; a
//                    SUMUP child's QTerm (after its transfer) is served on the
//                    same path. It touches only the child and its parent's
//                    adder and Children bit, so it has an arbiter of its own
//                    and runs in the same cycle as a metainstruction. This is
//                    what lets a SUMUP loop absorb one element per cycle.
// A core in Wait does not request again until the reason is gone (a core
// became available, its Children mask emptied, or its interrupt was raised),
// so waiting costs no supervisor cycles. Cores hold Meta and the request stable until 'meta_ack_o'.
// The supervisor is combinational except for the arbiter's pointer; all state
// lives in the per-core EMPA extensions it commands. Which metainstructions
// exist and what they do follows the architecture; the one-request-per-cycle
// arbitration, the encodings and the exact cycle costs are this design's own.
module empa_supervisor
  import empa_pkg::*;
#(
  parameter int unsigned NCORES = 32,
  parameter int unsigned NIRQ   = 8     // interrupt lines
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // from the cores
  input  logic              meta_valid_i [NCORES],
  input  meta_req_t         meta_req_i   [NCORES],
  input  word_t             core_rf_i    [NCORES][NREGS],
  // to the cores
  output logic              meta_ack_o   [NCORES],
  output logic              pc_load_o    [NCORES],
  output word_t             pc_o         [NCORES],
  output logic              rf_load_o    [NCORES],
  output word_t             rf_o         [NREGS],   // clone bus, shared
  output logic              reg_wr_o     [NCORES],  // write 'reg_data_o' into %eax
  output word_t             reg_data_o,
  output logic              alu_avail_o,
  // interrupt lines (level, held until acknowledged)
  input  logic [NIRQ-1:0]   irq_i,
  output logic [NIRQ-1:0]   irq_ack_o,
  // per-core EMPA registers
  input  core_state_t       state_i      [NCORES],
  input  logic [NCORES-1:0] parent_i     [NCORES],
  input  logic [NCORES-1:0] children_i   [NCORES],
  input  logic [NCORES-1:0] prealloc_i   [NCORES],
  output core_cmd_t         cmd_o        [NCORES],
  output logic              parent_we_o  [NCORES],
  output logic [NCORES-1:0] parent_o     [NCORES],
  output logic [NCORES-1:0] children_set_o [NCORES],
  output logic [NCORES-1:0] children_clr_o [NCORES],
  output logic [NCORES-1:0] prealloc_set_o [NCORES],
  output logic              prealloc_clr_all_o [NCORES],
  // observation
  output sv_event_e         event_o,
  output logic              xfer_o,      // a SUMUP summand was transferred
  output logic              xterm_o,     // a SUMUP child terminated on that path
  output logic [$clog2(NCORES > 1 ? NCORES : 2)-1:0] xfer_core_o,
  output logic [$clog2(NCORES > 1 ? NCORES : 2)-1:0] event_core_o
);

  localparam int unsigned IW = $clog2(NCORES > 1 ? NCORES : 2);

  logic [NCORES-1:0] running, avail, req, gnt, xreq, xgnt, sumup_term;
  logic [IW-1:0]     g, x;
  logic [NCORES-1:0] free_pre [NCORES];
  localparam int unsigned LW = $clog2(NIRQ > 1 ? NIRQ : 2);
  logic [NCORES-1:0] irq_up;      // the line core i waits on is raised
  logic [NIRQ-1:0]   irq_sel [NCORES];

  always_comb begin
    for (int i = 0; i < NCORES; i++) begin
      running[i]  = state_i[i].running;
      avail[i]    = state_i[i].avail;
    end
    for (int i = 0; i < NCORES; i++) begin
      free_pre[i] = prealloc_i[i] & ~running;
      // one-hot line selected by the QIWait operand; none if out of range
      irq_sel[i]  = (meta_req_i[i].arg < word_t'(NIRQ)) ?
                    NIRQ'(1) << meta_req_i[i].arg[LW-1:0] : '0;
      irq_up[i]   = |(irq_sel[i] & irq_i);
    end
  end

  // A core requests an operation when it presents a metainstruction that is
  // not (or no longer) blocked. A SUMUP child with a summand in ForParent, or
  // terminating, requests the transfer path instead.
  always_comb begin
    for (int i = 0; i < NCORES; i++) begin
      logic wake;
      unique case (state_i[i].wait_why)
        WAIT_CORE:     wake = (|avail) || (|free_pre[i]);
        WAIT_CHILDREN: wake = (children_i[i] == '0);
        WAIT_IRQ:      wake = irq_up[i];
        default:       wake = 1'b1;
      endcase
      sumup_term[i] = meta_valid_i[i] && meta_req_i[i].op == Q_TERM &&
                      state_i[i].mode == MODE_SUMUP && children_i[i] == '0 &&
                      parent_i[i] != '0;
      req[i]  = meta_valid_i[i] && wake && !state_i[i].fp_pending && !sumup_term[i];
      xreq[i] = state_i[i].fp_pending || sumup_term[i];
    end
  end

  empa_rr_arbiter #(.NCORES(NCORES)) u_arb (
    .clk_i, .rst_ni, .req_i(req), .gnt_o(gnt), .idx_o(g)
  );

  // Summand transfers and SUMUP child terminations touch only the child, the
  // parent's FromChild, adder and Children bit, so they are served by a second
  // arbiter in parallel with the metainstruction.
  empa_rr_arbiter #(.NCORES(NCORES)) u_xarb (
    .clk_i, .rst_ni, .req_i(xreq), .gnt_o(xgnt), .idx_o(x)
  );

  // The core to rent for the granted requester.
  logic [NCORES-1:0] c_mask, prefer;
  logic              c_found;
  meta_req_t         greq;
  assign greq   = meta_req_i[g];
  assign prefer = (greq.op == Q_ALLOC) ? '0 : free_pre[g];

  empa_alloc #(.NCORES(NCORES)) u_alloc (
    .avail_i(avail), .prefer_i(prefer), .grant_o(c_mask), .found_o(c_found),
    .any_avail_o(alu_avail_o)
  );

  function automatic logic [IW-1:0] onehot_idx(logic [NCORES-1:0] m);
    onehot_idx = '0;
    for (int i = 0; i < NCORES; i++) if (m[i]) onehot_idx = IW'(i);
  endfunction

  always_comb begin
    logic [IW-1:0]     c, p, xp;
    logic [NCORES-1:0] gid;
    core_state_t       gs;
    logic              launch;
    mode_e             lmode;
    logic              clone_back;

    for (int i = 0; i < NCORES; i++) begin
      meta_ack_o[i]         = 1'b0;
      pc_load_o[i]          = 1'b0;
      pc_o[i]               = '0;
      rf_load_o[i]          = 1'b0;
      reg_wr_o[i]           = 1'b0;
      cmd_o[i]              = CORE_CMD_IDLE;
      parent_we_o[i]        = 1'b0;
      parent_o[i]           = '0;
      children_set_o[i]     = '0;
      children_clr_o[i]     = '0;
      prealloc_set_o[i]     = '0;
      prealloc_clr_all_o[i] = 1'b0;
    end
    irq_ack_o  = '0;
    rf_o       = core_rf_i[g];
    reg_data_o = state_i[g].latch;
    event_o    = EV_NONE;
    event_core_o = g;

    c          = onehot_idx(c_mask);
    xp         = onehot_idx(parent_i[x]);
    p          = onehot_idx(parent_i[g]);
    gid        = NCORES'(1) << g;
    gs         = state_i[g];
    launch     = 1'b0;
    lmode      = MODE_NORMAL;
    clone_back = 1'b0;

    // SUMUP: a child's ForParent goes to the parent's FromChild and adder
    xfer_o      = (|xgnt) && state_i[x].fp_pending;
    xterm_o     = (|xgnt) && sumup_term[x];
    xfer_core_o = x;
    if (|xgnt) begin
      if (state_i[x].fp_pending) begin
        if (parent_i[x] != '0) begin
          cmd_o[xp].from_child_we = 1'b1;
          cmd_o[xp].from_child    = state_i[x].for_parent;
          cmd_o[xp].acc_add       = 1'b1;
        end
        cmd_o[x].pend_clr = 1'b1;
      end
      if (sumup_term[x]) begin
        // the summand is the child's result: no link value is latched
        meta_ack_o[x]      = 1'b1;
        cmd_o[x].run_clr   = 1'b1;
        cmd_o[x].wait_we   = 1'b1;
        cmd_o[x].fp_clr    = 1'b1;
        cmd_o[x].latch_clr = 1'b1;
        parent_we_o[x]     = 1'b1;
        children_clr_o[xp] = children_clr_o[xp] | (NCORES'(1) << x);
      end
    end

    if (|gnt) begin
      begin
        unique case (greq.op)
          Q_CREATE, Q_CALL: begin
            if (c_found) begin
              launch = 1'b1;
              lmode  = MODE_NORMAL;
              meta_ack_o[g]    = 1'b1;
              pc_load_o[g]     = 1'b1;
              pc_o[g]          = greq.next_pc;
              cmd_o[g].wait_we = 1'b1;
              event_o = EV_CREATE;
            end else begin
              cmd_o[g].wait_we  = 1'b1;
              cmd_o[g].wait_why = WAIT_CORE;
              event_o = EV_BLOCK_CORE;
            end
          end

          Q_TERM: begin
            if (children_i[g] != '0) begin
              cmd_o[g].wait_we  = 1'b1;
              cmd_o[g].wait_why = WAIT_CHILDREN;
              event_o = EV_BLOCK_CHILD;
            end else begin
              meta_ack_o[g]         = 1'b1;
              cmd_o[g].run_clr      = 1'b1;
              cmd_o[g].wait_we      = 1'b1;
              cmd_o[g].loop_clr     = 1'b1;
              cmd_o[g].fp_clr       = 1'b1;
              cmd_o[g].latch_clr    = 1'b1;
              parent_we_o[g]        = 1'b1;         // Parent := 0
              prealloc_clr_all_o[g] = 1'b1;
              for (int j = 0; j < NCORES; j++)
                if (prealloc_i[g][j]) cmd_o[j].rsv_clr = 1'b1;
              if (parent_i[g] != '0) begin
                cmd_o[p].latch_we  = 1'b1;
                cmd_o[p].latch     = core_rf_i[g][LINK_REG];
                children_clr_o[p]  = children_clr_o[p] | gid;
                if (gs.mode == MODE_FOR && gs.fp_valid) begin
                  cmd_o[p].from_child_we = 1'b1;
                  cmd_o[p].from_child    = gs.for_parent;
                end
              end
              event_o = EV_TERM;
            end
          end

          Q_WAIT: begin
            if (children_i[g] != '0) begin
              cmd_o[g].wait_we  = 1'b1;
              cmd_o[g].wait_why = WAIT_CHILDREN;
              event_o = EV_BLOCK_CHILD;
            end else begin
              if (gs.latch_valid) begin
                reg_wr_o[g]        = 1'b1;
                cmd_o[g].latch_clr = 1'b1;
              end
              meta_ack_o[g]    = 1'b1;
              pc_load_o[g]     = 1'b1;
              pc_o[g]          = greq.next_pc;
              cmd_o[g].wait_we = 1'b1;
              event_o = EV_WAIT_DONE;
            end
          end

          Q_ALLOC: begin
            if ($countones(prealloc_i[g]) >= greq.arg) begin
              meta_ack_o[g]    = 1'b1;
              pc_load_o[g]     = 1'b1;
              pc_o[g]          = greq.next_pc;
              cmd_o[g].wait_we = 1'b1;
              cmd_o[g].mode_we = 1'b1;
              cmd_o[g].mode    = greq.mode;
              event_o = EV_WAIT_DONE;
            end else if (c_found) begin
              prealloc_set_o[g]       = c_mask;
              cmd_o[c].rsv_set        = 1'b1;
              cmd_o[c].mode_we        = 1'b1;
              cmd_o[c].mode           = greq.mode;
              cmd_o[c].from_parent_we = 1'b1;
              cmd_o[c].from_parent    = gs.for_child;
              cmd_o[g].wait_we        = 1'b1;
              event_o = EV_ALLOC;
            end else begin
              cmd_o[g].wait_we  = 1'b1;
              cmd_o[g].wait_why = WAIT_CORE;
              event_o = EV_BLOCK_CORE;
            end
          end

          Q_IWAIT: begin
            if (irq_up[g]) begin
              meta_ack_o[g]    = 1'b1;
              pc_load_o[g]     = 1'b1;
              pc_o[g]          = greq.target;
              cmd_o[g].wait_we = 1'b1;
              irq_ack_o        = irq_sel[g];
              event_o = EV_IRQ;
            end else begin
              cmd_o[g].wait_we  = 1'b1;
              cmd_o[g].wait_why = WAIT_IRQ;
              event_o = EV_BLOCK_IRQ;
            end
          end

          Q_FCREATE: begin
            if (!gs.loop) begin
              cmd_o[g].loop_set = 1'b1;
              if (gs.mode == MODE_SUMUP) begin
                cmd_o[g].count_we = 1'b1;
                cmd_o[g].count    = greq.arg;
                cmd_o[g].acc_clr  = 1'b1;
              end else begin
                cmd_o[g].from_child_we = 1'b1;
                cmd_o[g].from_child    = greq.arg;
              end
              event_o = EV_LOOP_INIT;
            end else if (gs.mode == MODE_SUMUP) begin
              if (gs.count != '0) begin
                if (c_found) begin
                  launch = 1'b1;
                  lmode  = MODE_SUMUP;
                  cmd_o[g].count_dec      = 1'b1;
                  cmd_o[g].for_child_step = 1'b1;
                  cmd_o[g].wait_we        = 1'b1;
                  event_o = EV_SUMUP_STEP;
                end else begin
                  cmd_o[g].wait_we  = 1'b1;
                  cmd_o[g].wait_why = WAIT_CORE;
                  event_o = EV_BLOCK_CORE;
                end
              end else if (children_i[g] != '0) begin
                cmd_o[g].wait_we  = 1'b1;
                cmd_o[g].wait_why = WAIT_CHILDREN;
                event_o = EV_BLOCK_CHILD;
              end else begin
                cmd_o[g].loop_clr  = 1'b1;
                cmd_o[g].latch_clr = 1'b1;
                cmd_o[g].wait_we   = 1'b1;
                meta_ack_o[g]      = 1'b1;
                pc_load_o[g]       = 1'b1;
                pc_o[g]            = greq.next_pc;
                event_o = EV_LOOP_DONE;
              end
            end else begin
              // FOR mode
              if (children_i[g] != '0) begin
                cmd_o[g].wait_we  = 1'b1;
                cmd_o[g].wait_why = WAIT_CHILDREN;
                event_o = EV_BLOCK_CHILD;
              end else if (gs.from_child == '0) begin
                if (gs.latch_valid) begin
                  reg_wr_o[g]        = 1'b1;
                  cmd_o[g].latch_clr = 1'b1;
                end
                cmd_o[g].loop_clr = 1'b1;
                cmd_o[g].wait_we  = 1'b1;
                meta_ack_o[g]     = 1'b1;
                pc_load_o[g]      = 1'b1;
                pc_o[g]           = greq.next_pc;
                event_o = EV_LOOP_DONE;
              end else if (c_found) begin
                launch     = 1'b1;
                lmode      = MODE_FOR;
                clone_back = gs.latch_valid;
                if (gs.latch_valid) begin
                  reg_wr_o[g]        = 1'b1;
                  cmd_o[g].latch_clr = 1'b1;
                end
                cmd_o[g].from_child_dec = 1'b1;
                cmd_o[g].for_child_step = 1'b1;
                cmd_o[g].wait_we        = 1'b1;
                event_o = EV_FOR_STEP;
              end else begin
                cmd_o[g].wait_we  = 1'b1;
                cmd_o[g].wait_why = WAIT_CORE;
                event_o = EV_BLOCK_CORE;
              end
            end
          end

          default: ;
        endcase
      end

      // Renting core c for requester g: bitmasks, glue cloning, FromParent latch.
      if (launch) begin
        cmd_o[c].run_set        = 1'b1;
        cmd_o[c].offset_we      = 1'b1;
        cmd_o[c].offset         = greq.target;
        cmd_o[c].mode_we        = 1'b1;
        cmd_o[c].mode           = lmode;
        cmd_o[c].from_parent_we = 1'b1;
        cmd_o[c].from_parent    = gs.for_child;
        cmd_o[c].fp_clr         = 1'b1;
        cmd_o[c].latch_clr      = 1'b1;
        cmd_o[c].wait_we        = 1'b1;
        parent_we_o[c]          = 1'b1;
        parent_o[c]             = gid;
        children_set_o[g]       = c_mask;
        rf_load_o[c]            = 1'b1;
        pc_load_o[c]            = 1'b1;
        pc_o[c]                 = greq.target;
        if (clone_back) rf_o[LINK_REG] = gs.latch;
      end
    end
  end

  // A core must not be acknowledged for a metainstruction it does not present,
  // and the supervisor serves one requester per cycle.
  for (genvar i = 0; i < NCORES; i++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     meta_ack_o[i] |-> meta_valid_i[i]);
  end
  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt));

endmodule
