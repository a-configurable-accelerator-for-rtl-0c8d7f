// empa_top: an EMPA processor without its cores - the supervisor and one EMPA
// extension per core, wired as a star: every core talks only to the
// supervisor, which forwards control and data between parent and child like a
// switching centre, so no core is wired to any other.
//
// The processing cores themselves (conventional Y86 cores) are outside this
// module; each core's side of the EMPA interface is a port array indexed by
// core number:
//   core -> EMPA   meta_valid_i/meta_req_i  metainstruction found at pre-fetch,
//                                           held until meta_ack_o
//                  core_rf_i                register file, read for cloning
//                                           and for the link register (%eax)
//                  psr_*_i                  pseudo register (%esv) access
//                  disable_i                take the core out of the pool
//   EMPA -> core   enable_o                 Enable: run, else stay idle
//                  wait_o                   Wait: blocked by the supervisor
//                  pc_load_o/pc_o           new PC (QT start or resume point)
//                  rf_load_o/rf_o           clone the register file (rf_o is a
//                                           shared bus)
//                  reg_wr_o/reg_data_o      write a returned value into %eax
//                  psr_rdata_o              pseudo register read data
// irq_i/irq_ack_o are the interrupt lines of the peripherals: a line is held
// high until acknowledged, and the supervisor acknowledges it in the clock in
// which a core waiting for it (Q_IWAIT) is started on its service routine.
// alu_avail_o is the processor-level "ALU available": at least one core can
// accept a new QT. Core BOOT_CORE is enabled after reset and runs the first QT.
// All outputs to the cores are combinational from the registered EMPA state
// and the current requests; every update takes effect at the next clock edge.
module empa_top
  import empa_pkg::*;
#(
  parameter int unsigned NCORES    = 32,
  parameter int unsigned BOOT_CORE = 0,
  parameter int unsigned NIRQ      = 8
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        meta_valid_i [NCORES],
  input  meta_req_t   meta_req_i   [NCORES],
  input  word_t       core_rf_i    [NCORES][NREGS],
  input  logic        disable_i    [NCORES],
  input  logic        psr_we_i     [NCORES],
  input  logic        psr_role_i   [NCORES],
  input  word_t       psr_wdata_i  [NCORES],
  output word_t       psr_rdata_o  [NCORES],
  output logic        enable_o     [NCORES],
  output logic        wait_o       [NCORES],
  output logic        meta_ack_o   [NCORES],
  output logic        pc_load_o    [NCORES],
  output word_t       pc_o         [NCORES],
  output logic        rf_load_o    [NCORES],
  output word_t       rf_o         [NREGS],
  output logic        reg_wr_o     [NCORES],
  output word_t       reg_data_o,
  output logic        alu_avail_o,
  input  logic [NIRQ-1:0] irq_i,
  output logic [NIRQ-1:0] irq_ack_o,
  output sv_event_e   event_o,
  output logic        xfer_o,
  output logic        xterm_o,
  output logic [$clog2(NCORES > 1 ? NCORES : 2)-1:0] xfer_core_o,
  output logic [$clog2(NCORES > 1 ? NCORES : 2)-1:0] event_core_o
);

  core_state_t       state        [NCORES];
  core_cmd_t         cmd          [NCORES];
  logic [NCORES-1:0] parent_mask  [NCORES];
  logic [NCORES-1:0] children     [NCORES];
  logic [NCORES-1:0] prealloc     [NCORES];
  logic [NCORES-1:0] identity     [NCORES];
  logic              parent_we    [NCORES];
  logic [NCORES-1:0] parent_wdata [NCORES];
  logic [NCORES-1:0] children_set [NCORES];
  logic [NCORES-1:0] children_clr [NCORES];
  logic [NCORES-1:0] prealloc_set [NCORES];
  logic              prealloc_clr [NCORES];

  for (genvar i = 0; i < NCORES; i++) begin : g_core
    empa_core_ext #(
      .NCORES (NCORES),
      .ID     (i),
      .BOOT   (i == BOOT_CORE)
    ) u_ext (
      .clk_i,
      .rst_ni,
      .disable_i          (disable_i[i]),
      .psr_we_i           (psr_we_i[i]),
      .psr_role_i         (psr_role_i[i]),
      .psr_wdata_i        (psr_wdata_i[i]),
      .psr_rdata_o        (psr_rdata_o[i]),
      .enable_o           (enable_o[i]),
      .wait_o             (wait_o[i]),
      .cmd_i              (cmd[i]),
      .parent_we_i        (parent_we[i]),
      .parent_i           (parent_wdata[i]),
      .children_set_i     (children_set[i]),
      .children_clr_i     (children_clr[i]),
      .prealloc_set_i     (prealloc_set[i]),
      .prealloc_clr_all_i (prealloc_clr[i]),
      .state_o            (state[i]),
      .identity_o         (identity[i]),
      .parent_o           (parent_mask[i]),
      .children_o         (children[i]),
      .prealloc_o         (prealloc[i])
    );
  end

  empa_supervisor #(.NCORES(NCORES), .NIRQ(NIRQ)) u_sv (
    .clk_i,
    .rst_ni,
    .meta_valid_i,
    .meta_req_i,
    .core_rf_i,
    .meta_ack_o,
    .pc_load_o,
    .pc_o,
    .rf_load_o,
    .rf_o,
    .reg_wr_o,
    .reg_data_o,
    .alu_avail_o,
    .irq_i,
    .irq_ack_o,
    .state_i            (state),
    .parent_i           (parent_mask),
    .children_i         (children),
    .prealloc_i         (prealloc),
    .cmd_o              (cmd),
    .parent_we_o        (parent_we),
    .parent_o           (parent_wdata),
    .children_set_o     (children_set),
    .children_clr_o     (children_clr),
    .prealloc_set_o     (prealloc_set),
    .prealloc_clr_all_o (prealloc_clr),
    .event_o,
    .xfer_o,
    .xterm_o,
    .xfer_core_o,
    .event_core_o
  );

  // Identity masks are one-hot and a core is never its own parent.
  for (genvar i = 0; i < NCORES; i++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     $onehot(identity[i]) && !(|(parent_mask[i] & identity[i])));
  end

endmodule
