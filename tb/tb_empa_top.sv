// tb_empa_top: end-to-end test of the EMPA processor (empa_top) with six
// behavioural cores and a behavioural data memory. Each scenario resets the
// system, starts the boot core at a different program address and checks the
// architectural result against values computed here:
//   1 nested QCreate/QWait/QTerm with cloning and link-register return
//   2 QTerm of a parent blocked until its child terminates
//   3 FOR-mode vector sum (supervisor runs the loop, child adds one element)
//   4 FOR-mode loop broken by the child through ForParent
//   5 SUMUP-mode vector sums of several lengths (children feed the parent's
//     adder), with the incremental cost per element measured
//   6 more QCreates than cores: requester blocked for lack of a core, and a
//     disabled core never rented
//   7 an interrupt-servicing core (QIWait) waits in Wait until a peripheral
//     raises its line, then runs the service routine at once; its result
//     reaches the creating core through the usual QTerm/QWait path
// Every supervisor mechanism is counted and a mechanism that never happened
// counts as a failure.
module tb_empa_top;
  import empa_pkg::*;
  import empa_tb_pkg::*;

  localparam int unsigned N    = 6;
  localparam int unsigned PLEN = 256;
  localparam int unsigned DLEN = 1024;
  localparam word_t       VADDR = 32'h100;   // vector base address (bytes)

  localparam int forlens [3] = '{1, 2, 4};
  localparam int sulens [5] = '{1, 2, 4, 5, 12};

  logic clk = 0, rst_n = 0;
  word_t  reset_pc = '0;
  instr_t prog [PLEN];
  word_t  dmem [DLEN];

  logic      meta_valid [N];
  meta_req_t meta_req   [N];
  word_t     core_rf    [N][NREGS];
  logic      dis        [N];
  logic      psr_we     [N];
  logic      psr_role   [N];
  word_t     psr_wdata  [N];
  word_t     psr_rdata  [N];
  logic      enable     [N];
  logic      wait_s     [N];
  logic      meta_ack   [N];
  logic      pc_load    [N];
  word_t     pc_val     [N];
  logic      rf_load    [N];
  word_t     rf_bus     [NREGS];
  logic      reg_wr     [N];
  word_t     reg_data;
  logic      alu_avail;
  logic [7:0] irq = '0;
  logic [7:0] irq_ack;
  sv_event_e ev;
  logic      xfer, xterm;
  logic [$clog2(N)-1:0] ev_core, xfer_core;
  word_t     core_pc    [N];
  int        retired    [N];

  empa_top #(.NCORES(N)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .meta_valid_i(meta_valid), .meta_req_i(meta_req), .core_rf_i(core_rf),
    .disable_i(dis), .psr_we_i(psr_we), .psr_role_i(psr_role), .psr_wdata_i(psr_wdata),
    .psr_rdata_o(psr_rdata), .enable_o(enable), .wait_o(wait_s), .meta_ack_o(meta_ack),
    .pc_load_o(pc_load), .pc_o(pc_val), .rf_load_o(rf_load), .rf_o(rf_bus),
    .reg_wr_o(reg_wr), .reg_data_o(reg_data), .alu_avail_o(alu_avail),
    .irq_i(irq), .irq_ack_o(irq_ack),
    .event_o(ev), .xfer_o(xfer), .xterm_o(xterm), .xfer_core_o(xfer_core), .event_core_o(ev_core)
  );

  for (genvar i = 0; i < N; i++) begin : g_core
    empa_core_model #(.PLEN(PLEN), .DLEN(DLEN)) u_core (
      .clk_i(clk), .rst_ni(rst_n), .reset_pc_i(reset_pc), .prog_i(prog), .dmem_i(dmem),
      .enable_i(enable[i]), .pc_load_i(pc_load[i]), .pc_i(pc_val[i]),
      .rf_load_i(rf_load[i]), .rf_i(rf_bus), .reg_wr_i(reg_wr[i]), .reg_data_i(reg_data),
      .meta_ack_i(meta_ack[i]), .psr_rdata_i(psr_rdata[i]),
      .meta_valid_o(meta_valid[i]), .meta_req_o(meta_req[i]), .rf_o(core_rf[i]),
      .psr_we_o(psr_we[i]), .psr_role_o(psr_role[i]), .psr_wdata_o(psr_wdata[i]),
      .pc_o(core_pc[i]), .retired_o(retired[i])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int ev_cnt [16];
  int xfer_cnt = 0, xterm_cnt = 0, clone_back_cnt = 0, avail_low_cnt = 0, max_busy = 0;
  int cycle = 0, t_init = 0, t_done = 0;
  logic ever_enabled [N];
  // interrupt source for scenario 7: raises line 3 after the servicing core
  // has waited IRQ_DELAY clocks, drops it when it is acknowledged
  localparam int IRQ_DELAY = 12;
  logic irq_arm = 1'b0;
  int   irq_wait = 0, t_raise = -1, t_serve = -1, irq_waiting_seen = 0;

  always @(posedge clk) if (rst_n) begin
    int busy;
    cycle++;
    ev_cnt[int'(ev)]++;
    if (xfer) xfer_cnt++;
    if (xterm) xterm_cnt++;
    if (!alu_avail) avail_low_cnt++;
    busy = 0;
    for (int i = 0; i < N; i++) begin
      if (reg_wr[i]) clone_back_cnt++;
      if (enable[i]) begin busy++; ever_enabled[i] = 1'b1; end
    end
    if (busy > max_busy) max_busy = busy;
    if (ev == EV_LOOP_INIT) t_init = cycle;
    if (ev == EV_LOOP_DONE) t_done = cycle;
    if (irq_arm && !irq[3]) begin
      for (int i = 0; i < N; i++) if (wait_s[i] && enable[i] && i != 0) irq_waiting_seen++;
      irq_wait++;
      if (irq_wait == IRQ_DELAY) begin irq[3] <= 1'b1; t_raise = cycle + 1; end
    end
    if (irq_ack[3]) begin
      irq[3] <= 1'b0; t_serve = cycle; irq_arm = 1'b0;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic all_idle();
    for (int i = 0; i < N; i++) if (enable[i]) return 1'b0;
    return 1'b1;
  endfunction

  // Reset, start the boot core at 'pc', run until every core is idle.
  task automatic run(input word_t pc, input int limit, output int cycles);
    rst_n = 0; reset_pc = pc;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    cycles = 0;
    do begin
      @(posedge clk); #1; cycles++;
    end while (!all_idle() && cycles < limit);
    chk(all_idle(), $sformatf("scenario at pc %0d finished", pc));
    for (int i = 0; i < N; i++)
      chk(dut.children[i] == '0 && dut.parent_mask[i] == '0 && dut.prealloc[i] == '0,
          $sformatf("core %0d bitmasks cleared", i));
  endtask

  function automatic word_t vsum(int len);
    word_t s = '0;
    for (int i = 0; i < len; i++) s += dmem[(VADDR / WORD_BYTES) + i];
    return s;
  endfunction

  initial begin
    int cyc, k, lens [$];
    int t_prev, len_prev, len, kk;
    for (int i = 0; i < PLEN; i++) prog[i] = '0;
    for (int i = 0; i < DLEN; i++) dmem[i] = word_t'($urandom() % 100000);
    for (int i = 0; i < 16; i++) ev_cnt[i] = 0;
    for (int i = 0; i < N; i++) begin dis[i] = 1'b0; ever_enabled[i] = 1'b0; end

    // 1: nested QTs
    prog[0]  = irmov(0, 5);
    prog[1]  = irmov(1, 100);
    prog[2]  = qmeta(Q_CREATE, 10, 3);
    prog[3]  = irmov(2, 7);
    prog[4]  = qmeta(Q_WAIT, 0, 5);
    prog[5]  = qmeta(Q_TERM, 0, 0);
    prog[10] = addl(1, 0);                 // child: %eax = 5 + 100 (cloned glue)
    prog[11] = qmeta(Q_CALL, 20, 12);
    prog[12] = qmeta(Q_WAIT, 0, 13);       // %eax = grandchild's %eax
    prog[13] = addl(1, 0);
    prog[14] = qmeta(Q_TERM, 0, 0);
    prog[20] = addl(0, 0);                 // grandchild: %eax = 2 * 105
    prog[21] = qmeta(Q_TERM, 0, 0);
    // 2: parent terminates before its child
    prog[30] = irmov(0, 1);
    prog[31] = qmeta(Q_CREATE, 35, 32);
    prog[32] = qmeta(Q_TERM, 0, 0);
    prog[39] = qmeta(Q_TERM, 0, 0);        // child: 35..38 are NOPs
    // 3: FOR-mode sum
    prog[40] = irmov(0, 0);
    prog[41] = irmov(2, VADDR);
    prog[42] = psrw(2, 0);                 // ForChild = vector address
    prog[43] = qmeta(Q_ALLOC, 0, 44, 1, MODE_FOR);
    prog[45] = qmeta(Q_TERM, 0, 0);
    prog[50] = psrr(3, 1);                 // child: address from FromParent
    prog[51] = mrmov(4, 3);
    prog[52] = addl(4, 0);                 // partial sum in %eax, cloned back
    prog[53] = qmeta(Q_TERM, 0, 0);
    // 4: FOR loop broken by the child
    prog[60] = irmov(0, 0);
    prog[61] = irmov(2, VADDR);
    prog[62] = psrw(2, 0);
    prog[63] = qmeta(Q_ALLOC, 0, 64, 1, MODE_FOR);
    prog[64] = qmeta(Q_FCREATE, 66, 65, 5);
    prog[65] = qmeta(Q_TERM, 0, 0);
    prog[66] = psrr(3, 1);
    prog[67] = mrmov(4, 3);
    prog[68] = addl(4, 0);
    prog[69] = irmov(5, 0);
    prog[70] = psrw(5, 1);                 // ForParent = 0: no more iterations
    prog[71] = qmeta(Q_TERM, 0, 0);
    // 5: SUMUP-mode sum
    prog[72] = irmov(2, VADDR);
    prog[73] = psrw(2, 0);
    prog[76] = psrr(0, 0);                 // final sum read from the adder
    prog[77] = qmeta(Q_TERM, 0, 0);
    prog[80] = psrr(3, 1);
    prog[81] = mrmov(4, 3);
    prog[82] = psrw(4, 1);                 // summand to the parent's adder
    prog[83] = qmeta(Q_TERM, 0, 0);
    // 6: more QCreates than cores
    for (int i = 0; i < N + 2; i++) prog[90 + i] = qmeta(Q_CREATE, 160, 90 + i + 1);
    prog[160 + 2 * N + 8] = qmeta(Q_TERM, 0, 0);   // child: 2N+8 NOPs, outlives N creates
    // 7: interrupt-servicing core
    prog[240] = irmov(0, 0);
    prog[241] = qmeta(Q_CREATE, 245, 242);   // prepare a core for interrupt line 3
    prog[242] = irmov(2, 9);                 // the creator goes on with its work
    prog[243] = qmeta(Q_WAIT, 0, 244);
    prog[244] = qmeta(Q_TERM, 0, 0);
    prog[245] = qmeta(Q_IWAIT, 248, 0, 3);   // wait for line 3, service at 248
    prog[248] = irmov(1, 42);
    prog[249] = addl(1, 0);                  // service result in %eax
    prog[250] = qmeta(Q_TERM, 0, 0);

    run(0, 2000, cyc);
    chk(g_core[0].u_core.regs[0] == 310, $sformatf("nested QTs: %%eax=%0d, expected 310", g_core[0].u_core.regs[0]));
    chk(g_core[0].u_core.regs[2] == 7, "parent continued after QCreate");
    $display("scenario 1: %0d cycles", cyc);

    k = ev_cnt[EV_BLOCK_CHILD];
    run(30, 2000, cyc);
    chk(ev_cnt[EV_BLOCK_CHILD] > k, "QTerm waited for the child");
    chk(g_core[0].u_core.regs[0] == 1, "parent glue intact");

    foreach (forlens[j]) begin
      len = forlens[j];
      k = ev_cnt[EV_FOR_STEP];
      prog[44] = qmeta(Q_FCREATE, 50, 45, len);
      run(40, 20000, cyc);
      chk(g_core[0].u_core.regs[0] == vsum(len),
          $sformatf("FOR sum of %0d: %0d expected %0d", len, g_core[0].u_core.regs[0], vsum(len)));
      chk(ev_cnt[EV_FOR_STEP] - k == len, "one FOR iteration per element");
      $display("FOR  length %0d: loop %0d cycles, total %0d cycles, 2 cores", len, t_done - t_init, cyc);
    end

    k = ev_cnt[EV_FOR_STEP];
    run(60, 2000, cyc);
    chk(ev_cnt[EV_FOR_STEP] - k == 1, "child broke the FOR loop after one iteration");
    chk(g_core[0].u_core.regs[0] == dmem[VADDR / WORD_BYTES], "FOR break result");

    t_prev = 0; len_prev = 0;
    foreach (sulens[j]) begin
      len = sulens[j];
      kk  = (len < 5) ? len : 5;
      k = ev_cnt[EV_SUMUP_STEP];
      prog[74] = qmeta(Q_ALLOC, 0, 75, kk, MODE_SUMUP);
      prog[75] = qmeta(Q_FCREATE, 80, 76, len);
      run(72, 200000, cyc);
      chk(g_core[0].u_core.regs[0] == vsum(len),
          $sformatf("SUMUP sum of %0d: %0d expected %0d", len, g_core[0].u_core.regs[0], vsum(len)));
      chk(ev_cnt[EV_SUMUP_STEP] - k == len, "one SUMUP child per element");
      $display("SUMUP length %0d: loop %0d cycles, total %0d cycles, %0d cores", len, t_done - t_init, cyc, kk + 1);
      // with a helper core for every element, each further element lengthens
      // the SUMUP loop by one supervisor cycle (the rate the architecture gives)
      if (len_prev != 0 && len_prev >= 2 && kk == len)
        chk((t_done - t_init) - t_prev == len - len_prev,
            $sformatf("SUMUP cost per element: %0d cycles for %0d more", (t_done - t_init) - t_prev, len - len_prev));
      t_prev = t_done - t_init; len_prev = len;
    end

    dis[N-1] = 1'b1;
    for (int i = 0; i < N; i++) ever_enabled[i] = 1'b0;
    k = ev_cnt[EV_CREATE];
    prog[90 + N + 2] = qmeta(Q_WAIT, 0, 90 + N + 3);
    prog[90 + N + 3] = qmeta(Q_TERM, 0, 0);
    run(90, 5000, cyc);
    chk(ev_cnt[EV_CREATE] - k == N + 2, "every QCreate served");
    chk(!ever_enabled[N-1], "disabled core never rented");
    dis[N-1] = 1'b0;

    k = ev_cnt[EV_BLOCK_IRQ];
    irq_wait = 0; irq_arm = 1'b1;
    run(240, 2000, cyc);
    chk(ev_cnt[EV_BLOCK_IRQ] - k == 1, "servicing core put in Wait once, no polling");
    chk(irq_waiting_seen >= IRQ_DELAY - 4, "servicing core held in Wait until the interrupt");
    chk(t_raise > 0 && t_serve == t_raise, $sformatf("interrupt served in the clock it arrived (%0d, %0d)", t_raise, t_serve));
    chk(irq == '0, "interrupt line acknowledged");
    chk(g_core[0].u_core.regs[0] == 42, $sformatf("service result returned: %%eax=%0d", g_core[0].u_core.regs[0]));
    chk(g_core[0].u_core.regs[2] == 9, "creator ran on while the service core waited");

    // each mechanism happened at least once
    chk(ev_cnt[EV_CREATE] > 0,      "mechanism: create");
    chk(ev_cnt[EV_ALLOC] > 0,       "mechanism: preallocation");
    chk(ev_cnt[EV_LOOP_INIT] > 0,   "mechanism: loop init");
    chk(ev_cnt[EV_FOR_STEP] > 0,    "mechanism: FOR iteration");
    chk(ev_cnt[EV_SUMUP_STEP] > 0,  "mechanism: SUMUP launch");
    chk(xfer_cnt > 0,               "mechanism: SUMUP transfer");
    chk(ev_cnt[EV_LOOP_DONE] > 0,   "mechanism: loop done");
    chk(ev_cnt[EV_TERM] > 0,        "mechanism: terminate");
    chk(xterm_cnt > 0,              "mechanism: SUMUP child terminated on the transfer path");
    chk(ev_cnt[EV_WAIT_DONE] > 0,   "mechanism: wait satisfied");
    chk(ev_cnt[EV_BLOCK_CORE] > 0,  "mechanism: blocked for lack of a core");
    chk(ev_cnt[EV_BLOCK_CHILD] > 0, "mechanism: blocked by running children");
    chk(ev_cnt[EV_BLOCK_IRQ] > 0,   "mechanism: waiting for an interrupt");
    chk(ev_cnt[EV_IRQ] > 0,         "mechanism: interrupt service started");
    chk(clone_back_cnt > 0,         "mechanism: link value cloned back");
    chk(avail_low_cnt > 0,          "mechanism: ALU-available low");
    $display("events: create=%0d alloc=%0d for=%0d sumup=%0d xfer=%0d xterm=%0d term=%0d block_core=%0d block_child=%0d irq=%0d clone_back=%0d avail_low=%0d max_busy=%0d",
             ev_cnt[EV_CREATE], ev_cnt[EV_ALLOC], ev_cnt[EV_FOR_STEP], ev_cnt[EV_SUMUP_STEP],
             xfer_cnt, xterm_cnt, ev_cnt[EV_TERM], ev_cnt[EV_BLOCK_CORE], ev_cnt[EV_BLOCK_CHILD],
             ev_cnt[EV_IRQ], clone_back_cnt, avail_low_cnt, max_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
