// tb_empa_supervisor: directed checks of the supervisor's decisions in
// isolation. The testbench plays the per-core EMPA registers: it sets up the
// state of four cores, presents one metainstruction, and compares the
// supervisor's commands (bitmask updates, cloning, PC loads, latches, Wait)
// with the outcome each operation must have, one clock per case.
module tb_empa_supervisor;
  import empa_pkg::*;
  localparam int unsigned N = 4;

  logic clk = 0, rst_n = 0;
  logic        meta_valid [N];
  meta_req_t   meta_req   [N];
  word_t       core_rf    [N][NREGS];
  logic        meta_ack   [N], pc_load [N], rf_load [N], reg_wr [N];
  word_t       pc_v [N], rf_bus [NREGS], reg_data;
  logic        alu_avail;
  logic [7:0]  irq, irq_ack;
  core_state_t st [N];
  logic [N-1:0] par [N], ch [N], pre [N];
  core_cmd_t   cmd [N];
  logic        par_we [N], pre_clr [N];
  logic [N-1:0] par_w [N], ch_set [N], ch_clr [N], pre_set [N];
  sv_event_e   ev;
  logic        xfer, xterm;
  logic [1:0]  ev_core, xfer_core;
  int checks = 0, failures = 0;

  empa_supervisor #(.NCORES(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .meta_valid_i(meta_valid), .meta_req_i(meta_req),
    .core_rf_i(core_rf), .meta_ack_o(meta_ack), .pc_load_o(pc_load), .pc_o(pc_v),
    .rf_load_o(rf_load), .rf_o(rf_bus), .reg_wr_o(reg_wr), .reg_data_o(reg_data),
    .alu_avail_o(alu_avail), .irq_i(irq), .irq_ack_o(irq_ack), .state_i(st), .parent_i(par), .children_i(ch), .prealloc_i(pre),
    .cmd_o(cmd), .parent_we_o(par_we), .parent_o(par_w), .children_set_o(ch_set),
    .children_clr_o(ch_clr), .prealloc_set_o(pre_set), .prealloc_clr_all_o(pre_clr),
    .event_o(ev), .xfer_o(xfer), .xterm_o(xterm), .xfer_core_o(xfer_core), .event_core_o(ev_core)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // all cores idle and free, no requests
  task automatic clear_all;
    for (int i = 0; i < N; i++) begin
      irq = '0;
      meta_valid[i] = 0; meta_req[i] = '0; st[i] = '0; st[i].avail = 1;
      par[i] = '0; ch[i] = '0; pre[i] = '0;
      for (int r = 0; r < NREGS; r++) core_rf[i][r] = word_t'(i * 16 + r);
    end
  endtask

  task automatic busy(int i);
    st[i].running = 1; st[i].avail = 0;
  endtask

  task automatic req(int i, meta_op_e op, word_t tgt, word_t nxt, word_t arg = 0,
                     mode_e mode = MODE_NORMAL);
    meta_valid[i] = 1; meta_req[i].op = op; meta_req[i].target = tgt;
    meta_req[i].next_pc = nxt; meta_req[i].arg = arg; meta_req[i].mode = mode;
  endtask

  initial begin
    clear_all();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // Q_CREATE by core 1: lowest free core (0) rented, glue cloned
    clear_all(); busy(1); st[1].for_child = 32'h80; req(1, Q_CREATE, 50, 12); #1;
    chk(ev == EV_CREATE && ev_core == 1, "create event");
    chk(cmd[0].run_set && par_we[0] && par_w[0] == 4'b0010, "child enabled with Parent=core 1");
    chk(ch_set[1] == 4'b0001, "Children of parent gets child bit");
    chk(rf_load[0] && rf_bus[3] == core_rf[1][3], "register file cloned from parent");
    chk(pc_load[0] && pc_v[0] == 50 && cmd[0].offset == 50, "child PC and Offset = QT address");
    chk(cmd[0].from_parent_we && cmd[0].from_parent == 32'h80, "ForChild latched as FromParent");
    chk(meta_ack[1] && pc_load[1] && pc_v[1] == 12, "parent resumes at next address");
    chk(alu_avail, "ALU available while a core is free");
    @(negedge clk);

    // preallocated idle core preferred over the pool
    clear_all(); busy(0); pre[0] = 4'b1000; st[3].reserved = 1; st[3].avail = 0;
    req(0, Q_CREATE, 60, 1); #1;
    chk(cmd[3].run_set && !cmd[1].run_set, "preallocated core rented first");
    @(negedge clk);

    // no core: requester put in Wait, then not served until a core frees
    clear_all(); for (int i = 0; i < N; i++) busy(i); req(2, Q_CREATE, 60, 1); #1;
    chk(ev == EV_BLOCK_CORE && cmd[2].wait_we && cmd[2].wait_why == WAIT_CORE && !meta_ack[2],
        "blocked for lack of a core");
    chk(!alu_avail, "ALU available low when every core is busy");
    st[2].wait_why = WAIT_CORE; #1;
    chk(ev == EV_NONE, "waiting core does not occupy the supervisor");
    st[3].running = 0; st[3].avail = 1; #1;
    chk(ev == EV_CREATE && cmd[3].run_set, "woken when a core frees");
    @(negedge clk);

    // Q_TERM with children: blocked
    clear_all(); busy(0); busy(1); ch[0] = 4'b0010; par[1] = 4'b0001; req(0, Q_TERM, 0, 0); #1;
    chk(ev == EV_BLOCK_CHILD && cmd[0].wait_why == WAIT_CHILDREN && !cmd[0].run_clr, "QTerm waits for children");
    @(negedge clk);

    // Q_TERM of child 1 (FOR mode, ForParent written): link latched, bitmasks, break value
    clear_all(); busy(0); busy(1); ch[0] = 4'b0010; par[1] = 4'b0001; pre[1] = 4'b0100;
    st[1].mode = MODE_FOR; st[1].fp_valid = 1; st[1].for_parent = 0;
    req(1, Q_TERM, 0, 0); #1;
    chk(ev == EV_TERM && cmd[1].run_clr && meta_ack[1], "child disabled");
    chk(par_we[1] && par_w[1] == '0, "child Parent cleared");
    chk(ch_clr[0] == 4'b0010, "parent Children bit cleared");
    chk(cmd[0].latch_we && cmd[0].latch == core_rf[1][LINK_REG], "link register latched for parent");
    chk(cmd[0].from_child_we && cmd[0].from_child == 0, "ForParent copied to parent FromChild");
    chk(pre_clr[1] && cmd[2].rsv_clr, "preallocated cores of the terminating core released");
    @(negedge clk);

    // Q_WAIT with latched value
    clear_all(); busy(0); st[0].latch_valid = 1; st[0].latch = 32'd999; req(0, Q_WAIT, 0, 7); #1;
    chk(reg_wr[0] && reg_data == 999 && cmd[0].latch_clr && meta_ack[0] && pc_v[0] == 7,
        "wait delivers latched link value");
    @(negedge clk);

    // Q_ALLOC: one core per grant, then done
    clear_all(); busy(0); st[0].for_child = 32'h44; req(0, Q_ALLOC, 0, 9, 2, MODE_SUMUP); #1;
    chk(ev == EV_ALLOC && pre_set[0] == 4'b0010 && cmd[1].rsv_set && cmd[1].mode == MODE_SUMUP
        && !meta_ack[0], "first core preallocated");
    pre[0] = 4'b0110; #1;
    chk(ev == EV_WAIT_DONE && meta_ack[0] && cmd[0].mode_we && cmd[0].mode == MODE_SUMUP, "QAlloc complete");
    @(negedge clk);

    // Q_FCREATE in FOR mode: init, step, wait, done
    clear_all(); busy(0); st[0].mode = MODE_FOR; req(0, Q_FCREATE, 70, 5, 3); #1;
    chk(ev == EV_LOOP_INIT && cmd[0].loop_set && cmd[0].from_child_we && cmd[0].from_child == 3,
        "FOR count loaded into FromChild");
    st[0].loop = 1; st[0].from_child = 3; st[0].latch_valid = 1; st[0].latch = 32'd55; #1;
    chk(ev == EV_FOR_STEP && cmd[0].from_child_dec && cmd[0].for_child_step && cmd[1].run_set,
        "FOR iteration started");
    chk(rf_bus[LINK_REG] == 55 && reg_wr[0], "previous child's %eax cloned back");
    chk(!meta_ack[0], "parent stalls on the loop");
    ch[0] = 4'b0010; busy(1); #1;
    chk(ev == EV_BLOCK_CHILD, "next iteration waits for the child");
    ch[0] = '0; st[1] = '0; st[1].avail = 1; st[0].from_child = 0; st[0].latch_valid = 0; #1;
    chk(ev == EV_LOOP_DONE && meta_ack[0] && pc_v[0] == 5, "FromChild cleared: loop done");
    @(negedge clk);

    // SUMUP: launches while Count, transfer in parallel, done when children gone
    clear_all(); busy(0); st[0].mode = MODE_SUMUP; st[0].loop = 1; st[0].count = 2;
    pre[0] = 4'b0110; st[1].reserved = 1; st[1].avail = 0; st[2].reserved = 1; st[2].avail = 0;
    busy(3); par[3] = 4'b0001; ch[0] = 4'b1000; st[3].fp_pending = 1; st[3].for_parent = 32'd21;
    req(0, Q_FCREATE, 80, 6, 2); #1;
    chk(ev == EV_SUMUP_STEP && cmd[1].run_set && cmd[0].count_dec, "SUMUP child launched");
    chk(xfer && xfer_core == 3 && cmd[0].acc_add && cmd[0].from_child == 21 && cmd[3].pend_clr,
        "summand transferred in the same cycle");
    // the child reaches QTerm after its transfer: terminated on the transfer path
    st[3].fp_pending = 0; st[3].mode = MODE_SUMUP; req(3, Q_TERM, 0, 0); #1;
    chk(xterm && xfer_core == 3 && meta_ack[3] && cmd[3].run_clr && ch_clr[0] == 4'b1000
        && !cmd[0].latch_we, "SUMUP child terminated beside the launch");
    chk(ev == EV_SUMUP_STEP, "launch continues in the same cycle");
    meta_valid[3] = 0;
    st[0].count = 0; #1;
    chk(ev == EV_BLOCK_CHILD, "SUMUP done waits for children");
    ch[0] = '0; st[3] = '0; st[3].avail = 1; #1;
    chk(ev == EV_LOOP_DONE && meta_ack[0], "SUMUP done");
    @(negedge clk);

    // Q_IWAIT: held in Wait until its own line rises, then started on the
    // service routine and the line acknowledged
    clear_all(); busy(2); req(2, Q_IWAIT, 200, 0, 5); #1;
    chk(ev == EV_BLOCK_IRQ && cmd[2].wait_we && cmd[2].wait_why == WAIT_IRQ && !meta_ack[2]
        && irq_ack == '0, "interrupt core waits while its line is low");
    st[2].wait_why = WAIT_IRQ; irq = 8'b0000_1000; #1;
    chk(ev == EV_NONE && irq_ack == '0, "another line does not wake it");
    irq = 8'b0010_1000; #1;
    chk(ev == EV_IRQ && ev_core == 2 && meta_ack[2] && pc_load[2] && pc_v[2] == 200
        && cmd[2].wait_we && cmd[2].wait_why == WAIT_NONE, "raised line starts the service routine");
    chk(irq_ack == 8'b0010_0000, "only the serviced line is acknowledged");
    // two cores on one line: one raise is given to one core only
    busy(3); req(3, Q_IWAIT, 300, 0, 5); st[3].wait_why = WAIT_IRQ; #1;
    chk($onehot(irq_ack) && (meta_ack[2] ^ meta_ack[3]), "one raise serves one waiting core");
    // a line number beyond the lines present never wakes
    clear_all(); busy(1); req(1, Q_IWAIT, 200, 0, 9); st[1].wait_why = WAIT_IRQ; irq = '1; #1;
    chk(ev == EV_NONE && !meta_ack[1], "absent line never raised");
    @(negedge clk);

    // round robin: two requesters served in turn
    clear_all(); busy(0); busy(1); req(0, Q_WAIT, 0, 1); req(1, Q_WAIT, 0, 1);
    @(posedge clk); #1;
    begin
      logic [1:0] first;
      first = ev_core;
      @(posedge clk); #1;
      chk(ev_core != first, "round-robin alternates");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
