// tb_empa_core_ext: directed checks of one core's EMPA registers. Drives the
// supervisor commands and the pseudo-register port the way the supervisor and
// a core would, and compares the register contents, Avail/Enable/Wait and the
// context-dependent pseudo-register reads with values computed here.
module tb_empa_core_ext;
  import empa_pkg::*;
  localparam int unsigned N = 8, ID = 3;
  logic clk = 0, rst_n = 0;
  logic dis = 0, psr_we = 0, psr_role = 0;
  word_t psr_wdata = '0, psr_rdata;
  logic en, wt;
  core_cmd_t cmd = CORE_CMD_IDLE;
  logic parent_we = 0, prealloc_clr = 0;
  logic [N-1:0] parent_in = '0, ch_set = '0, ch_clr = '0, pre_set = '0;
  core_state_t st;
  logic [N-1:0] ident, par, ch, pre;
  int checks = 0, failures = 0;

  empa_core_ext #(.NCORES(N), .ID(ID), .BOOT(1'b0)) dut (
    .clk_i(clk), .rst_ni(rst_n), .disable_i(dis), .psr_we_i(psr_we), .psr_role_i(psr_role),
    .psr_wdata_i(psr_wdata), .psr_rdata_o(psr_rdata), .enable_o(en), .wait_o(wt),
    .cmd_i(cmd), .parent_we_i(parent_we), .parent_i(parent_in), .children_set_i(ch_set),
    .children_clr_i(ch_clr), .prealloc_set_i(pre_set), .prealloc_clr_all_i(prealloc_clr),
    .state_o(st), .identity_o(ident), .parent_o(par), .children_o(ch), .prealloc_o(pre)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic tick;
    @(posedge clk); #1;
    cmd = CORE_CMD_IDLE; parent_we = 0; ch_set = '0; ch_clr = '0; pre_set = '0;
    prealloc_clr = 0; psr_we = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; #1;
    chk(ident == 8'b0000_1000, "identity one-hot");
    chk(!en && st.avail && !wt && par == 0 && ch == 0, "idle after reset");
    dis = 1; #1; chk(!st.avail, "disabled core not available"); dis = 0;

    // rented as a FOR child of core 1, with FromParent = 0x40
    cmd.run_set = 1; cmd.offset_we = 1; cmd.offset = 32'd200; cmd.mode_we = 1; cmd.mode = MODE_FOR;
    cmd.from_parent_we = 1; cmd.from_parent = 32'h40; parent_we = 1; parent_in = 8'b10;
    tick;
    chk(en && !st.avail && par == 8'b10 && st.offset == 200 && st.mode == MODE_FOR, "rented");
    psr_role = 1; #1; chk(psr_rdata == 32'h40, "child reads FromParent");
    // child writes ForParent: valid, not pending outside SUMUP
    psr_we = 1; psr_role = 1; psr_wdata = 32'd0; tick;
    chk(st.fp_valid && !st.fp_pending && st.for_parent == 0, "ForParent written (FOR)");
    cmd.fp_clr = 1; tick; chk(!st.fp_valid, "ForParent consumed");

    // as a parent: ForChild written by the core, stepped by the supervisor
    psr_we = 1; psr_role = 0; psr_wdata = 32'h100; tick;
    chk(st.for_child == 32'h100, "ForChild written");
    cmd.for_child_step = 1; tick; chk(st.for_child == 32'h104, "ForChild advanced one word");
    cmd.from_child_we = 1; cmd.from_child = 32'd5; tick;
    cmd.from_child_dec = 1; tick;
    psr_role = 0; #1; chk(psr_rdata == 32'd4 && st.from_child == 4, "FromChild counted down, read as parent");
    ch_set = 8'b0110_0000; tick; ch_set = 8'b0000_0001; ch_clr = 8'b0010_0000; tick;
    chk(ch == 8'b0100_0001, "Children set/clear");
    pre_set = 8'b1000_0000; tick; pre_set = 8'b0000_0100; tick;
    chk(pre == 8'b1000_0100, "Preallocated accumulates");
    prealloc_clr = 1; tick; chk(pre == 0, "Preallocated released");
    cmd.latch_we = 1; cmd.latch = 32'hBEEF; tick;
    chk(st.latch_valid && st.latch == 32'hBEEF, "link value latched");
    cmd.latch_clr = 1; tick; chk(!st.latch_valid, "latch consumed");
    cmd.wait_we = 1; cmd.wait_why = WAIT_CHILDREN; tick; chk(wt, "Wait asserted");
    cmd.wait_we = 1; cmd.wait_why = WAIT_NONE; tick; chk(!wt, "Wait released");

    // SUMUP: parent reads its adder; child write raises a pending transfer
    cmd.mode_we = 1; cmd.mode = MODE_SUMUP; cmd.acc_clr = 1; cmd.count_we = 1; cmd.count = 3; tick;
    for (int i = 1; i <= 3; i++) begin
      cmd.acc_add = 1; cmd.from_child = word_t'(i * 10); cmd.from_child_we = 1; cmd.count_dec = 1; tick;
    end
    psr_role = 0; #1; chk(psr_rdata == 60 && st.count == 0, "SUMUP sum read through pseudo register");
    psr_we = 1; psr_role = 1; psr_wdata = 32'd77; tick;
    chk(st.fp_pending && st.for_parent == 77, "SUMUP ForParent write requests transfer");
    cmd.pend_clr = 1; tick; chk(!st.fp_pending && st.fp_valid, "transfer done");
    cmd.rsv_set = 1; cmd.run_clr = 1; tick;
    chk(!en && st.reserved && !st.avail, "preallocated idle core not in pool");
    cmd.rsv_clr = 1; tick; chk(st.avail, "released core back in pool");
    cmd.loop_set = 1; tick; chk(st.loop, "loop flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
