// tb_empa_sumup_adder: sums random vectors through the SUMUP adder and
// compares with a running sum kept by the testbench; checks that clear wins
// over add and that the result appears one clock after the last summand.
module tb_empa_sumup_adder;
  import empa_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, add = 0;
  word_t summand, sum;
  int checks = 0, failures = 0;

  empa_sumup_adder dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .add_i(add),
                        .summand_i(summand), .sum_o(sum));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input word_t exp, input string what);
    checks++;
    if (sum !== exp) begin
      failures++;
      $display("%s: sum=%0d expected %0d", what, sum, exp);
    end
  endtask

  initial begin
    word_t model;
    summand = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); check('0, "reset");
    for (int v = 0; v < 50; v++) begin
      int len;
      len = 1 + ($urandom() % 40);
      clr = 1; add = 1; summand = 32'h1234;   // clear has priority
      @(negedge clk); clr = 0; check('0, "clear");
      model = '0;
      for (int i = 0; i < len; i++) begin
        summand = $urandom();
        add     = ($urandom() % 4) != 0;
        if (add) model += summand;
        @(negedge clk);
        check(model, "accumulate");         // one clock after the summand
      end
      add = 0;
      @(negedge clk); check(model, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
