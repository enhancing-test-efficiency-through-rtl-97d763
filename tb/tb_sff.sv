// tb_sff: self-checking testbench for the scan flip-flop.
//
// Drives random se / d / si for 2000 clocks and checks q after every rising
// edge against se ? si : d, then checks that rst clears q between clock edges
// (asynchronous reset). A watchdog ends the run with a failure if it hangs.
module tb_sff;

  logic clk = 1'b0;
  logic rst, se, d, si, q;
  int   checks = 0, failures = 0;

  sff dut (.clk(clk), .rst(rst), .se(se), .d(d), .si(si), .q(q));

  always #5 clk = ~clk;

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_q;
    rst = 1'b0; se = 1'b0; d = 1'b1; si = 1'b1;
    #1 rst = 1'b1;   // rising edge, whatever rst started at
    #1 check("reset value", q, 1'b0);
    @(negedge clk) rst = 1'b0;
    repeat (2000) begin
      se = 1'($urandom); d = 1'($urandom); si = 1'($urandom);
      exp_q = se ? si : d;
      @(posedge clk); #1;
      check(se ? "shift" : "capture", q, exp_q);
      @(negedge clk);
    end
    // asynchronous reset: q must drop before the next clock edge
    se = 1'b0; d = 1'b1;
    @(posedge clk); #1 check("load 1", q, 1'b1);
    #2 rst = 1'b1;
    #1 check("async reset", q, 1'b0);
    @(posedge clk); #1 check("held in reset", q, 1'b0);
    rst = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
