// tb_delay_ctrl: for every delay 0..31 and a random operand wait, checks that the slot
// becomes eligible exactly <delay> cycles after its operands are ready, never before,
// and that a reload restarts the count.
module tb_delay_ctrl;
  logic clk = 0, rst_n = 0, load = 0, ops_ready = 0, can_issue;
  logic [4:0] delay_in = '0;
  int checks = 0, failures = 0;

  delay_ctrl #(.DELAY_W(5)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d < 32; d++) begin
      int wait_c, n;
      wait_c = $urandom_range(0, 5);
      @(negedge clk);
      load = 1; delay_in = 5'(d); ops_ready = 0;
      @(negedge clk);
      load = 0;
      for (int i = 0; i < wait_c; i++) begin
        check(!can_issue, "eligible before operands");
        @(negedge clk);
      end
      ops_ready = 1;
      n = 0;
      #1;
      while (!can_issue && n < 40) begin
        @(negedge clk);
        #1;
        n++;
      end
      check(n == d, $sformatf("delay %0d took %0d cycles", d, n));
      ops_ready = 0;
    end
    // reload while counting
    @(negedge clk);
    load = 1; delay_in = 5'd10; ops_ready = 1;
    @(negedge clk);
    load = 0;
    repeat (4) @(negedge clk);
    load = 1; delay_in = 5'd3;
    @(negedge clk);
    load = 0;
    begin
      int n;
      n = 0;
      #1;
      while (!can_issue && n < 40) begin @(negedge clk); #1; n++; end
      check(n == 3, $sformatf("reload: %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
