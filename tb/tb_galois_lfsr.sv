// tb_galois_lfsr: checks the Galois LFSR against a bit-serial reference, its period,
// reset seeding, reseeding with a run-time value and the zero-seed guard.
module tb_galois_lfsr;
  logic clk = 0, rst_n = 0, en = 0, reseed = 0;
  logic [15:0] reseed_value = '0, state;
  int checks = 0, failures = 0;

  galois_lfsr #(.WIDTH(16), .TAPS(16'hB400), .SEED(16'hACE1)) dut (.*);

  always #5 clk = ~clk;

  // Reference: the polynomial x^16+x^14+x^13+x^11+1 applied bit by bit.
  function automatic logic [15:0] ref_step(logic [15:0] s);
    logic fb;
    logic [15:0] n;
    fb = s[0];
    n  = {1'b0, s[15:1]};
    if (fb) begin
      n[15] = ~n[15]; // x^16 term
      n[13] = ~n[13]; // x^14
      n[12] = ~n[12]; // x^13
      n[10] = ~n[10]; // x^11
    end
    return n;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] m;
    int period;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == 16'hACE1, "reset loads SEED");
    // hold when disabled
    @(negedge clk);
    check(state == 16'hACE1, "holds when en=0");
    en = 1;
    m  = 16'hACE1;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      m = ref_step(m);
      check(state == m, $sformatf("step %0d: got %h exp %h", i, state, m));
    end
    // period
    period = 0;
    m = state;
    do begin
      @(negedge clk);
      period++;
      if (state == 16'h0) begin check(0, "reached zero"); break; end
    end while (state != m && period < 70000);
    check(period == 65535, $sformatf("period %0d", period));
    // reseed
    reseed_value = 16'h1234; reseed = 1;
    @(negedge clk);
    check(state == (16'hACE1 ^ 16'h1234), "reseed mixes value");
    reseed_value = 16'hACE1;
    @(negedge clk);
    check(state == 16'hACE1, "zero mix replaced by SEED");
    reseed = 0;
    @(negedge clk);
    check(state == ref_step(16'hACE1), "continues after reseed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
