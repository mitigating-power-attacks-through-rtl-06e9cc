// tb_aes_workload: the scheduler at its default parameters (4 ways x 16 sets per table)
// running the micro-op stream of a byte-oriented AES-128 encryption for 2,000
// plaintexts, 2,762,000 micro-ops, inside the behavioural core of aes_core_model.
//
// The model checks every issue (operands, delay, port, exactly once) and, over the
// second thousand plaintexts, that delays are injected, that some are stable random
// delays, that one instruction is issued with four or more different delays and that
// the run stays within 5% of the dispatch bound of 1,381 cycles per plaintext. This
// wrapper adds the watchdog and prints the result line.
module tb_aes_workload;
  logic done;
  int checks, failures, cycles, delayed, distinct;

  aes_core_model u_core (.done, .checks, .failures, .cycles, .delayed, .distinct);

  initial begin
    fork
      begin #1; wait (done === 1'b1); end
      #(10 * 4_000_000);
    join_any
    if (done !== 1'b1) begin
      failures++;
      $display("watchdog expired");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
