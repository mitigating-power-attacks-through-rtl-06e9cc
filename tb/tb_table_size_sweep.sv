// tb_table_size_sweep: the ten Slack Unit sizes of the size study (2W8S, 2W16S, 4W8S,
// 2W32S, 4W16S, 8W8S, 2W64S, 4W32S, 8W16S, 2W128S: ways x sets per table, 16 to 256
// entries) each running 200 AES-128 plaintexts in its own aes_core_model.
//
// Every instance checks its issues and its delays as in the AES workload test (operands,
// delay, port, exactly once; delays injected and randomised). With only 200 plaintexts
// the learning phase weighs more and the smallest tables keep relearning, so a run may be
// up to 10% (rather than 5%) above the dispatch bound. The sweep prints, per size, the cycles per plaintext, the slowdown
// against the dispatch bound and the share of delayed micro-ops, and fails if any size
// fails or does not finish. The instances run side by side in one simulation.
module tb_table_size_sweep;
  localparam int NCFG = 10;
  localparam int NBLK = 200;
  localparam int PER  = 1381;                       // micro-ops per plaintext
  localparam int W [NCFG] = '{2, 2, 4, 2, 4, 8, 2, 4, 8, 2};
  localparam int S [NCFG] = '{8, 16, 8, 32, 16, 8, 64, 32, 16, 128};

  logic done [NCFG];
  int checks [NCFG], failures [NCFG], cycles [NCFG], delayed [NCFG], distinct [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    aes_core_model #(.SETS(S[g]), .WAYS(W[g]), .NBLK(NBLK), .MAX_OVER_PCT(10)) u_core (
      .done(done[g]), .checks(checks[g]), .failures(failures[g]), .cycles(cycles[g]),
      .delayed(delayed[g]), .distinct(distinct[g])
    );
  end

  initial begin
    int all_checks, all_failures, n_done;
    fork
      begin #1; wait (done.and() === 1'b1); end
      #(10 * 600_000);
    join_any
    all_checks = 0; all_failures = 0; n_done = 0;
    $display("config   entries  cycles/plaintext  over bound  delayed  max distinct delays");
    for (int i = 0; i < NCFG; i++) begin
      all_checks += checks[i];
      all_failures += failures[i];
      if (done[i] === 1'b1) begin
        n_done++;
        $display("%-8s %7d %17.1f %10.2f%% %6.1f%% %8d", $sformatf("%0dW%0dS", W[i], S[i]), W[i] * S[i],
                 real'(cycles[i]) / NBLK, 100.0 * (real'(cycles[i]) / (NBLK * PER) - 1.0),
                 delayed[i] / 10.0, distinct[i]);
      end else begin
        $display("%0dW%0dS did not finish", W[i], S[i]);
      end
    end
    all_checks++;
    if (n_done != NCFG) all_failures++;
    $display("TB_RESULT checks=%0d failures=%0d", all_checks, all_failures);
    $finish;
  end
endmodule
