// tb_msm_ctrl: the phase sequencer with three passes against modelled
// sub-units whose done pulses and busy flags come after random delays. Checks
// that collectors are cleared at start, that the passes run in order (one
// stream start and one bucket-stream start per pass, pass number correct),
// that no drain starts while the BAMs are busy, that the final pass starts
// only after the last drain with the collectors idle, and the done pulse.
module tb_msm_ctrl;
  localparam int NP = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done, running, sps_start, sb_start, dna_clear, dna_final_start;
  logic sps_done = 0, sb_done = 0, dna_final_done = 0;
  logic bam_busy, dna_busy;
  logic [7:0] pass;

  msm_ctrl #(.NUM_PASSES(NP)) dut (
    .clk, .rst_n, .start, .done, .running, .pass, .sps_start, .sps_done, .bam_busy,
    .sb_start, .sb_done, .dna_clear, .dna_busy, .dna_final_start, .dna_final_done
  );

  // sub-unit models
  int t_sps = -1, t_bam = 0, t_sb = -1, t_dna = 0, t_fin = -1;
  always @(posedge clk) begin
    sps_done <= 0; sb_done <= 0; dna_final_done <= 0;
    if (sps_start) t_sps <= 3 + int'($urandom % 5);
    else if (t_sps > 0) t_sps <= t_sps - 1;
    else if (t_sps == 0) begin t_sps <= -1; sps_done <= 1; t_bam <= 1 + int'($urandom % 6); end
    if (t_bam > 0) t_bam <= t_bam - 1;
    if (sb_start) t_sb <= 4 + int'($urandom % 5);
    else if (t_sb > 0) t_sb <= t_sb - 1;
    else if (t_sb == 0) begin t_sb <= -1; sb_done <= 1; t_dna <= 2 + int'($urandom % 6); end
    if (t_dna > 0) t_dna <= t_dna - 1;
    if (dna_final_start) t_fin <= 5;
    else if (t_fin > 0) t_fin <= t_fin - 1;
    else if (t_fin == 0) begin t_fin <= -1; dna_final_done <= 1; end
  end
  assign bam_busy = t_bam > 0;
  assign dna_busy = t_dna > 0;

  int checks = 0, failures = 0, n_sps = 0, n_sb = 0, n_clr = 0, n_fin = 0, n_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (dna_clear) n_clr++;
    if (sps_start) begin
      checks++;
      if (int'(pass) != n_sps || n_sb != n_sps) begin failures++; $display("FAIL sps_start order"); end
      n_sps++;
    end
    if (sb_start) begin
      checks += 2;
      if (bam_busy || t_sps >= 0) begin failures++; $display("FAIL drain while busy"); end
      if (int'(pass) != n_sb) begin failures++; $display("FAIL pass number"); end
      n_sb++;
    end
    if (dna_final_start) begin
      checks++;
      if (n_sb != NP || dna_busy || t_sb >= 0) begin failures++; $display("FAIL final too early"); end
      n_fin++;
    end
    if (done) n_done++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      n_sps = 0; n_sb = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      checks++;
      if (!running) begin failures++; $display("FAIL not running"); end
      while (n_done == run) @(negedge clk);
      @(negedge clk);
      checks += 3;
      if (n_sps != NP || n_sb != NP) begin failures++; $display("FAIL pass counts %0d %0d", n_sps, n_sb); end
      if (running) begin failures++; $display("FAIL still running"); end
      if (n_fin != run + 1 || n_clr != run + 1) begin failures++; $display("FAIL final/clear count"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
