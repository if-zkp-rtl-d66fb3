// tb_sps_bucket: the bucket stream between three modelled BAMs and a modelled
// IS-RBAM. Each BAM model emits a few (index, point) words after its drain is
// started and then signals drain_done; the IS-RBAM model accepts at random,
// stays busy for a while after its input, and finishes its own drain some
// clocks after being started. Checks the order BAM 0, 1, 2, that every word
// is forwarded unchanged, that the IS-RBAM drain is started only once the
// BAM drain is over and the IS-RBAM is idle, the window number presented
// during each IS-RBAM drain, and the final done pulse.
module tb_sps_bucket;
  import zkp_pkg::*;

  localparam int NB = 3, WB = 6, NW = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done;
  logic [7:0] pass = 8'd2, window;
  logic bam_drain_start [NB], bam_out_valid [NB], bam_out_ready [NB], bam_drain_done [NB];
  logic [WB-1:0] bam_out_idx [NB];
  point_t bam_out_point [NB];
  logic rb_valid, rb_ready, rb_busy, rb_drain_start, rb_drain_done;
  logic [WB-1:0] rb_idx;
  point_t rb_point;

  sps_bucket #(.NUM_BAM(NB), .WINDOW_BITS(WB)) dut (
    .clk, .rst_n, .start, .pass, .done, .window,
    .bam_drain_start, .bam_out_valid, .bam_out_ready, .bam_out_idx, .bam_out_point,
    .bam_drain_done, .rb_valid, .rb_ready, .rb_idx, .rb_point, .rb_busy,
    .rb_drain_start, .rb_drain_done
  );

  // BAM models
  int bcnt [NB];
  bit bact [NB];
  always @(posedge clk) begin
    for (int b = 0; b < NB; b++) begin
      bam_drain_done[b] <= 1'b0;
      if (bam_drain_start[b]) begin bact[b] <= 1; bcnt[b] <= 0; end
      else if (bact[b] && (!bam_out_valid[b] || bam_out_ready[b])) begin
        if (bcnt[b] == NW) begin bact[b] <= 0; bam_drain_done[b] <= 1'b1; end
        else bcnt[b] <= bcnt[b] + 1;
      end
    end
  end
  always_comb for (int b = 0; b < NB; b++) begin
    bam_out_valid[b] = bact[b] && (bcnt[b] < NW) && (bcnt[b] != 2);   // a hole
    bam_out_idx[b]   = WB'(b * 16 + bcnt[b]);
    bam_out_point[b] = '{x: fe_t'(b), y: fe_t'(bcnt[b]), z: fe_t'(1)};
  end

  // IS-RBAM model
  int busy_t = 0, rdr_t = -1;
  always @(negedge clk) rb_ready = ($urandom % 2) == 0;
  assign rb_busy = busy_t > 0;
  always @(posedge clk) begin
    rb_drain_done <= 1'b0;
    if (rb_valid && rb_ready) busy_t <= 7;
    else if (busy_t > 0) busy_t <= busy_t - 1;
    if (rb_drain_start) rdr_t <= 5;
    else if (rdr_t > 0) rdr_t <= rdr_t - 1;
    else if (rdr_t == 0) begin rdr_t <= -1; rb_drain_done <= 1'b1; end
  end

  int checks = 0, failures = 0, cur = -1, nfw = 0, nrd = 0, ndone = 0;
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < NB; b++) if (bam_drain_start[b]) begin
      checks++;
      if (b != cur + 1) begin failures++; $display("FAIL drain order %0d", b); end
      cur = b;
    end
    if (rb_valid && rb_ready) begin
      nfw++;
      checks++;
      if (rb_idx !== bam_out_idx[cur] || rb_point !== bam_out_point[cur]) begin
        failures++; $display("FAIL forwarded word");
      end
    end
    if (rb_drain_start) begin
      nrd++;
      checks += 2;
      if (rb_busy || bact[cur]) begin failures++; $display("FAIL rbam drain too early"); end
      if (window !== 8'(2 * NB + cur)) begin failures++; $display("FAIL window %0d", window); end
    end
    if (done) ndone++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (ndone == 0) @(negedge clk);
    checks += 3;
    if (nfw != NB * (NW - 1)) begin failures++; $display("FAIL forwarded %0d", nfw); end
    if (nrd != NB) begin failures++; $display("FAIL rbam drains %0d", nrd); end
    if (cur != NB - 1) begin failures++; $display("FAIL last bam %0d", cur); end
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
