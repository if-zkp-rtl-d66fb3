// tb_if_zkp_msm: end-to-end test of the MSM accelerator at reduced size
// (18-bit scalars, 6-bit windows, 3-bit RBAM digits, two BAMs, short multiplier
// latency) on BLS12-381 G1 points. Runs two MSMs back to back, checks each
// result against an affine double-and-add reference, checks that the result is
// held until the next start, and counts every internal mechanism (bucket
// bypass, conflict stall, doubling, infinity, arbitration contention,
// recursive-stage and collector events, Horner doublings): a mechanism that
// never happens counts as a failure.
module tb_if_zkp_msm;
  import zkp_pkg::*;
  import ec_ref_pkg::*;

  localparam fe_t P = P_BLS12_381;
  localparam int  SB = 18, WB = 6, RB = 3, NB = 2, ML = 3;
  localparam int  MAXP = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          start = 0;
  logic [31:0]   num_points = 0;
  logic          done, busy;
  point_t        result;
  logic          rd_read [3], rd_waitreq [3], rd_rvalid [3];
  logic [31:0]   rd_addr [3];
  fe_t           rd_rdata [3];
  msm_events_t   ev;

  if_zkp_msm #(.MODULUS(P), .SCALAR_BITS(SB), .WINDOW_BITS(WB), .NUM_BAM(NB),
               .RBAM_BITS(RB), .MUL_LAT(ML), .ADD_LAT(1)) dut (
    .clk, .rst_n, .start, .num_points, .done, .busy, .result,
    .rd_read, .rd_addr, .rd_waitreq, .rd_rvalid, .rd_rdata, .events(ev)
  );

  for (genvar c = 0; c < 3; c++) begin : g_mem
    ddr_model #(.DEPTH(MAXP)) u_mem (
      .clk, .rst_n, .read(rd_read[c]), .addr(rd_addr[c]),
      .waitreq(rd_waitreq[c]), .rvalid(rd_rvalid[c]), .rdata(rd_rdata[c])
    );
  end

  int checks = 0, failures = 0;
  int cnt [10];
  longint cycles = 0;
  always_ff @(posedge clk) begin
    cycles <= cycles + 1;
    if (rst_n) begin
      if (ev.arb_contention) cnt[0]++;
      if (ev.uda_double)     cnt[1]++;
      if (ev.uda_inf)        cnt[2]++;
      if (ev.bam_conflict)   cnt[3]++;
      if (ev.bam_bypass)     cnt[4]++;
      if (ev.rbam_conflict)  cnt[5]++;
      if (ev.rbam_bypass)    cnt[6]++;
      if (ev.dna_conflict)   cnt[7]++;
      if (ev.dna_bypass)     cnt[8]++;
      if (ev.dna_double)     cnt[9]++;
    end
  end

  apoint_t pts [MAXP];
  logic [SB-1:0] sc [MAXP];

  task automatic load(int n);
    for (int i = 0; i < n; i++) begin
      g_mem[0].u_mem.write_word(i, pts[i].x);
      g_mem[1].u_mem.write_word(i, pts[i].y);
      g_mem[2].u_mem.write_word(i, fe_t'(sc[i]));
    end
  endtask

  task automatic run_and_check(int n, string name);
    apoint_t expect_r, got;
    expect_r.inf = 1'b1; expect_r.x = '0; expect_r.y = '0;
    for (int i = 0; i < n; i++)
      expect_r = aadd(expect_r, amul(384'(sc[i]), pts[i], P), P);
    load(n);
    @(negedge clk);
    num_points = n;
    start = 1;
    @(negedge clk);
    start = 0;
    @(posedge done);
    @(negedge clk);
    got = to_affine(result, P);
    checks++;
    if (!aeq(got, expect_r)) begin
      failures++;
      $display("FAIL %s: result mismatch (inf %0d/%0d)", name, got.inf, expect_r.inf);
    end else $display("ok   %s: MSM of %0d points matches reference", name, n);
    repeat (20) @(negedge clk);
    checks++;
    if (!aeq(to_affine(result, P), expect_r) || busy) begin
      failures++;
      $display("FAIL %s: result not held after done", name);
    end
  endtask

  initial begin
    apoint_t g;
    foreach (cnt[i]) cnt[i] = 0;
    g = gen_bls();
    for (int i = 0; i < MAXP; i++) pts[i] = amul(384'(i + 1), g, P);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // MSM 1: hand-made scalars that force the special cases
    //  points 0,1: same scalar       -> shared buckets, conflict stalls
    //  point 2 = point 3 (same scalar) -> doubling inside a bucket
    //  point 5 = -point 4 (same scalar) -> P + (-P) = O in a bucket
    //  scalar 0 and a scalar with one non-zero window
    pts[3] = pts[2];
    pts[5] = aneg(pts[4], P);
    sc[0] = 18'hA5C3; sc[1] = 18'hA5C3; sc[2] = 18'h1234; sc[3] = 18'h1234;
    sc[4] = 18'h7E01; sc[5] = 18'h7E01; sc[6] = 18'h0000; sc[7] = 18'h0F00;
    sc[8] = 18'hFFFF; sc[9] = 18'h8001; sc[10] = 18'h0123; sc[11] = 18'hA5C3;
    run_and_check(12, "msm1");

    // MSM 2: random scalars, more points
    pts[3] = amul(384'(4), g, P);
    pts[5] = amul(384'(6), g, P);
    for (int i = 0; i < 24; i++) sc[i] = SB'($urandom);
    run_and_check(24, "msm2");

    $display("events: contention=%0d uda_dbl=%0d uda_inf=%0d bam_conf=%0d bam_byp=%0d rbam_conf=%0d rbam_byp=%0d dna_conf=%0d dna_byp=%0d dna_dbl=%0d",
             cnt[0], cnt[1], cnt[2], cnt[3], cnt[4], cnt[5], cnt[6], cnt[7], cnt[8], cnt[9]);
    foreach (cnt[i]) begin
      checks++;
      if (cnt[i] == 0) begin
        failures++;
        $display("FAIL mechanism %0d never happened", i);
      end
    end
    $display("cycles=%0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
