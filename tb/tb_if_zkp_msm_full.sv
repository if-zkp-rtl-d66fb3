// tb_if_zkp_msm_full: one complete MSM on the accelerator with every parameter
// at its default (BLS12-381, 381-bit scalars, 12-bit windows, two BAMs, four
// 3-bit RBAMs, 270-clock point processor). Four BLS12-381 G1 points with
// random full-width scalars; the result is compared with an affine
// double-and-add reference. Also reports the clock count of the whole MSM.
module tb_if_zkp_msm_full;
  import zkp_pkg::*;
  import ec_ref_pkg::*;

  localparam fe_t P = P_BLS12_381;
  localparam int  NPTS = 4;

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

  if_zkp_msm dut (
    .clk, .rst_n, .start, .num_points, .done, .busy, .result,
    .rd_read, .rd_addr, .rd_waitreq, .rd_rvalid, .rd_rdata, .events(ev)
  );

  for (genvar c = 0; c < 3; c++) begin : g_mem
    ddr_model #(.DEPTH(8)) u_mem (
      .clk, .rst_n, .read(rd_read[c]), .addr(rd_addr[c]),
      .waitreq(rd_waitreq[c]), .rvalid(rd_rvalid[c]), .rdata(rd_rdata[c])
    );
  end

  int checks = 0, failures = 0;
  longint cycles = 0, t0 = 0;
  always_ff @(posedge clk) cycles <= cycles + 1;

  initial begin
    apoint_t g, pts [NPTS], expect_r, got;
    logic [380:0] sc [NPTS];
    g = gen_bls();
    expect_r.inf = 1'b1; expect_r.x = '0; expect_r.y = '0;
    for (int i = 0; i < NPTS; i++) begin
      pts[i] = amul(384'(3 * i + 7), g, P);
      sc[i]  = 381'(rand_fe(P));
      expect_r = aadd(expect_r, amul(384'(sc[i]), pts[i], P), P);
      g_mem[0].u_mem.write_word(i, pts[i].x);
      g_mem[1].u_mem.write_word(i, pts[i].y);
      g_mem[2].u_mem.write_word(i, fe_t'(sc[i]));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    num_points = NPTS;
    start = 1;
    t0 = cycles;
    @(negedge clk);
    start = 0;
    @(posedge done);
    @(negedge clk);
    got = to_affine(result, P);
    checks++;
    if (!aeq(got, expect_r)) begin
      failures++;
      $display("FAIL full-size MSM result mismatch");
    end else $display("ok   full-size MSM of %0d points matches reference", NPTS);
    $display("MSM took %0d clocks", cycles - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
