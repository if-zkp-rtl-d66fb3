// tb_if_zkp_msm_workload: a cut-down version of the smallest measured
// workload (an MSM of 1,000 BLS12-381 G1 points): 200 points with random
// full-width (381-bit) scalars, on the accelerator with every parameter at its
// default. The full 1,000 points need more than 4 M clocks here (see the
// limitations in the README), too long to simulate routinely.
//
// Reference: the points are P_i = (i+1)*G, built by repeated affine addition,
// so the expected result is (sum_i s_i*(i+1) mod r) * G, where r is the order
// of G. That needs one reference scalar multiplication instead of 1,000.
// Checks: the result point, and the clock count against the 0.01 s that the
// published system needs for 1,000 points, taken at its 351 MHz clock
// (3.51 M clocks). The count is dominated by the fixed cost of 16 bucket drains,
// the recursive stage and the final double-and-add pass.
module tb_if_zkp_msm_workload;
  import zkp_pkg::*;
  import ec_ref_pkg::*;

  localparam fe_t P = P_BLS12_381;
  localparam logic [511:0] R_ORDER =
    512'h73eda753299d7d483339d80809a1d80553bda402fffe5bfeffffffff00000001;
  localparam int     NPTS   = 200;
  localparam longint BUDGET = 3_510_000;

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
    ddr_model #(.DEPTH(256)) u_mem (
      .clk, .rst_n, .read(rd_read[c]), .addr(rd_addr[c]),
      .waitreq(rd_waitreq[c]), .rvalid(rd_rvalid[c]), .rdata(rd_rdata[c])
    );
  end

  int checks = 0, failures = 0;
  longint cycles = 0, t0 = 0, took;
  always_ff @(posedge clk) cycles <= cycles + 1;

  initial begin
    apoint_t g, pt, expect_r, got;
    logic [380:0] sc;
    logic [511:0] k;
    g  = gen_bls();
    pt = g;
    k  = '0;
    for (int i = 0; i < NPTS; i++) begin
      sc = 381'(rand_fe(P));
      k  = (k + 512'(sc) * 512'(i + 1)) % R_ORDER;
      g_mem[0].u_mem.write_word(i, pt.x);
      g_mem[1].u_mem.write_word(i, pt.y);
      g_mem[2].u_mem.write_word(i, fe_t'(sc));
      pt = aadd(pt, g, P);
    end
    expect_r = amul(384'(k), g, P);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    num_points = NPTS;
    start = 1;
    t0 = cycles;
    @(negedge clk);
    start = 0;
    @(posedge done);
    took = cycles - t0;
    @(negedge clk);
    got = to_affine(result, P);
    checks++;
    if (!aeq(got, expect_r)) begin
      failures++;
      $display("FAIL MSM of %0d points: result mismatch", NPTS);
    end else $display("ok   MSM of %0d points matches reference", NPTS);
    checks++;
    if (took > BUDGET) begin
      failures++;
      $display("FAIL MSM took %0d clocks, more than %0d", took, BUDGET);
    end else $display("ok   MSM took %0d clocks (budget %0d)", took, BUDGET);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3600000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
