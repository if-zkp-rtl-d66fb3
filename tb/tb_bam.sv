// tb_bam: a 16-bucket BAM (4-bit index) in front of a real point processor
// with short multiplier latency. Streams 60 (index, point) pairs with many
// repeated indices (conflict stalls), index 0, duplicated points (doubling)
// and P, -P pairs, then drains. Every drained bucket must equal the affine
// reference sum of the points sent to it, buckets left empty must not appear,
// and the bypass and conflict mechanisms must both have occurred. A second
// drain right after must produce nothing (buckets are cleared by draining).
module tb_bam;
  import zkp_pkg::*;
  import ec_ref_pkg::*;

  localparam fe_t P = P_BLS12_381;
  localparam int  BB = 4, NB = 16, N = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, req_valid, rsp_valid, drain_start = 0;
  logic out_valid, out_ready = 0, drain_done, busy, ev_conflict, ev_bypass;
  logic [BB-1:0] in_idx = '0, out_idx;
  point_t in_point, out_point;
  uda_req_t req;
  uda_rsp_t rsp;

  bam #(.BUCKET_BITS(BB)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_idx, .in_point,
    .req_valid, .req_ready(1'b1), .req, .rsp_valid, .rsp,
    .drain_start, .out_valid, .out_ready, .out_idx, .out_point,
    .drain_done, .busy, .ev_conflict, .ev_bypass
  );
  uda #(.MODULUS(P), .MUL_LAT(3), .ADD_LAT(1)) u_uda (
    .clk, .rst_n, .in_valid(req_valid), .in_req(req), .out_valid(rsp_valid),
    .out_rsp(rsp), .out_was_dbl(), .out_inf_bypass()
  );

  int checks = 0, failures = 0, n_conf = 0, n_byp = 0;
  always_ff @(posedge clk) begin
    if (ev_conflict) n_conf++;
    if (ev_bypass)   n_byp++;
  end

  apoint_t expect_b [NB];
  bit      used [NB];
  bit      seen [NB];

  initial begin
    apoint_t g, pts [N];
    logic [BB-1:0] idx [N];
    g = gen_bls();
    pts[0] = g;
    for (int i = 1; i < N; i++) pts[i] = aadd(pts[i-1], g, P);
    for (int i = 0; i < NB; i++) begin
      expect_b[i].inf = 1'b1; expect_b[i].x = '0; expect_b[i].y = '0;
      used[i] = 0; seen[i] = 0;
    end
    for (int i = 0; i < N; i++) idx[i] = BB'($urandom % 6);   // few buckets: conflicts
    pts[11] = pts[10]; idx[11] = idx[10];                       // doubling
    pts[21] = aneg(pts[20], P); idx[21] = idx[20];              // P + (-P)
    idx[30] = 4'd13;
    for (int i = 0; i < N; i++) if (idx[i] != 0) begin
      expect_b[idx[i]] = aadd(expect_b[idx[i]], pts[i], P);
      used[idx[i]] = 1;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_idx   = idx[i];
      in_point = to_jacobian(pts[i], rand_fe(P), P);
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk);
    in_valid = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    drain_start = 1;
    @(negedge clk);
    drain_start = 0;
    while (!drain_done) begin
      out_ready = ($urandom % 3) != 0;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        seen[out_idx] = 1;
        if (!used[out_idx] || !aeq(to_affine(out_point, P), expect_b[out_idx])) begin
          failures++; $display("FAIL bucket %0d", out_idx);
        end
      end
      @(negedge clk);
    end
    for (int i = 1; i < NB; i++) begin
      checks++;
      if (seen[i] != used[i]) begin failures++; $display("FAIL bucket %0d presence", i); end
    end
    // second drain: nothing left
    drain_start = 1;
    @(negedge clk);
    drain_start = 0;
    out_ready = 1;
    while (!drain_done) begin
      #1;
      if (out_valid) begin failures++; $display("FAIL bucket %0d not cleared", out_idx); end
      @(negedge clk);
    end
    checks += 2;
    if (n_conf == 0) begin failures++; $display("FAIL no conflict stall seen"); end
    if (n_byp == 0)  begin failures++; $display("FAIL no bypass seen"); end
    $display("conflicts=%0d bypass=%0d", n_conf, n_byp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
