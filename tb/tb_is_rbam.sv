// tb_is_rbam: the recursive bucket stage with its default split (12-bit
// bucket index, four RBAMs of 3-bit digits) in front of a real point processor
// with short multiplier latency. Streams 40 (index, bucket point) pairs,
// including repeated digits (RBAM conflicts), a zero digit in some positions,
// and a pair whose point is the negation of another. After it settles, drains
// and checks every (RBAM, digit, point) word against the affine reference sum
// of the points whose index has that digit in that position, that no empty
// bucket is reported, and the RBAM bypass and conflict mechanisms occurred.
module tb_is_rbam;
  import zkp_pkg::*;
  import ec_ref_pkg::*;

  localparam fe_t P = P_BLS12_381;
  localparam int  WB = 12, RB = 3, NR = 4, N = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, req_valid, req_ready, rsp_valid, drain_start = 0;
  logic out_valid, out_ready = 0, drain_done, busy, ev_conflict, ev_bypass;
  logic [WB-1:0] in_idx = '0;
  logic [1:0] out_rbam;
  logic [RB-1:0] out_digit;
  point_t in_point, out_point;
  uda_req_t req;
  uda_rsp_t rsp;

  is_rbam dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_idx, .in_point,
    .req_valid, .req_ready, .req, .rsp_valid, .rsp,
    .drain_start, .out_valid, .out_ready, .out_rbam, .out_digit, .out_point,
    .drain_done, .busy, .ev_conflict, .ev_bypass
  );
  always @(negedge clk) req_ready = ($urandom % 4) != 0;   // shared UDA port busy at times
  uda #(.MODULUS(P), .MUL_LAT(3), .ADD_LAT(1)) u_uda (
    .clk, .rst_n, .in_valid(req_valid && req_ready), .in_req(req), .out_valid(rsp_valid),
    .out_rsp(rsp), .out_was_dbl(), .out_inf_bypass()
  );

  int checks = 0, failures = 0, n_conf = 0, n_byp = 0;
  always_ff @(posedge clk) begin
    if (ev_conflict) n_conf++;
    if (ev_bypass)   n_byp++;
  end

  apoint_t expect_r [NR][8];
  bit      used [NR][8];

  initial begin
    apoint_t g, pts [N];
    logic [WB-1:0] idx [N];
    g = gen_bls();
    pts[0] = g;
    for (int i = 1; i < N; i++) pts[i] = aadd(pts[i-1], g, P);
    pts[9] = aneg(pts[3], P);
    for (int r = 0; r < NR; r++) for (int c = 0; c < 8; c++) begin
      expect_r[r][c].inf = 1; expect_r[r][c].x = '0; expect_r[r][c].y = '0; used[r][c] = 0;
    end
    for (int i = 0; i < N; i++) begin
      idx[i] = WB'($urandom);
      if (i % 4 == 1) idx[i][5:3] = 3'd0;
      if (i % 3 == 0) idx[i][2:0] = 3'd5;
    end
    idx[9] = idx[3];
    for (int i = 0; i < N; i++)
      for (int r = 0; r < NR; r++) begin
        int c;
        c = int'(idx[i][r*RB +: RB]);
        if (c != 0) begin
          expect_r[r][c] = aadd(expect_r[r][c], pts[i], P);
          used[r][c] = 1;
        end
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
    repeat (3) @(negedge clk);
    while (busy) @(negedge clk);
    drain_start = 1;
    @(negedge clk);
    drain_start = 0;
    while (!drain_done) begin
      out_ready = ($urandom % 3) != 0;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (!used[out_rbam][out_digit] ||
            !aeq(to_affine(out_point, P), expect_r[out_rbam][out_digit])) begin
          failures++; $display("FAIL rbam %0d digit %0d", out_rbam, out_digit);
        end
        used[out_rbam][out_digit] = 0;
      end
      @(negedge clk);
    end
    for (int r = 0; r < NR; r++) for (int c = 1; c < 8; c++) begin
      checks++;
      if (used[r][c]) begin failures++; $display("FAIL rbam %0d digit %0d missing", r, c); end
    end
    checks += 2;
    if (n_conf == 0) begin failures++; $display("FAIL no conflict"); end
    if (n_byp == 0)  begin failures++; $display("FAIL no bypass"); end
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
