// tb_uda: the unified double-add pipeline at its default size (BLS12-381,
// 270-clock latency). Feeds one operation per clock, back to back: additions
// of distinct points, doublings (the same point given with two different Z
// values), P + (-P), and operands at infinity. Checks each sum (converted to
// affine) against the affine reference, its tag, the doubling and infinity
// flags, and that it leaves exactly 270 clocks after it entered.
module tb_uda;
  import zkp_pkg::*;
  import ec_ref_pkg::*;

  localparam fe_t P = P_BLS12_381;
  localparam int  LATENCY = 270;
  localparam int  N = 48;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     in_valid = 0;
  uda_req_t in_req;
  logic     out_valid, out_dbl, out_inf;
  uda_rsp_t out_rsp;

  uda dut (.clk, .rst_n, .in_valid, .in_req, .out_valid, .out_rsp,
           .out_was_dbl(out_dbl), .out_inf_bypass(out_inf));

  apoint_t  ea [N];
  bit       edbl [N], einf [N];
  uda_req_t rq [N];
  longint   tin [N];
  longint   cycles = 0;
  int checks = 0, failures = 0, nout = 0;
  int kinds [4];

  always_ff @(posedge clk) cycles <= cycles + 1;

  initial begin
    apoint_t g, pa [N+1], a, b;
    point_t ja, jb;
    g = gen_bls();
    pa[0] = g;
    for (int i = 1; i <= N; i++) pa[i] = aadd(pa[i-1], g, P);
    for (int i = 0; i < N; i++) begin
      int k;
      k = i % 6;
      a = pa[i];
      case (k)
        0, 1, 2: b = pa[(i * 7 + 3) % N];     // plain addition
        3:       b = a;                        // doubling
        4:       b = aneg(a, P);               // P + (-P)
        default: b = a;
      endcase
      if (a.x == b.x && a.y != b.y) b = aneg(a, P);
      ja = to_jacobian(a, rand_fe(P), P);
      jb = to_jacobian(b, rand_fe(P), P);
      einf[i] = 1'b0;
      if (k == 5) begin                        // one operand at infinity
        if (i % 12 == 5) begin ja = '{x: rand_fe(P), y: rand_fe(P), z: '0}; a.inf = 1'b1; end
        else             begin jb = '{x: rand_fe(P), y: rand_fe(P), z: '0}; b.inf = 1'b1; end
        einf[i] = 1'b1;
      end
      rq[i] = '{p1: ja, p2: jb, tag: tag_t'(i * 3 + 1)};
      ea[i] = aadd(a, b, P);
      edbl[i] = !einf[i] && (k == 3);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_req   = rq[i];
      tin[i]   = cycles;
    end
    @(negedge clk);
    in_valid = 0;
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int i;
      i = nout++;
      checks += 4;
      if (!aeq(to_affine(out_rsp.sum, P), ea[i])) begin
        failures++; $display("FAIL op %0d: sum", i);
      end
      if (out_rsp.tag !== rq[i].tag) begin failures++; $display("FAIL op %0d: tag", i); end
      if (out_dbl !== edbl[i] || out_inf !== einf[i]) begin
        failures++; $display("FAIL op %0d: flags dbl=%0d inf=%0d", i, out_dbl, out_inf);
      end
      if (cycles - tin[i] != LATENCY) begin
        failures++; $display("FAIL op %0d: latency %0d", i, cycles - tin[i]);
      end
      if (nout == N) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (N + LATENCY + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog (%0d results)", nout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
