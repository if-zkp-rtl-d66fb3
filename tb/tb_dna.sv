// tb_dna: the double-and-add unit with 4-bit windows, 2-bit RBAM digits and
// three windows, in front of a real point processor with short multiplier
// latency. Feeds a random set of (window, RBAM, digit, point) words, including
// repeated bit positions (collector conflicts) and an out-of-range window that
// must be ignored, runs the final pass and checks the result against
//   sum  digit * 2^(4*window + 2*rbam) * point
// computed with the affine reference. Then clears, runs a second, single-word
// case, and a final pass with nothing collected (result must be infinity).
module tb_dna;
  import zkp_pkg::*;
  import ec_ref_pkg::*;

  localparam fe_t P = P_BLS12_381;
  localparam int  WB = 4, RB = 2, NW = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear = 0, in_valid = 0, in_ready, final_start = 0, final_done;
  logic [7:0] in_window = '0;
  logic [0:0] in_rbam = '0;
  logic [RB-1:0] in_digit = '0;
  point_t in_point, result;
  logic req_valid, rsp_valid, busy, ev_conflict, ev_bypass, ev_double;
  uda_req_t req;
  uda_rsp_t rsp;

  dna #(.WINDOW_BITS(WB), .RBAM_BITS(RB), .NUM_WINDOWS(NW), .RID_W(1)) dut (
    .clk, .rst_n, .clear, .in_valid, .in_ready, .in_window, .in_rbam, .in_digit, .in_point,
    .final_start, .final_done, .result, .req_valid, .req_ready(1'b1), .req,
    .rsp_valid, .rsp, .busy, .ev_conflict, .ev_bypass, .ev_double
  );
  uda #(.MODULUS(P), .MUL_LAT(3), .ADD_LAT(1)) u_uda (
    .clk, .rst_n, .in_valid(req_valid), .in_req(req), .out_valid(rsp_valid),
    .out_rsp(rsp), .out_was_dbl(), .out_inf_bypass()
  );

  int checks = 0, failures = 0, n_conf = 0, n_byp = 0, n_dbl = 0;
  always_ff @(posedge clk) begin
    if (ev_conflict) n_conf++;
    if (ev_bypass)   n_byp++;
    if (ev_double)   n_dbl++;
  end

  task automatic send(int w, int r, int d, apoint_t a);
    @(negedge clk);
    in_valid  = 1;
    in_window = 8'(w);
    in_rbam   = 1'(r);
    in_digit  = RB'(d);
    in_point  = to_jacobian(a, rand_fe(P), P);
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic finish_and_check(apoint_t expect_r, string name);
    repeat (3) @(negedge clk);
    while (busy) @(negedge clk);
    final_start = 1;
    @(negedge clk);
    final_start = 0;
    while (!final_done) @(negedge clk);
    checks++;
    if (!aeq(to_affine(result, P), expect_r)) begin failures++; $display("FAIL %s", name); end
    else $display("ok   %s", name);
  endtask

  initial begin
    apoint_t g, a, acc;
    g = gen_bls();
    acc.inf = 1; acc.x = '0; acc.y = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    a = g;
    for (int i = 0; i < 30; i++) begin
      int w, r, d;
      w = (i < 10) ? 1 : int'($urandom % NW);
      r = (i < 10) ? 0 : int'($urandom % 2);
      d = (i < 10) ? 3 : int'($urandom % 4);
      a = aadd(a, g, P);
      send(w, r, d, a);
      acc = aadd(acc, amul(384'(d) << (WB * w + RB * r), a, P), P);
    end
    send(NW, 1, 3, g);                       // window out of range: ignored
    finish_and_check(acc, "collect and final pass");

    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    send(0, 0, 1, g);
    finish_and_check(g, "single word after clear");

    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    acc.inf = 1;
    finish_and_check(acc, "empty collectors give infinity");

    checks += 3;
    if (n_conf == 0) begin failures++; $display("FAIL no conflict"); end
    if (n_byp == 0)  begin failures++; $display("FAIL no bypass"); end
    if (n_dbl == 0)  begin failures++; $display("FAIL no doubling"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
