// tb_mod_addsub: checks the modular adder, subtractor and doubler (all three
// build-time variants, BLS12-381 prime, 1-clock latency) on random and corner
// operands against reference field arithmetic, one operation per clock.
module tb_mod_addsub;
  import zkp_pkg::*;
  import ec_ref_pkg::*;

  localparam fe_t P = P_BLS12_381;
  localparam int  N = 400;

  logic clk = 0;
  always #5 clk = ~clk;
  fe_t a = '0, b = '0, r_add, r_sub, r_dbl;
  mod_addsub #(.MODULUS(P), .OP(OP_ADD)) u_add (.clk, .a, .b, .r(r_add));
  mod_addsub #(.MODULUS(P), .OP(OP_SUB)) u_sub (.clk, .a, .b, .r(r_sub));
  mod_addsub #(.MODULUS(P), .OP(OP_DBL)) u_dbl (.clk, .a, .b, .r(r_dbl));

  int checks = 0, failures = 0;

  task automatic one(fe_t x, fe_t y);
    @(negedge clk);
    a = x;
    b = y;
    @(negedge clk);
    checks += 3;
    if (r_add !== fadd(x, y, P)) begin failures++; $display("FAIL add"); end
    if (r_sub !== fsub(x, y, P)) begin failures++; $display("FAIL sub"); end
    if (r_dbl !== fadd(x, x, P)) begin failures++; $display("FAIL dbl"); end
  endtask

  initial begin
    one('0, '0);
    one(P - 1'b1, P - 1'b1);
    one('0, P - 1'b1);
    one(P - 1'b1, '0);
    one(fe_t'(5), fe_t'(7));
    one(P >> 1, (P >> 1) + 1'b1);
    one((P >> 1) + 1'b1, (P >> 1) + 1'b1);
    for (int i = 0; i < N; i++) one(rand_fe(P), rand_fe(P));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3 * N) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
