// tb_mod_mul: streams random and corner-case operand pairs into the modular
// multiplier at its default size (BLS12-381 prime, 38-clock latency), one per
// clock, and checks every product against a reference computed with a wide
// product and remainder, arriving exactly LAT clocks after its operands.
module tb_mod_mul;
  import zkp_pkg::*;
  import ec_ref_pkg::*;

  localparam fe_t P = P_BLS12_381;
  localparam int  LAT = 38;
  localparam int  N = 300;

  logic clk = 0;
  always #5 clk = ~clk;
  fe_t a = '0, b = '0, r;
  mod_mul dut (.clk, .a, .b, .r);

  fe_t av [N], bv [N];
  int checks = 0, failures = 0;

  initial begin
    for (int i = 0; i < N; i++) begin
      av[i] = rand_fe(P);
      bv[i] = rand_fe(P);
    end
    av[0] = '0;        bv[0] = rand_fe(P);
    av[1] = P - 1'b1;  bv[1] = P - 1'b1;
    av[2] = fe_t'(1);  bv[2] = P - 1'b1;
    av[3] = P - 1'b1;  bv[3] = fe_t'(2);
    fork
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        a = av[i];
        b = bv[i];
      end
      begin
        @(negedge clk);            // operands 0 applied here
        repeat (LAT) @(negedge clk);
        for (int i = 0; i < N; i++) begin
          checks++;
          if (r !== fmul(av[i], bv[i], P)) begin
            failures++;
            if (failures < 5) $display("FAIL product %0d", i);
          end
          @(negedge clk);
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + LAT + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
