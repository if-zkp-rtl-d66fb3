// tb_sps: the scalar-point stream with two BAM outputs, 4-bit windows and
// four windows (16-bit scalars), reading three randomly stalling memory
// channels. Runs pass 0 and pass 1 over 20 points with BAMs that accept at
// random; checks that each BAM receives every point in order, as a Jacobian
// point with Z = 1, with the scalar slice of its own window, and that done
// pulses once per pass after the last point.
module tb_sps;
  import zkp_pkg::*;

  localparam int NB = 2, WB = 4, NW = 4, N = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done, active;
  logic [31:0] num_points = N;
  logic [7:0]  pass = 0;
  logic rd_read [3], rd_waitreq [3], rd_rvalid [3];
  logic [31:0] rd_addr [3];
  fe_t rd_rdata [3];
  logic bam_valid [NB], bam_ready [NB];
  logic [WB-1:0] bam_idx [NB];
  point_t bam_point;

  sps #(.NUM_BAM(NB), .WINDOW_BITS(WB), .NUM_WINDOWS(NW)) dut (
    .clk, .rst_n, .start, .num_points, .pass, .done, .active,
    .rd_read, .rd_addr, .rd_waitreq, .rd_rvalid, .rd_rdata,
    .bam_valid, .bam_ready, .bam_idx, .bam_point
  );
  for (genvar c = 0; c < 3; c++) begin : g_mem
    ddr_model #(.DEPTH(32)) u_mem (
      .clk, .rst_n, .read(rd_read[c]), .addr(rd_addr[c]),
      .waitreq(rd_waitreq[c]), .rvalid(rd_rvalid[c]), .rdata(rd_rdata[c])
    );
  end

  fe_t xs [N], ys [N];
  logic [15:0] ss [N];
  int  got [NB];
  int  checks = 0, failures = 0, ndone = 0;

  always @(negedge clk) begin
    for (int b = 0; b < NB; b++) bam_ready[b] = ($urandom % 3) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (done) ndone++;
    for (int b = 0; b < NB; b++) if (bam_valid[b] && bam_ready[b]) begin
      int i, j;
      i = got[b]++;
      j = int'(pass) * NB + b;
      checks++;
      if (i >= N || bam_point.x !== xs[i] || bam_point.y !== ys[i] || bam_point.z !== fe_t'(1) ||
          bam_idx[b] !== ss[i][j*WB +: WB]) begin
        failures++;
        $display("FAIL bam %0d point %0d", b, i);
      end
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      xs[i] = fe_t'({$urandom, $urandom, $urandom});
      ys[i] = fe_t'({$urandom, $urandom});
      ss[i] = 16'($urandom);
      g_mem[0].u_mem.write_word(i, xs[i]);
      g_mem[1].u_mem.write_word(i, ys[i]);
      g_mem[2].u_mem.write_word(i, fe_t'(ss[i]));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 2; p++) begin
      got[0] = 0; got[1] = 0;
      pass = 8'(p);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (ndone == p) @(negedge clk);
      checks += 2;
      if (got[0] != N || got[1] != N) begin
        failures++; $display("FAIL pass %0d: counts %0d %0d", p, got[0], got[1]);
      end
      if (active) begin failures++; $display("FAIL still active after done"); end
    end
    repeat (10) @(negedge clk);
    checks++;
    if (ndone != 2) begin failures++; $display("FAIL done pulses %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
