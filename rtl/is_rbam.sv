// is_rbam: Independently Scalable Recursive Bucket Array Manager. Turns the
// bucket-reduction step of one window, W = sum_b b * B[b] for b = 1 .. 2^K-1,
// into a second, much smaller bucket MSM.
//
// Each incoming pair (b, B[b]) is split into NUM_RBAM digits of RBAM_BITS bits,
// b = sum_r d_r * 2^(RBAM_BITS*r), and RBAM r performs R_r[d_r] += B[b]. Then
//   W = sum_r 2^(RBAM_BITS*r) * sum_c c * R_r[c],
// which the double-and-add unit finishes. The pair is offered to all RBAMs
// together and leaves when each has taken it (a zero digit is taken at once).
// The RBAMs share a single point-processor port through an internal
// fixed-priority arbiter, so the number of RBAMs can change without touching
// anything outside this block; the RBAM number travels in the tag bits just
// above the RBAM bucket index.
// drain_start (with busy low) streams the contents of RBAM 0, then 1, ...:
// (out_rbam, out_digit, out_point) for every non-empty bucket, then pulses
// drain_done.
// The recursive bucket stage, its independent scaling and its single interface
// are the paper's; the digit split, the sizes (4 RBAMs of 3-bit digits) and
// the drain order are this design's choices.
module is_rbam
  import zkp_pkg::*;
#(
  parameter int WINDOW_BITS = 12,
  parameter int RBAM_BITS   = 3,
  parameter int NUM_RBAM    = WINDOW_BITS / RBAM_BITS,
  parameter int RID_W       = (NUM_RBAM > 1) ? $clog2(NUM_RBAM) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [WINDOW_BITS-1:0] in_idx,
  input  point_t                 in_point,
  output logic                   req_valid,
  input  logic                   req_ready,
  output uda_req_t               req,
  input  logic                   rsp_valid,
  input  uda_rsp_t               rsp,
  input  logic                   drain_start,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [RID_W-1:0]       out_rbam,
  output logic [RBAM_BITS-1:0]   out_digit,
  output point_t                 out_point,
  output logic                   drain_done,
  output logic                   busy,
  output logic                   ev_conflict,
  output logic                   ev_bypass
);
  logic           r_in_valid [NUM_RBAM], r_in_ready [NUM_RBAM];
  logic           r_req_valid[NUM_RBAM], r_req_ready[NUM_RBAM];
  uda_req_t       r_req      [NUM_RBAM];
  logic           r_rsp_valid[NUM_RBAM];
  uda_rsp_t       r_rsp;
  logic           r_out_valid[NUM_RBAM];
  logic [RBAM_BITS-1:0] r_out_idx[NUM_RBAM];
  point_t         r_out_point[NUM_RBAM];
  logic [NUM_RBAM-1:0] r_drain_start, r_drain_done, r_busy, r_conf, r_byp;
  logic [NUM_RBAM-1:0] taken, take_now;

  logic             draining;
  logic [RID_W-1:0] dsel;
  logic             dstart_pend;

  for (genvar r = 0; r < NUM_RBAM; r++) begin : g_rbam
    assign r_in_valid[r] = in_valid && !taken[r] && !draining;
    assign take_now[r]   = r_in_valid[r] && r_in_ready[r];
    bam #(.BUCKET_BITS(RBAM_BITS)) u_rbam (
      .clk, .rst_n,
      .in_valid(r_in_valid[r]), .in_ready(r_in_ready[r]),
      .in_idx(in_idx[r*RBAM_BITS +: RBAM_BITS]), .in_point(in_point),
      .req_valid(r_req_valid[r]), .req_ready(r_req_ready[r]), .req(r_req[r]),
      .rsp_valid(r_rsp_valid[r]), .rsp(r_rsp),
      .drain_start(r_drain_start[r]),
      .out_valid(r_out_valid[r]), .out_ready(out_ready && draining && (dsel == RID_W'(r))),
      .out_idx(r_out_idx[r]), .out_point(r_out_point[r]),
      .drain_done(r_drain_done[r]), .busy(r_busy[r]),
      .ev_conflict(r_conf[r]), .ev_bypass(r_byp[r])
    );
    assign r_drain_start[r] = dstart_pend && (dsel == RID_W'(r));
  end

  uda_arbiter #(.N_CLIENTS(NUM_RBAM), .CID_LSB(RBAM_BITS), .CID_BITS(RID_W)) u_arb (
    .req_valid(r_req_valid), .req_ready(r_req_ready), .req(r_req),
    .uda_valid(req_valid), .uda_ready(req_ready), .uda_req(req),
    .uda_rsp_valid(rsp_valid), .uda_rsp(rsp),
    .rsp_valid(r_rsp_valid), .rsp(r_rsp), .contention()
  );

  assign in_ready    = !draining && ((taken | take_now) == '1);
  assign busy        = |r_busy;
  assign ev_conflict = |r_conf;
  assign ev_bypass   = |r_byp;

  assign out_valid = draining && r_out_valid[dsel];
  assign out_rbam  = dsel;
  assign out_digit = r_out_idx[dsel];
  assign out_point = r_out_point[dsel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      taken       <= '0;
      draining    <= 1'b0;
      dsel        <= '0;
      dstart_pend <= 1'b0;
      drain_done  <= 1'b0;
    end else begin
      drain_done  <= 1'b0;
      dstart_pend <= 1'b0;
      if (!draining)
        taken <= (in_valid && in_ready) ? '0 : (taken | take_now);
      if (drain_start && !draining) begin
        draining    <= 1'b1;
        dsel        <= '0;
        dstart_pend <= 1'b1;
      end else if (draining && r_drain_done[dsel]) begin
        if (dsel == RID_W'(NUM_RBAM - 1)) begin
          draining   <= 1'b0;
          drain_done <= 1'b1;
        end else begin
          dsel        <= dsel + 1'b1;
          dstart_pend <= 1'b1;
        end
      end
    end
  end

  initial assert (NUM_RBAM * RBAM_BITS == WINDOW_BITS)
    else $error("is_rbam: NUM_RBAM * RBAM_BITS must equal WINDOW_BITS");
endmodule
