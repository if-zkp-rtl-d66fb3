// if_zkp_msm: multi-scalar multiplication accelerator, R = sum_i s_i * P_i over
// a short-Weierstrass curve with a = 0, built around one shared Unified
// Double-Add (UDA) point processor (the SAB organisation).
//
// Data flow for one MSM of num_points pairs (points and scalars already in
// the external memory channels):
//   SPS     reads X, Y and scalar words from three memory channels and sends
//           every point to NUM_BAM bucket array managers, each with the
//           WINDOW_BITS-bit scalar slice of its own window;
//   BAM     accumulate bucket sums B[s] += P (fill phase of the bucket method);
//   SPS'    (sps_bucket) streams each BAM's buckets (b, B[b]) into
//   IS-RBAM which runs a second bucket method on the bucket index b with
//           NUM_RBAM small RBAMs of RBAM_BITS-bit digits;
//   DNA     collects the RBAM buckets by bit position and finishes with one
//           double-and-add pass, giving the result point (Jacobian).
// NUM_PASSES = ceil(NUM_WINDOWS / NUM_BAM) fill/drain passes are run, each
// re-reading all points. All point additions of all blocks go through the
// single UDA via a fixed-priority arbiter (DNA first, then IS-RBAM, then the
// BAMs). The control sequencer runs the phases.
//
// Interface: pulse start with num_points set; done pulses when `result` holds
// the MSM (Z == 0 means the point at infinity). The memory ports are
// Avalon-MM-style read masters (read/address/waitrequest/readdatavalid/data),
// one word of 381 bits per point coordinate or scalar. `events` carries one
// strobe per internal mechanism for performance counting.
// Defaults are the BLS12-381 build with scaling factor 2 (two BAMs), 12-bit
// windows (32 windows for 381-bit scalars) and a 270-clock point processor.
module if_zkp_msm
  import zkp_pkg::*;
#(
  parameter fe_t MODULUS     = P_BLS12_381,
  parameter int  SCALAR_BITS = 381,
  parameter int  WINDOW_BITS = 12,
  parameter int  NUM_BAM     = 2,
  parameter int  RBAM_BITS   = 3,
  parameter int  MUL_LAT     = 38,
  parameter int  ADD_LAT     = 1,
  parameter int  AW          = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] num_points,
  output logic          done,
  output logic          busy,
  output point_t        result,
  output logic          rd_read    [3],
  output logic [AW-1:0] rd_addr    [3],
  input  logic          rd_waitreq [3],
  input  logic          rd_rvalid  [3],
  input  fe_t           rd_rdata   [3],
  output msm_events_t   events
);
  localparam int NUM_WINDOWS = (SCALAR_BITS + WINDOW_BITS - 1) / WINDOW_BITS;
  localparam int NUM_PASSES  = (NUM_WINDOWS + NUM_BAM - 1) / NUM_BAM;
  localparam int NUM_RBAM    = WINDOW_BITS / RBAM_BITS;
  localparam int RID_W       = (NUM_RBAM > 1) ? $clog2(NUM_RBAM) : 1;
  localparam int NCL         = NUM_BAM + 2;     // DNA, IS-RBAM, BAMs

  // ---------------- control ----------------
  logic       sps_start, sps_done, sb_start, sb_done;
  logic       dna_clear, dna_busy, dna_final_start, dna_final_done;
  logic [7:0] pass;
  logic [NUM_BAM-1:0] bam_busy_v;

  msm_ctrl #(.NUM_PASSES(NUM_PASSES)) u_ctrl (
    .clk, .rst_n, .start, .done, .running(busy), .pass,
    .sps_start, .sps_done, .bam_busy(|bam_busy_v),
    .sb_start, .sb_done,
    .dna_clear, .dna_busy, .dna_final_start, .dna_final_done
  );

  // ---------------- scalar-point stream ----------------
  logic                   s_valid [NUM_BAM];
  logic                   s_ready [NUM_BAM];
  logic [WINDOW_BITS-1:0] s_idx   [NUM_BAM];
  point_t                 s_point;

  sps #(.NUM_BAM(NUM_BAM), .WINDOW_BITS(WINDOW_BITS), .NUM_WINDOWS(NUM_WINDOWS), .AW(AW)) u_sps (
    .clk, .rst_n, .start(sps_start), .num_points, .pass, .done(sps_done), .active(),
    .rd_read, .rd_addr, .rd_waitreq, .rd_rvalid, .rd_rdata,
    .bam_valid(s_valid), .bam_ready(s_ready), .bam_idx(s_idx), .bam_point(s_point)
  );

  // ---------------- arbiter and point processor ----------------
  logic     c_req_valid [NCL];
  logic     c_req_ready [NCL];
  uda_req_t c_req       [NCL];
  logic     c_rsp_valid [NCL];
  uda_rsp_t c_rsp;
  logic     u_in_valid, u_out_valid;
  uda_req_t u_in;
  uda_rsp_t u_out;

  uda_arbiter #(.N_CLIENTS(NCL)) u_arb (
    .req_valid(c_req_valid), .req_ready(c_req_ready), .req(c_req),
    .uda_valid(u_in_valid), .uda_ready(1'b1), .uda_req(u_in),
    .uda_rsp_valid(u_out_valid), .uda_rsp(u_out),
    .rsp_valid(c_rsp_valid), .rsp(c_rsp), .contention(events.arb_contention)
  );

  uda #(.MODULUS(MODULUS), .MUL_LAT(MUL_LAT), .ADD_LAT(ADD_LAT)) u_uda (
    .clk, .rst_n, .in_valid(u_in_valid), .in_req(u_in),
    .out_valid(u_out_valid), .out_rsp(u_out),
    .out_was_dbl(events.uda_double), .out_inf_bypass(events.uda_inf)
  );

  // ---------------- bucket array managers ----------------
  logic                   bd_start [NUM_BAM];
  logic                   bo_valid [NUM_BAM];
  logic                   bo_ready [NUM_BAM];
  logic [WINDOW_BITS-1:0] bo_idx   [NUM_BAM];
  point_t                 bo_point [NUM_BAM];
  logic                   bd_done  [NUM_BAM];
  logic [NUM_BAM-1:0]     b_conf, b_byp;

  for (genvar b = 0; b < NUM_BAM; b++) begin : g_bam
    bam #(.BUCKET_BITS(WINDOW_BITS)) u_bam (
      .clk, .rst_n,
      .in_valid(s_valid[b]), .in_ready(s_ready[b]), .in_idx(s_idx[b]), .in_point(s_point),
      .req_valid(c_req_valid[b+2]), .req_ready(c_req_ready[b+2]), .req(c_req[b+2]),
      .rsp_valid(c_rsp_valid[b+2]), .rsp(c_rsp),
      .drain_start(bd_start[b]), .out_valid(bo_valid[b]), .out_ready(bo_ready[b]),
      .out_idx(bo_idx[b]), .out_point(bo_point[b]), .drain_done(bd_done[b]),
      .busy(bam_busy_v[b]), .ev_conflict(b_conf[b]), .ev_bypass(b_byp[b])
    );
  end
  assign events.bam_conflict = |b_conf;
  assign events.bam_bypass   = |b_byp;

  // ---------------- bucket stream and recursive stage ----------------
  logic                   rb_valid, rb_ready, rb_busy, rb_dstart, rb_ddone;
  logic [WINDOW_BITS-1:0] rb_idx;
  point_t                 rb_point;
  logic [7:0]             window;
  logic                   ro_valid, ro_ready;
  logic [RID_W-1:0]       ro_rbam;
  logic [RBAM_BITS-1:0]   ro_digit;
  point_t                 ro_point;

  sps_bucket #(.NUM_BAM(NUM_BAM), .WINDOW_BITS(WINDOW_BITS)) u_sps2 (
    .clk, .rst_n, .start(sb_start), .pass, .done(sb_done), .window,
    .bam_drain_start(bd_start), .bam_out_valid(bo_valid), .bam_out_ready(bo_ready),
    .bam_out_idx(bo_idx), .bam_out_point(bo_point), .bam_drain_done(bd_done),
    .rb_valid, .rb_ready, .rb_idx, .rb_point, .rb_busy,
    .rb_drain_start(rb_dstart), .rb_drain_done(rb_ddone)
  );

  is_rbam #(.WINDOW_BITS(WINDOW_BITS), .RBAM_BITS(RBAM_BITS)) u_isrbam (
    .clk, .rst_n,
    .in_valid(rb_valid), .in_ready(rb_ready), .in_idx(rb_idx), .in_point(rb_point),
    .req_valid(c_req_valid[1]), .req_ready(c_req_ready[1]), .req(c_req[1]),
    .rsp_valid(c_rsp_valid[1]), .rsp(c_rsp),
    .drain_start(rb_dstart), .out_valid(ro_valid), .out_ready(ro_ready),
    .out_rbam(ro_rbam), .out_digit(ro_digit), .out_point(ro_point),
    .drain_done(rb_ddone), .busy(rb_busy),
    .ev_conflict(events.rbam_conflict), .ev_bypass(events.rbam_bypass)
  );

  // ---------------- double and add ----------------
  dna #(.WINDOW_BITS(WINDOW_BITS), .RBAM_BITS(RBAM_BITS), .NUM_WINDOWS(NUM_WINDOWS),
        .RID_W(RID_W)) u_dna (
    .clk, .rst_n, .clear(dna_clear),
    .in_valid(ro_valid), .in_ready(ro_ready), .in_window(window), .in_rbam(ro_rbam),
    .in_digit(ro_digit), .in_point(ro_point),
    .final_start(dna_final_start), .final_done(dna_final_done), .result,
    .req_valid(c_req_valid[0]), .req_ready(c_req_ready[0]), .req(c_req[0]),
    .rsp_valid(c_rsp_valid[0]), .rsp(c_rsp),
    .busy(dna_busy), .ev_conflict(events.dna_conflict), .ev_bypass(events.dna_bypass),
    .ev_double(events.dna_double)
  );

  initial assert (NCL <= (1 << CID_W)) else $error("if_zkp_msm: too many UDA clients");
endmodule
