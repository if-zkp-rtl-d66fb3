// uda: Unified Double-Add point processor. Computes sum = p1 + p2 on Jacobian
// points of a short-Weierstrass curve with a = 0 (BN128, BLS12-381), doubling
// automatically when p1 and p2 are the same point. Fully pipelined: one
// operation may enter every clock and leaves LATENCY clocks later with its tag.
//
// Structure (after the paper's UDA figure):
//   * Addition front end, four bands: Z1^2, Z1*Z2, Z2^2 | Z1^3, U2 = X2*Z1^2,
//     U1 = X1*Z2^2, Z2^3 | S2 = Y2*Z1^3, S1 = Y1*Z2^3, H = U2-U1, SX = U1+U2 |
//     R = S2-S1.
//   * Doubling front end, in parallel: X1^2, 2*Y1, X1+X1 | 2*X1^2 | 3*X1^2.
//     It produces the same six quantities: R = 3*X1^2, H = 2*Y1, ZZ = Z1,
//     SX = 2*X1, U1 = X1, S1 = Y1.
//   * Join multiplexer: the doubling set is taken when the addition set has
//     H == 0 and R == 0 (the PD check), i.e. when p1 and p2 are equal.
//   * Fused back end, five bands: R^2, H^2, Z3 = ZZ*H | H^3, H^2*SX, H^2*U1 |
//     X3 = R^2 - H^2*SX, T = H^2*U1 - X3, H^3*S1 | R*T | Y3 = R*T - H^3*S1.
// That is 18 modular multipliers, the count the paper gives. P + (-P) gives
// H == 0, R != 0 and so Z3 == 0, the point at infinity, with no extra logic.
// When either input is the point at infinity (Z == 0) the other input, carried
// alongside the pipeline, is returned instead (this design's addition; the
// paper does not describe infinity handling).
//
// Timing: band latencies are MUL_LAT for a band holding a multiplier and
// ADD_LAT otherwise, plus one clock for the join multiplexer and one output
// register: LATENCY = 7*MUL_LAT + 2*ADD_LAT + 2 = 270 clocks at the defaults,
// the latency the paper reports for its standard-form UDA.
module uda
  import zkp_pkg::*;
#(
  parameter fe_t MODULUS = P_BLS12_381,
  parameter int  MUL_LAT = 38,
  parameter int  ADD_LAT = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  uda_req_t in_req,
  output logic     out_valid,
  output uda_rsp_t out_rsp,
  output logic     out_was_dbl,    // result came through the doubling path
  output logic     out_inf_bypass  // an input was O and the other was returned
);
  localparam int M = MUL_LAT;
  localparam int A = ADD_LAT;
  localparam int T_JOIN  = 3*M + A;                 // front-end depth
  localparam int T_FUSED = 4*M + A;                 // back-end depth
  localparam int LATENCY = T_JOIN + 1 + T_FUSED + 1;

  fe_t x1, y1, z1, x2, y2, z2;
  assign x1 = in_req.p1.x;
  assign y1 = in_req.p1.y;
  assign z1 = in_req.p1.z;
  assign x2 = in_req.p2.x;
  assign y2 = in_req.p2.y;
  assign z2 = in_req.p2.z;

  // ---------------- addition front end ----------------
  fe_t zz1, z1z2, zz2;
  fe_t x1_a1, x2_a1, z1_a1, z2_a1, y1_a2, y2_a2;
  mod_mul #(MODULUS, M) m_a1_0 (.clk, .a(z1), .b(z1), .r(zz1));
  mod_mul #(MODULUS, M) m_a1_1 (.clk, .a(z1), .b(z2), .r(z1z2));
  mod_mul #(MODULUS, M) m_a1_2 (.clk, .a(z2), .b(z2), .r(zz2));
  pipe_delay #(FW, M)   d_x1_a1 (.clk, .d(x1), .q(x1_a1));
  pipe_delay #(FW, M)   d_x2_a1 (.clk, .d(x2), .q(x2_a1));
  pipe_delay #(FW, M)   d_z1_a1 (.clk, .d(z1), .q(z1_a1));
  pipe_delay #(FW, M)   d_z2_a1 (.clk, .d(z2), .q(z2_a1));
  pipe_delay #(FW, 2*M) d_y1_a2 (.clk, .d(y1), .q(y1_a2));
  pipe_delay #(FW, 2*M) d_y2_a2 (.clk, .d(y2), .q(y2_a2));

  fe_t z1c, u2, u1, z2c, z1z2_a2;
  mod_mul #(MODULUS, M) m_a2_0 (.clk, .a(zz1), .b(z1_a1), .r(z1c));
  mod_mul #(MODULUS, M) m_a2_1 (.clk, .a(zz1), .b(x2_a1), .r(u2));
  mod_mul #(MODULUS, M) m_a2_2 (.clk, .a(zz2), .b(x1_a1), .r(u1));
  mod_mul #(MODULUS, M) m_a2_3 (.clk, .a(zz2), .b(z2_a1), .r(z2c));
  pipe_delay #(FW, M)   d_z1z2_a2 (.clk, .d(z1z2), .q(z1z2_a2));

  fe_t s2, s1, h_a, sx_a, h_a3, sx_a3, u1_a3, z1z2_a3;
  mod_mul #(MODULUS, M)          m_a3_0 (.clk, .a(y2_a2), .b(z1c), .r(s2));
  mod_mul #(MODULUS, M)          m_a3_1 (.clk, .a(y1_a2), .b(z2c), .r(s1));
  mod_addsub #(MODULUS, OP_SUB, A) s_a3_h  (.clk, .a(u2), .b(u1), .r(h_a));
  mod_addsub #(MODULUS, OP_ADD, A) s_a3_sx (.clk, .a(u1), .b(u2), .r(sx_a));
  pipe_delay #(FW, M-A) d_h_a3   (.clk, .d(h_a),  .q(h_a3));
  pipe_delay #(FW, M-A) d_sx_a3  (.clk, .d(sx_a), .q(sx_a3));
  pipe_delay #(FW, M)   d_u1_a3  (.clk, .d(u1),   .q(u1_a3));
  pipe_delay #(FW, M)   d_zz_a3  (.clk, .d(z1z2_a2), .q(z1z2_a3));

  fe_t pa_r, pa_h, pa_zz, pa_sx, pa_u1, pa_s1;
  mod_addsub #(MODULUS, OP_SUB, A) s_a4_r (.clk, .a(s2), .b(s1), .r(pa_r));
  pipe_delay #(FW, A) d_h_a4  (.clk, .d(h_a3),    .q(pa_h));
  pipe_delay #(FW, A) d_zz_a4 (.clk, .d(z1z2_a3), .q(pa_zz));
  pipe_delay #(FW, A) d_sx_a4 (.clk, .d(sx_a3),   .q(pa_sx));
  pipe_delay #(FW, A) d_u1_a4 (.clk, .d(u1_a3),   .q(pa_u1));
  pipe_delay #(FW, A) d_s1_a4 (.clk, .d(s1),      .q(pa_s1));

  // ---------------- doubling front end ----------------
  fe_t x1sq, h_d0, sx_d0, x1sq2, x1sq_d, r_d0;
  fe_t pd_r, pd_h, pd_zz, pd_sx, pd_u1, pd_s1;
  mod_mul #(MODULUS, M)            m_d1   (.clk, .a(x1), .b(x1), .r(x1sq));
  mod_addsub #(MODULUS, OP_DBL, A) s_d1_h  (.clk, .a(y1), .b(y1), .r(h_d0));
  mod_addsub #(MODULUS, OP_ADD, A) s_d1_sx (.clk, .a(x1), .b(x1), .r(sx_d0));
  mod_addsub #(MODULUS, OP_DBL, A) s_d2    (.clk, .a(x1sq), .b(x1sq), .r(x1sq2));
  pipe_delay #(FW, A)              d_x1sq  (.clk, .d(x1sq), .q(x1sq_d));
  mod_addsub #(MODULUS, OP_ADD, A) s_d3    (.clk, .a(x1sq2), .b(x1sq_d), .r(r_d0));
  pipe_delay #(FW, T_JOIN-(M+2*A)) d_pd_r  (.clk, .d(r_d0),  .q(pd_r));
  pipe_delay #(FW, T_JOIN-A)       d_pd_h  (.clk, .d(h_d0),  .q(pd_h));
  pipe_delay #(FW, T_JOIN-A)       d_pd_sx (.clk, .d(sx_d0), .q(pd_sx));
  pipe_delay #(FW, T_JOIN)         d_pd_zz (.clk, .d(z1),    .q(pd_zz));
  pipe_delay #(FW, T_JOIN)         d_pd_u1 (.clk, .d(x1),    .q(pd_u1));
  pipe_delay #(FW, T_JOIN)         d_pd_s1 (.clk, .d(y1),    .q(pd_s1));

  // ---------------- join multiplexer (PD check) ----------------
  logic is_dbl, dbl_j;
  fe_t  r, h, zz, sx, u1f, s1f;
  assign is_dbl = (pa_h == '0) && (pa_r == '0);
  always_ff @(posedge clk) begin
    dbl_j <= is_dbl;
    r     <= is_dbl ? pd_r  : pa_r;
    h     <= is_dbl ? pd_h  : pa_h;
    zz    <= is_dbl ? pd_zz : pa_zz;
    sx    <= is_dbl ? pd_sx : pa_sx;
    u1f   <= is_dbl ? pd_u1 : pa_u1;
    s1f   <= is_dbl ? pd_s1 : pa_s1;
  end

  // ---------------- fused back end ----------------
  fe_t rr, hh, z3, h_f1, sx_f1, u1_f1;
  mod_mul #(MODULUS, M) m_f1_0 (.clk, .a(r),  .b(r), .r(rr));
  mod_mul #(MODULUS, M) m_f1_1 (.clk, .a(h),  .b(h), .r(hh));
  mod_mul #(MODULUS, M) m_f1_2 (.clk, .a(zz), .b(h), .r(z3));
  pipe_delay #(FW, M) d_h_f1  (.clk, .d(h),   .q(h_f1));
  pipe_delay #(FW, M) d_sx_f1 (.clk, .d(sx),  .q(sx_f1));
  pipe_delay #(FW, M) d_u1_f1 (.clk, .d(u1f), .q(u1_f1));

  fe_t hhh, hsx, hu1, rr_f2, s1_f2;
  mod_mul #(MODULUS, M) m_f2_0 (.clk, .a(hh), .b(h_f1),  .r(hhh));
  mod_mul #(MODULUS, M) m_f2_1 (.clk, .a(hh), .b(sx_f1), .r(hsx));
  mod_mul #(MODULUS, M) m_f2_2 (.clk, .a(hh), .b(u1_f1), .r(hu1));
  pipe_delay #(FW, M)   d_rr_f2 (.clk, .d(rr),  .q(rr_f2));
  pipe_delay #(FW, 2*M) d_s1_f2 (.clk, .d(s1f), .q(s1_f2));

  fe_t x3_0, hu1_d, t_0, hs1, x3_f3, t_f3, r_f3;
  mod_addsub #(MODULUS, OP_SUB, A) s_f3_x3 (.clk, .a(rr_f2), .b(hsx), .r(x3_0));
  pipe_delay #(FW, A)              d_hu1   (.clk, .d(hu1), .q(hu1_d));
  mod_addsub #(MODULUS, OP_SUB, A) s_f3_t  (.clk, .a(hu1_d), .b(x3_0), .r(t_0));
  mod_mul #(MODULUS, M)            m_f3    (.clk, .a(hhh), .b(s1_f2), .r(hs1));
  pipe_delay #(FW, M-A)   d_x3_f3 (.clk, .d(x3_0), .q(x3_f3));
  pipe_delay #(FW, M-2*A) d_t_f3  (.clk, .d(t_0),  .q(t_f3));
  pipe_delay #(FW, 3*M)   d_r_f3  (.clk, .d(r),    .q(r_f3));

  fe_t rt, hs1_f4, x3_f4;
  mod_mul #(MODULUS, M) m_f4 (.clk, .a(r_f3), .b(t_f3), .r(rt));
  pipe_delay #(FW, M) d_hs1_f4 (.clk, .d(hs1),   .q(hs1_f4));
  pipe_delay #(FW, M) d_x3_f4  (.clk, .d(x3_f3), .q(x3_f4));

  fe_t y3, x3, z3_o;
  mod_addsub #(MODULUS, OP_SUB, A) s_f5 (.clk, .a(rt), .b(hs1_f4), .r(y3));
  pipe_delay #(FW, A)       d_x3_f5 (.clk, .d(x3_f4), .q(x3));
  pipe_delay #(FW, 3*M + A) d_z3_f5 (.clk, .d(z3),    .q(z3_o));

  logic dbl_o;
  pipe_delay #(1, T_FUSED) d_dbl (.clk, .d(dbl_j), .q(dbl_o));

  // ---------------- side band: inputs, tag, valid ----------------
  point_t p1_o, p2_o;
  tag_t   tag_o;
  pipe_delay #(PW,    LATENCY-1) d_p1  (.clk, .d(in_req.p1),  .q(p1_o));
  pipe_delay #(PW,    LATENCY-1) d_p2  (.clk, .d(in_req.p2),  .q(p2_o));
  pipe_delay #(TAG_W, LATENCY-1) d_tag (.clk, .d(in_req.tag), .q(tag_o));

  logic [LATENCY-2:0] vsr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vsr       <= '0;
      out_valid <= 1'b0;
    end else begin
      vsr       <= {vsr[LATENCY-3:0], in_valid};
      out_valid <= vsr[LATENCY-2];
    end
  end

  // ---------------- output register with infinity bypass ----------------
  always_ff @(posedge clk) begin
    out_rsp.tag    <= tag_o;
    out_inf_bypass <= vsr[LATENCY-2] && ((p1_o.z == '0) || (p2_o.z == '0));
    out_was_dbl    <= vsr[LATENCY-2] && dbl_o && (p1_o.z != '0) && (p2_o.z != '0);
    if (p1_o.z == '0)      out_rsp.sum <= p2_o;
    else if (p2_o.z == '0) out_rsp.sum <= p1_o;
    else                   out_rsp.sum <= '{x: x3, y: y3, z: z3_o};
  end

  initial begin
    assert (M >= 2*A) else $error("uda: MUL_LAT must be at least 2*ADD_LAT");
    assert (A >= 1)   else $error("uda: ADD_LAT must be at least 1");
  end
endmodule
