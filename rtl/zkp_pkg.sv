// zkp_pkg: types and constants shared by the MSM accelerator.
//
// Every field element travels on a fixed 381-bit datapath (the BLS12-381
// base-field width). The modulus is a parameter of each arithmetic block, so the
// same datapath also runs BN128 (254-bit prime) with the upper bits zero.
// Points are kept in Jacobian coordinates (X, Y, Z) representing the affine
// point (X/Z^2, Y/Z^3); Z == 0 encodes the point at infinity O.
// Requests to the shared point processor (UDA) carry a tag whose upper bits
// name the issuing client and whose lower bits are the client's own tag.
package zkp_pkg;

  localparam int FW = 381;                        // field element width
  typedef logic [FW-1:0] fe_t;

  // Jacobian point; z == 0 is the point at infinity
  typedef struct packed {
    fe_t x;
    fe_t y;
    fe_t z;
  } point_t;

  localparam int PW = $bits(point_t);

  // Base-field primes of the two curves the design targets
  localparam fe_t P_BLS12_381 =
    381'h1a0111ea397fe69a4b1ba7b6434bacd764774b84f38512bf6730d2a0f6b0f6241eabfffeb153ffffb9feffffffffaaab;
  localparam fe_t P_BN128 =
    381'h30644e72e131a029b85045b68181585d97816a916871ca8d3c208c16d87cfd47;

  // UDA tag: client id in the upper bits, client-local tag below
  localparam int CID_W  = 3;
  localparam int LTAG_W = 13;
  localparam int TAG_W  = CID_W + LTAG_W;
  typedef logic [TAG_W-1:0]  tag_t;
  typedef logic [LTAG_W-1:0] ltag_t;

  // One operation for the point processor: sum = p1 + p2 (p1 == p2 doubles)
  typedef struct packed {
    point_t p1;
    point_t p2;
    tag_t   tag;
  } uda_req_t;

  typedef struct packed {
    point_t sum;
    tag_t   tag;
  } uda_rsp_t;

  // Field operation selector of the small modular units
  typedef enum logic [1:0] {
    OP_ADD = 2'd0,   // (a + b) mod p
    OP_SUB = 2'd1,   // (a - b) mod p
    OP_DBL = 2'd2    // (2a) mod p, shift-by-1
  } fop_e;

  // Event strobes of the whole accelerator, one bit per mechanism, for
  // performance counters and test coverage
  typedef struct packed {
    logic arb_contention;  // a UDA request waited for another client
    logic uda_double;      // the UDA took its doubling path
    logic uda_inf;         // the UDA returned an input because the other was O
    logic bam_conflict;    // BAM input blocked by a bucket whose sum is in flight
    logic bam_bypass;      // point written into an empty BAM bucket
    logic rbam_conflict;   // the same two events inside the IS-RBAM
    logic rbam_bypass;
    logic dna_conflict;    // the same two events on the DNA collectors
    logic dna_bypass;
    logic dna_double;      // a doubling step of the final double-and-add pass
  } msm_events_t;

  localparam point_t POINT_INF = '{x: '0, y: '0, z: '0};

endpackage
