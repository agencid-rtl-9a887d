// agencid_pkg: shared constants and types of the AgEncID key-decryption core.
//
// The scheme runs on a symmetric ("Type A") pairing-friendly curve
//   E : y^2 = x^3 + x  over Fq,  q = 3 (mod 4),  embedding degree 2,
// with a prime-order subgroup G of order r (a 160-bit Solinas prime) and the
// pairing target group G_T inside Fq2 = Fq[i]/(i^2 + 1). The curve family, the
// 160-bit Solinas r, the 512-bit field size and k = 2 follow the paper; the
// concrete primes below are this design's own choice (any Type A parameter set
// works): r = 2^159 + 2^17 + 1, q = h*r - 1 with q prime and h = 0 (mod 12).
//
// Points are kept in affine coordinates with an explicit infinity flag.
package agencid_pkg;

  // Field and group sizes
  localparam int QW = 512;   // bits of the base field prime q
  localparam int RW = 160;   // bits of the group order r
  localparam int HW = 353;   // bits of the cofactor h = (q + 1) / r

  typedef logic [QW-1:0] fq_t;

  // q, the base field prime
  localparam fq_t Q_PRIME =
    512'hcc3f3f3b6f4f581f6a6ef9b06d9698a41dc2487d92af55903ed3503b83125742cadf2d70f645c2ef63fd853fd8710a4c45038f952ef47d87352b45e74ebea557;
  // r, the order of G (Solinas form 2^159 + 2^17 + 1)
  localparam logic [RW-1:0] R_ORDER = 160'h8000000000000000000000000000000000020001;
  // h = (q + 1) / r, the exponent of the hard part of the final exponentiation
  localparam logic [HW-1:0] H_COFACTOR =
    353'h1987e7e76de9eb03ed4ddf360db2d31483b7e2efdfa8633b7ff6dec818ee55b0f1a430a58b9973dca040ea558;

  // Affine point of E(Fq); inf = 1 is the point at infinity (x, y ignored)
  typedef struct packed {
    logic inf;
    fq_t  x;
    fq_t  y;
  } ec_point_t;

  // Element a + b*i of Fq2 (i^2 = -1); G_T elements live here
  typedef struct packed {
    fq_t re;
    fq_t im;
  } fq2_t;

  localparam ec_point_t POINT_INF = '{inf: 1'b1, x: '0, y: '0};
  localparam fq2_t      FQ2_ONE   = '{re: fq_t'(1), im: '0};

  // Operations of the elliptic-curve core
  typedef enum logic [1:0] {
    EC_ADD  = 2'd0,   // R = P + Q
    EC_DBL  = 2'd1,   // R = 2P
    EC_SMUL = 2'd2    // R = k * P
  } ec_op_e;

  // Operations of the Fq2 unit
  typedef enum logic {
    F2_MUL = 1'b0,    // z = a * b
    F2_INV = 1'b1     // z = 1 / a
  } f2_op_e;

  // AES-256 key width carried by the decrypted G_T message
  localparam int AES_KW = 256;

  // Default number of boards n in a deployment (paper: clusters of up to 20)
  localparam int N_BOARDS = 20;

  // Modular addition, subtraction and negation in Fq (operands already < q)
  function automatic fq_t fq_add(fq_t a, fq_t b);
    logic [QW:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, Q_PRIME}) s = s - {1'b0, Q_PRIME};
    return s[QW-1:0];
  endfunction

  function automatic fq_t fq_sub(fq_t a, fq_t b);
    logic [QW:0] s;
    s = {1'b0, a} - {1'b0, b};
    if (s[QW]) s = s + {1'b0, Q_PRIME};
    return s[QW-1:0];
  endfunction

  function automatic fq_t fq_neg(fq_t a);
    return fq_sub('0, a);
  endfunction

endpackage
