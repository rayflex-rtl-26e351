// rayflex_pkg: types, constants and shared floating-point helpers of the RayFlex
// ray-tracing datapath.
//
// What is here:
//   * The external IO formats (rayflex_in_t / rayflex_out_t), which carry standard
//     IEEE-754 binary32 values.
//   * The 33-bit "recoded" floating-point format used inside the pipeline. It adds one
//     exponent bit so that zero, subnormals, infinities and NaN all have a normalized
//     representation:   {sign, exp9[8:0], frac[22:0]}
//       exp9[8:6] == 3'b000  -> zero
//       exp9[8:6] == 3'b110  -> infinity
//       exp9[8:6] == 3'b111  -> NaN
//       otherwise            -> value = (-1)^sign * 1.frac * 2^(exp9 - 256)
//     Subnormal binary32 inputs become normalized numbers with exp9 < 130, so the
//     arithmetic units never see a hidden bit of zero.  Because exp9 grows with the
//     magnitude, comparing {exp9, frac} as an unsigned number orders magnitudes.
//   * The Shared RayFlex Data Structure (srfds_t): one wide struct that holds every
//     field any pipeline stage reads or writes.  Every inner pipeline register uses
//     it; each stage copies its input and overwrites only the fields it produces.
//     Fields a stage never reads are left for synthesis to remove.  Ray-box and
//     ray-triangle intermediates occupy separate fields.
//   * round_pack(): round-to-nearest-even of an unbounded-range result into the
//     recoded format, including gradual underflow and overflow to infinity.  The
//     adder and the multiplier share it.
//
// Following the paper: the recoded format with one extra exponent bit, rounding after
// every add and multiply, the IO contents (one opcode, one ray with origin, direction,
// inverse direction, extent and the pre-computed k and S values, one triangle, four
// boxes).  Own choices: the bit-level recoded encoding (modelled on the usual
// "recFN" layout), the opcode encoding, k carried as 2-bit axis indices, the field
// order of all structs and the output layout.
package rayflex_pkg;

  localparam int unsigned NUM_BOXES = 4;    // child boxes tested per box operation
  localparam int unsigned FP_W      = 32;   // external binary32 width
  localparam int unsigned REC_W     = 33;   // internal recoded width
  localparam int unsigned LATENCY   = 11;   // pipeline stages, one register each

  typedef logic [FP_W-1:0]  fp32_t;
  typedef logic [REC_W-1:0] recfn_t;
  typedef logic [1:0]       axis_t;         // 0 = x, 1 = y, 2 = z

  typedef enum logic [0:0] {
    OP_BOX      = 1'b0,   // ray against four child boxes, sorted result
    OP_TRIANGLE = 1'b1    // watertight ray-triangle test
  } opcode_e;

  // recoded constants
  localparam recfn_t REC_ZERO    = '0;
  localparam recfn_t REC_POS_INF = {1'b0, 9'b110_000000, 23'd0};
  localparam recfn_t REC_NAN     = {1'b0, 9'b111_000000, 23'h400000};

  // ---------------------------------------------------------------- IO formats
  typedef struct packed {
    fp32_t [2:0] origin;
    fp32_t [2:0] dir;
    fp32_t [2:0] inv_dir;     // element-wise 1/dir, pre-computed by the producer
    fp32_t       extent;      // t interval of the ray is [0, extent]
    axis_t [2:0] k;           // k[0]=kx, k[1]=ky, k[2]=kz (kz = dominant axis)
    fp32_t [2:0] shear;       // shear[0]=Sx, shear[1]=Sy, shear[2]=Sz
  } ray_fp_t;

  typedef struct packed {
    fp32_t [2:0] lo;          // minimum corner
    fp32_t [2:0] hi;          // maximum corner
  } box_fp_t;

  typedef struct packed {
    fp32_t [2:0][2:0] v;      // v[vertex][axis], vertices A=0, B=1, C=2
  } tri_fp_t;

  typedef struct packed {
    opcode_e                  op;
    ray_fp_t                  ray;
    box_fp_t [NUM_BOXES-1:0]  box;
    tri_fp_t                  trng;
  } rayflex_in_t;

  typedef struct packed {
    opcode_e                         op;
    // box operation: slot 0 is the nearest box; missed boxes come after hit boxes
    logic  [NUM_BOXES-1:0][1:0]      box_order;   // index of the box in each slot
    fp32_t [NUM_BOXES-1:0]           box_tmin;    // entry distance of the box in each slot
    logic  [NUM_BOXES-1:0]           box_hit;     // hit status of the box in each slot
    // triangle operation: distance = t_num / t_denom (both negative on a hit)
    logic                            tri_hit;
    fp32_t                           tri_t_num;
    fp32_t                           tri_t_denom;
  } rayflex_out_t;

  // ---------------------------------------------------------- recoded copies
  typedef struct packed {
    recfn_t [2:0] origin;
    recfn_t [2:0] dir;
    recfn_t [2:0] inv_dir;
    recfn_t       extent;
    axis_t  [2:0] k;
    recfn_t [2:0] shear;
  } ray_rec_t;

  typedef struct packed {
    recfn_t [2:0] lo;
    recfn_t [2:0] hi;
  } box_rec_t;

  // ------------------------------------------- Shared RayFlex Data Structure
  typedef struct packed {
    opcode_e                         op;
    ray_rec_t                        ray;
    box_rec_t [NUM_BOXES-1:0]        box;
    recfn_t   [2:0][2:0]             trng;           // triangle[vertex][axis]
    // ray-box intermediates
    recfn_t   [NUM_BOXES-1:0][2:0]   box_lo_tr;      // stage 2: lo - origin
    recfn_t   [NUM_BOXES-1:0][2:0]   box_hi_tr;      // stage 2: hi - origin
    recfn_t   [NUM_BOXES-1:0][2:0]   box_t_lo;       // stage 3: (lo - origin) * inv_dir
    recfn_t   [NUM_BOXES-1:0][2:0]   box_t_hi;       // stage 3: (hi - origin) * inv_dir
    recfn_t   [NUM_BOXES-1:0]        box_tmin;       // stage 4: entry distance
    recfn_t   [NUM_BOXES-1:0]        box_tmax;       // stage 4: exit distance
    logic     [NUM_BOXES-1:0]        box_hit;        // stage 4
    logic     [NUM_BOXES-1:0][1:0]   box_order;      // stage 10
    recfn_t   [NUM_BOXES-1:0]        box_sorted_tmin;// stage 10
    logic     [NUM_BOXES-1:0]        box_sorted_hit; // stage 10
    // ray-triangle intermediates
    recfn_t   [2:0][2:0]             tri_tr;         // stage 2: vertex - origin
    recfn_t   [2:0][2:0]             tri_sh;         // stage 3: S[c] * tri_tr[v][kz]
    recfn_t   [2:0][2:0]             tri_xyz;        // stage 4: sheared vertex, x/y/z
    recfn_t   [5:0]                  tri_prod;       // stage 5: barycentric products
    recfn_t   [2:0]                  tri_uvw;        // stage 6: U, V, W
    recfn_t   [2:0]                  tri_tprod;      // stage 7: U*Az, V*Bz, W*Cz
    recfn_t                          tri_det_part;   // stage 8: U + V
    recfn_t                          tri_t_part;     // stage 8: U*Az + V*Bz
    recfn_t                          tri_det;        // stage 9: U + V + W
    recfn_t                          tri_t;          // stage 9: U*Az + V*Bz + W*Cz
    logic                            tri_hit;        // stage 10
  } srfds_t;

  // ------------------------------------------------------ FP helper functions
  typedef struct packed {
    logic               sign;
    logic               is_zero;
    logic               is_inf;
    logic               is_nan;
    logic signed [11:0] exp;    // unbiased exponent of a finite non-zero value
    logic        [23:0] sig;    // 1.frac
  } unpacked_t;

  function automatic unpacked_t rec_unpack(recfn_t x);
    unpacked_t u;
    u.sign    = x[32];
    u.is_zero = (x[31:29] == 3'b000);
    u.is_inf  = (x[31:29] == 3'b110);
    u.is_nan  = (x[31:29] == 3'b111);
    u.exp     = $signed({3'b000, x[31:23]}) - 12'sd256;
    u.sig     = {1'b1, x[22:0]};
    return u;
  endfunction

  function automatic logic rec_is_nan(recfn_t x);
    return x[31:29] == 3'b111;
  endfunction

  function automatic recfn_t rec_neg(recfn_t x);
    return {~x[32], x[31:0]};
  endfunction

  // number of leading zeros of a 50-bit vector (50 when it is zero)
  function automatic logic [5:0] clz50(logic [49:0] x);
    logic [5:0] n;
    n = 6'd50;
    for (int i = 0; i < 50; i++)
      if (x[i]) n = 6'(49 - i);
    return n;
  endfunction

  // Round sign * (sig / 2^49) * 2^exp to binary32 precision, nearest-even, and return
  // it in recoded form.  sig[49] must be 1; sig[0] may be a sticky bit.
  function automatic recfn_t round_pack(logic sign, logic signed [11:0] exp,
                                       logic [49:0] sig);
    logic [49:0]        sh;
    logic               sticky_out;
    logic [5:0]         shamt;
    logic signed [11:0] e;
    logic [24:0]        m;
    logic               g, s, up;
    logic [5:0]         lz;
    recfn_t             r;
    if (exp < -12'sd126) begin
      // gradual underflow: align to the subnormal grid, binary32 LSB = 2^-149
      shamt      = (exp < -12'sd176) ? 6'd50 : 6'(-12'sd126 - exp);
      sh         = (shamt >= 6'd50) ? 50'd0 : (sig >> shamt);
      sticky_out = (shamt >= 6'd50) ? (|sig) : (|(sig & ((50'd1 << shamt) - 50'd1)));
      e          = -12'sd126;
    end else begin
      sh         = sig;
      sticky_out = 1'b0;
      e          = exp;
    end
    g  = sh[25];
    s  = (|sh[24:0]) | sticky_out;
    up = g & (s | sh[26]);
    m  = {1'b0, sh[49:26]} + {24'd0, up};
    if (m[24]) begin
      m = m >> 1;
      e = e + 12'sd1;
    end
    if (m == 25'd0) begin
      r = {sign, 32'd0};
    end else if (m[23]) begin
      if (e > 12'sd127) r = {sign, 9'b110_000000, 23'd0};
      else              r = {sign, 9'(e + 12'sd256), m[22:0]};
    end else begin
      // subnormal result: renormalize into the recoded range
      lz = clz50({m, 25'd0}) - 6'd1;
      m  = m << lz;
      e  = e - 12'($unsigned(lz));
      r  = {sign, 9'(e + 12'sd256), m[22:0]};
    end
    return r;
  endfunction

endpackage
