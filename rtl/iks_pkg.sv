// iks_pkg: types, constants and FP16 arithmetic shared by the near-memory
// accelerator (NMA) of the Intelligent Knowledge Store.
//
// The accelerator computes exact inner-product similarity between 16-bit
// floating point query vectors and embedding vectors read from LPDDR5X.
// Numbers taken from the paper: 68 MAC units per dot-product unit (one
// 136-byte DRAM beat = 68 x FP16 elements), 64 processing engines per NMA,
// a 2 KB query scratchpad per engine (1024 FP16 dimensions), top-K list of
// K = 32, eight NMAs per device, 512 Gb (64 GB) per LPDDR5X package.
//
// Own choices (the paper gives no arithmetic details):
//  * FP16 is IEEE binary16. Subnormal inputs and results are flushed to
//    zero, exponent 31 is treated as infinity (no NaN propagation).
//  * A MAC is a rounded FP16 multiply followed by a rounded FP16 add
//    (round to nearest, ties to even), not a fused operation. The score
//    register is 2 bytes, as printed in the dot-product figure.
//  * Scores are ordered through fp16_key(), which maps the sign-magnitude
//    encoding onto an unsigned key whose order is the numeric order.
package iks_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned FP_W          = 16;    // FP16 element
  localparam int unsigned LANES         = 68;    // MAC units / EVs per DRAM beat
  localparam int unsigned BEAT_BYTES    = 2 * LANES; // 136 bytes per beat
  localparam int unsigned N_PE          = 64;    // processing engines per NMA
  localparam int unsigned QSP_BYTES     = 2048;  // query scratchpad per PE
  localparam int unsigned MAX_VD        = QSP_BYTES / 2; // 1024 dimensions
  localparam int unsigned TOPK          = 32;    // K kept in hardware
  localparam int unsigned N_NMA         = 8;     // NMAs per IKS device
  localparam int unsigned ADDR_W        = 36;    // 64 GB LPDDR5X package
  localparam int unsigned VD_W          = 11;    // holds 1..1024
  localparam int unsigned NVEC_W        = 32;    // embedding vectors per NMA
  localparam int unsigned NQ_W          = 7;     // holds 0..64 queries
  localparam int unsigned HOST_ADDR_W   = 21;    // 512 context buffers x 4 KB
  localparam int unsigned CB_BYTES      = 4096;  // one context buffer

  // Offsets inside one 4 KB context buffer (own choice, see context_buffer).
  localparam logic [11:0] CB_QSP_BASE   = 12'h000; // 2 KB query scratchpad
  localparam logic [11:0] CB_OSP_BASE   = 12'h800; // K x 8-byte output entries
  localparam logic [11:0] CB_REG_BASE   = 12'hC00; // configuration registers
  localparam logic [11:0] REG_BASE_ADDR = 12'hC00; // B: base of first EV block
  localparam logic [11:0] REG_VD        = 12'hC08; // VD: vector dimension
  localparam logic [11:0] REG_NVEC      = 12'hC10; // N: number of vectors
  localparam logic [11:0] REG_NQ        = 12'hC18; // number of query vectors
  localparam logic [11:0] REG_DOORBELL  = 12'hC20; // doorbell

  typedef logic [FP_W-1:0]   fp16_t;
  typedef logic [ADDR_W-1:0] addr_t;

  // Host (context buffer) access, one 64-bit word per request.
  typedef struct packed {
    logic                   valid;
    logic                   we;
    logic [HOST_ADDR_W-1:0] addr;   // byte address inside the CB space
    logic [63:0]            wdata;
  } host_req_t;

  typedef struct packed {
    logic        valid;
    logic [63:0] rdata;
  } host_rsp_t;

  // Side information travelling with every DRAM beat (one dimension of
  // one 68-vector block).
  typedef struct packed {
    logic [VD_W-1:0] dim;       // dimension j carried by this beat
    logic            last;      // j == VD-1: block's scores complete
    addr_t           blk_base;  // address of the block's first row
    logic [6:0]      nvalid;    // vectors of this block that exist (1..68)
  } beat_tag_t;

  // A scored embedding vector: what the top-K list holds.
  typedef struct packed {
    logic  valid;
    fp16_t score;
    addr_t addr;
  } topk_entry_t;

  // Offload context of one NMA.
  typedef struct packed {
    addr_t             base;    // B
    logic [VD_W-1:0]   vd;      // VD
    logic [NVEC_W-1:0] nvec;    // N
    logic [NQ_W-1:0]   nq;      // active processing engines
  } offload_ctx_t;

  // ------------------------------------------------------------ FP16 math
  localparam fp16_t FP16_INF = 16'h7C00;

  // Unsigned key with the numeric order of the FP16 value.
  function automatic logic [15:0] fp16_key(fp16_t v);
    return v[15] ? ~v : (v | 16'h8000);
  endfunction

  // Round a signed exact value  (-1)^sign * mag * 2^exp2  to FP16.
  function automatic fp16_t fp16_round(logic sign, int exp2, logic [47:0] mag);
    int          msb;
    int          e_biased;
    int          sh;
    logic [47:0] rem;
    logic [47:0] half;
    logic [11:0] mant;
    logic        up;
    msb = -1;
    for (int i = 0; i < 48; i++)
      if (mag[i]) msb = i;
    if (msb < 0) return {sign, 15'd0};
    e_biased = exp2 + msb + 15;
    if (e_biased <= 0)  return {sign, 15'd0};        // flush to zero
    if (e_biased >= 31) return {sign, FP16_INF[14:0]};
    sh = msb - 10;
    if (sh <= 0) begin
      mant = 12'(mag << (-sh));
      up   = 1'b0;
    end else begin
      mant = 12'(mag >> sh);
      rem  = mag & ((48'd1 << sh) - 48'd1);
      half = 48'd1 << (sh - 1);
      up   = (rem > half) || ((rem == half) && mant[0]);
    end
    mant = mant + 12'(up);
    if (mant[11]) begin
      mant     = mant >> 1;
      e_biased = e_biased + 1;
      if (e_biased >= 31) return {sign, FP16_INF[14:0]};
    end
    return {sign, 5'(e_biased), mant[9:0]};
  endfunction

  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [10:0] ma, mb;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return {s, 15'd0};
    if (a[14:10] == 5'd31 || b[14:10] == 5'd31) return {s, FP16_INF[14:0]};
    ma = {1'b1, a[9:0]};
    mb = {1'b1, b[9:0]};
    return fp16_round(s, int'(a[14:10]) + int'(b[14:10]) - 50,
                      48'(ma) * 48'(mb));
  endfunction

  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    logic [47:0] xa, xb, sum;
    int          ea, eb, emin;
    logic        s;
    if (a[14:10] == 5'd31) return {a[15], FP16_INF[14:0]};
    if (b[14:10] == 5'd31) return {b[15], FP16_INF[14:0]};
    if (a[14:10] == 5'd0 && b[14:10] == 5'd0) return {a[15] & b[15], 15'd0};
    if (a[14:10] == 5'd0) return b;
    if (b[14:10] == 5'd0) return a;
    ea   = int'(a[14:10]);
    eb   = int'(b[14:10]);
    emin = (ea < eb) ? ea : eb;
    // Both operands aligned on the smaller exponent: at most 11 + 29 bits,
    // so the sum is exact before the single rounding step.
    xa = 48'({1'b1, a[9:0]}) << (ea - emin);
    xb = 48'({1'b1, b[9:0]}) << (eb - emin);
    if (a[15] == b[15]) begin
      sum = xa + xb;
      s   = a[15];
    end else if (xa >= xb) begin
      sum = xa - xb;
      s   = a[15];
    end else begin
      sum = xb - xa;
      s   = b[15];
    end
    if (sum == 48'd0) s = 1'b0;
    return fp16_round(s, emin - 25, sum);
  endfunction

endpackage
