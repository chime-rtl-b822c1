// chime_pkg: types, constants and FP16 arithmetic shared by the near-memory processors.
//
// Both logic dies compute in IEEE-754 binary16 (FP16), as the paper states for the DRAM and the
// RRAM near-memory processors. The paper gives the number format but not the arithmetic
// details, so the following are this design's choices: subnormal inputs and results are
// flushed to zero, results are rounded to nearest-even, overflow saturates to infinity and
// NaN is not produced (an infinite operand propagates). The exponential uses a range
// reduction exp(x) = 2^(x*log2 e) in 16-bit fixed point and a 4th-order polynomial for the
// fractional power of two. The functions are combinational and are used inside the PE,
// SFPE, reducer and activation datapaths.
package chime_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO    = 16'h0000;
  localparam fp16_t FP16_ONE     = 16'h3C00;
  localparam fp16_t FP16_POS_INF = 16'h7C00;
  localparam fp16_t FP16_NEG_INF = 16'hFC00;

  // ---------------------------------------------------------------- SFPE operations
  // The six functional units printed in the SFPE box of the DRAM processing unit figure
  // (ADD, MAX, EXP, DIV, MUL) plus SUB and a copy, which the online softmax needs, and a
  // reciprocal square root for the "Normalize" step of the fused normalisation.
  typedef enum logic [2:0] {
    SF_ADD = 3'd0,
    SF_SUB = 3'd1,
    SF_MUL = 3'd2,
    SF_MAX = 3'd3,
    SF_EXP = 3'd4,
    SF_DIV = 3'd5,
    SF_MOV = 3'd6,
    SF_RSQRT = 3'd7     // 1/sqrt(|a|): the normalisation step of LayerNorm/RMSNorm
  } sfpe_op_e;

  // Reduction performed by the reducer.
  typedef enum logic [0:0] {
    RED_SUM = 1'b0,
    RED_MAX = 1'b1
  } red_op_e;

  // ---------------------------------------------------------------- processing-unit commands
  typedef enum logic [3:0] {
    PU_NOP     = 4'd0,
    PU_GEMV    = 4'd1,   // PE group: dot products of shared-memory vector with MRF rows
    PU_VLOAD   = 4'd2,   // shared memory -> VRF register        (DRAM PU)
    PU_VSTORE  = 4'd3,   // VRF register  -> shared memory       (DRAM PU)
    PU_SFPE    = 4'd4,   // one SIMD instruction                 (DRAM PU)
    PU_VREDUCE = 4'd5,   // VRF register  -> reducer -> SRF      (DRAM PU)
    PU_ACT     = 4'd6,   // Taylor-series activation on shared memory (RRAM PU)
    PU_SEND    = 4'd7,   // shared memory -> ring router -> another PU's shared memory
    PU_SETS    = 4'd8,   // write an immediate into an SRF scalar (DRAM PU)
    PU_WLOAD   = 4'd9,   // memory channel -> MRF of PE number `pu`
    PU_MLOAD   = 4'd10,  // memory channel -> shared memory
    PU_MSTORE  = 4'd11   // shared memory  -> memory channel
  } pu_op_e;

  // One command word. Field use depends on the operation, see nmp_pu.
  typedef struct packed {
    pu_op_e    op;
    logic [15:0] src;     // shared-memory word address of the source
    logic [15:0] dst;     // shared-memory word address of the destination
    logic [15:0] len;     // number of shared-memory words / MRF rows
    logic [4:0]  pu;      // destination PU for PU_SEND
    logic        sum;     // PU_GEMV: 1 = reduce the PE outputs to one sum, 0 = store all
    sfpe_op_e    sop;     // PU_SFPE operation / PU_VREDUCE: sop[0] selects max
    logic [2:0]  vd;      // VRF destination / SRF destination
    logic [2:0]  vs1;     // VRF source 1
    logic [2:0]  vs2;     // VRF source 2 or SRF index
    logic        scal;    // PU_SFPE: second operand is SRF[vs2] broadcast
    fp16_t       imm;     // PU_SETS immediate
    logic [31:0] maddr;   // memory-channel word address for PU_WLOAD / PU_MLOAD / PU_MSTORE
  } pu_cmd_t;

  // ---------------------------------------------------------------- host command streams
  typedef enum logic [0:0] {
    HC_PU  = 1'b0,        // broadcast a pu_cmd_t to the PUs selected by mask
    HC_DMA = 1'b1         // cross-chiplet transfer over the die-to-die link
  } host_kind_e;

  typedef struct packed {
    logic        to_dram;  // 1: FFNOut, RRAM -> DRAM; 0: AttnOut, DRAM -> RRAM
    logic [4:0]  d_pu;     // PU on the DRAM die
    logic [15:0] d_addr;   // its shared-memory word address (64-bit words)
    logic [4:0]  r_pu;     // PU on the RRAM die
    logic [15:0] r_addr;   // its shared-memory word address (256-bit words)
    logic [15:0] n;        // number of 64-bit words to move (multiple of 4)
  } dma_cmd_t;

  typedef struct packed {
    host_kind_e  kind;
    logic        sync;     // wait for the other die's cut point before issuing
    logic [15:0] mask;     // PU select for HC_PU
    pu_cmd_t     cmd;
    dma_cmd_t    dma;
  } host_cmd_t;

  // ---------------------------------------------------------------- memory array ports
  // Port of one M3D DRAM channel's bank arrays (the cell arrays and row buffers are a
  // process-specific macro outside the synthesizable logic).
  typedef struct packed {
    logic        act;      // activate row into the bank's row buffer
    logic        rd;       // column read from the open row
    logic        wr;       // column write to the open row
    logic [3:0]  bank;
    logic [15:0] row;
    logic [8:0]  col;      // 64-bit column within the 32 Kb row buffer
    logic [63:0] wdata;
  } dram_arr_req_t;

  // Port of one M3D RRAM memory segment (channel): 512-bit read and write data.
  typedef struct packed {
    logic         en;
    logic         we;
    logic [15:0]  addr;
    logic [511:0] wdata;
  } rram_seg_req_t;

  // ---------------------------------------------------------------- FP16 helpers
  function automatic logic fp16_is_zero(fp16_t a);
    return a[14:10] == 5'd0;
  endfunction

  function automatic fp16_t fp16_neg(fp16_t a);
    return {~a[15], a[14:0]};
  endfunction

  // Ordering key: larger key means larger value (zeros of both signs compare equal).
  function automatic logic [15:0] fp16_key(fp16_t a);
    if (a[14:10] == 5'd0) return 16'h8000;
    return a[15] ? ~a : {1'b1, a[14:0]};
  endfunction

  function automatic fp16_t fp16_max(fp16_t a, fp16_t b);
    return (fp16_key(a) >= fp16_key(b)) ? a : b;
  endfunction

  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [21:0] p;
    logic [10:0] m;
    logic        rnd, stk;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd31 || b[14:10] == 5'd31) return {s, 15'h7C00};
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return {s, 15'h0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) begin
      m = {1'b0, p[20:11]}; rnd = p[10]; stk = |p[9:0]; e = e + 1;
    end else begin
      m = {1'b0, p[19:10]}; rnd = p[9];  stk = |p[8:0];
    end
    if (rnd && (stk || m[0])) m = m + 11'd1;
    if (m[10]) begin m = 11'd0; e = e + 1; end
    if (e >= 31) return {s, 15'h7C00};
    if (e <= 0)  return {s, 15'h0};
    return {s, e[4:0], m[9:0]};
  endfunction

  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    fp16_t       x, y;
    logic [13:0] mx, my;      // hidden bit, 10 fraction bits, guard, round, sticky
    logic [14:0] sum;
    logic        stk;
    int          d, e, lz;
    if (a[14:10] == 5'd31) return a;
    if (b[14:10] == 5'd31) return b;
    if (a[14:10] == 5'd0) return (b[14:10] == 5'd0) ? FP16_ZERO : b;
    if (b[14:10] == 5'd0) return a;
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d  = int'(x[14:10]) - int'(y[14:10]);
    mx = {1'b1, x[9:0], 3'b000};
    my = {1'b1, y[9:0], 3'b000};
    if (d > 13) begin
      my = 14'd1;
    end else if (d > 0) begin
      stk = 1'b0;
      for (int i = 0; i < 14; i++) if (i < d && my[i]) stk = 1'b1;
      my = (my >> d) | {13'd0, stk};
    end
    e = int'(x[14:10]);
    if (x[15] == y[15]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[14]) begin
        sum = (sum >> 1) | {14'd0, sum[0]};
        e = e + 1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 15'd0) return FP16_ZERO;
      lz = 0;
      for (int i = 13; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e = e - lz;
    end
    // sum[13] is the hidden bit, sum[12:3] the fraction, sum[2] guard, sum[1:0] round/sticky
    if (sum[2] && ((|sum[1:0]) || sum[3])) begin
      sum = sum + 15'd8;
      if (sum[14]) begin sum = sum >> 1; e = e + 1; end
    end
    if (e >= 31) return {x[15], 15'h7C00};
    if (e <= 0)  return {x[15], 15'h0};
    return {x[15], e[4:0], sum[12:3]};
  endfunction

  function automatic fp16_t fp16_sub(fp16_t a, fp16_t b);
    return fp16_add(a, fp16_neg(b));
  endfunction

  function automatic fp16_t fp16_div(fp16_t a, fp16_t b);
    logic        s;
    logic [23:0] num, q, r;
    logic [10:0] m;
    logic        rnd, stk;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd31 || b[14:10] == 5'd0) return {s, 15'h7C00};
    if (a[14:10] == 5'd0 || b[14:10] == 5'd31) return {s, 15'h0};
    num = {1'b1, a[9:0], 13'd0};
    q   = num / {13'd0, 1'b1, b[9:0]};
    r   = num % {13'd0, 1'b1, b[9:0]};
    e   = int'(a[14:10]) - int'(b[14:10]) + 15;
    if (q[13]) begin
      m = {1'b0, q[12:3]}; rnd = q[2]; stk = (|q[1:0]) || (r != 24'd0);
    end else begin
      m = {1'b0, q[11:2]}; rnd = q[1]; stk = q[0] || (r != 24'd0); e = e - 1;
    end
    if (rnd && (stk || m[0])) m = m + 11'd1;
    if (m[10]) begin m = 11'd0; e = e + 1; end
    if (e >= 31) return {s, 15'h7C00};
    if (e <= 0)  return {s, 15'h0};
    return {s, e[4:0], m[9:0]};
  endfunction

  // 1/sqrt(|x|) for FP16 x. The sign is ignored (the operand is a variance). x = w * 2^E
  // with w in [1,4) and E even; w^-1/2 starts from a two-piece linear guess (within 10 %)
  // and takes three Newton steps y <- y*(3 - w*y*y)/2 in Q16. Zero gives +inf, inf gives 0.
  function automatic fp16_t fp16_rsqrt(fp16_t x);
    logic [63:0] w, y, t;
    logic [10:0] m;
    int          ex, e;
    ex = int'(x[14:10]);
    if (ex == 0)  return FP16_POS_INF;
    if (ex == 31) return FP16_ZERO;
    e = ex - 15;
    w = {53'd0, 1'b1, x[9:0]} << 6;                       // w in Q16, [1,2)
    if (e[0]) begin w = w << 1; e = e - 1; end           // w in [2,4), e even
    if (w < 64'd131072) y = 64'd79109 - ((64'd13573 * w) >> 16);
    else                y = 64'd59914 - ((64'd6786  * w) >> 16);
    t = (w * ((y * y) >> 16)) >> 16; y = (y * (64'd196608 - t)) >> 17;
    t = (w * ((y * y) >> 16)) >> 16; y = (y * (64'd196608 - t)) >> 17;
    t = (w * ((y * y) >> 16)) >> 16; y = (y * (64'd196608 - t)) >> 17;
    // y in (0.5, 1] (Q16): result = y * 2^(-e/2)
    e = 15 - e / 2;
    if (y >= 64'd65536) return {1'b0, e[4:0], 10'd0};
    m = {1'b0, y[14:5]} + {10'd0, y[4]};
    e = e - 1;
    if (m[10]) begin m = 11'd0; e = e + 1; end
    return {1'b0, e[4:0], m[9:0]};
  endfunction

  // exp(x) for FP16 x.  x*log2(e) = n + f, 2^f by Horner polynomial in Q16.
  function automatic fp16_t fp16_exp(fp16_t x);
    logic signed [47:0] xf, t, f, p;
    int                 ex, n, e;
    logic [10:0]        m;
    ex = int'(x[14:10]);
    if (ex == 0) return FP16_ONE;
    if (ex == 31) return x[15] ? FP16_ZERO : FP16_POS_INF;
    if (ex >= 19) return x[15] ? FP16_ZERO : FP16_POS_INF;    // |x| >= 16
    // x in Q16 fixed point: value = 1.m * 2^(ex-15), so Q16 = {1,m} << (ex-9)
    if (ex >= 9) xf = 48'(({37'd0, 1'b1, x[9:0]}) << (ex - 9));
    else         xf = 48'(({37'd0, 1'b1, x[9:0]}) >> (9 - ex));
    if (x[15]) xf = -xf;
    t = (xf * 48'sd94548) >>> 16;                // * log2(e) in Q16
    n = int'(t >>> 16);
    f = t & 48'hFFFF;
    p = 48'sd629;                                // 0.0096181 in Q16
    p = ((p * f) >>> 16) + 48'sd3638;            // 0.0555041
    p = ((p * f) >>> 16) + 48'sd15743;           // 0.2402265
    p = ((p * f) >>> 16) + 48'sd45426;           // 0.6931472
    p = ((p * f) >>> 16) + 48'sd65536;           // 1.0
    m = {1'b0, p[15:6]} + {10'd0, p[5]};
    e = n + 15;
    if (p[17] || m[10]) begin m = 11'd0; e = e + 1; end
    if (e >= 31) return FP16_POS_INF;
    if (e <= 0)  return FP16_ZERO;
    return {1'b0, e[4:0], m[9:0]};
  endfunction

endpackage
