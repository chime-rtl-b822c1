// sfpe: special-function processing element of a DRAM processing unit.
//
// A SIMD unit of LANES FP16 lanes with a vector register file (VRF) and a scalar register
// file (SRF). The paper's table gives 256-way SIMD (the PU drawing prints "32-SIMD"; this
// design follows the text and the table) and the drawing names its units ADD, MAX, EXP, DIV,
// MUL plus the VRF and SRF. The SFPE adds biases after the QKV GEMMs, performs the online
// softmax update of streaming attention (max, subtract, exponent, rescale) and the
// normalisation steps of a LayerNorm. SUB and MOV are this design's additions, needed to
// express those kernels, and so is RSQRT (1/sqrt|a|), which the Normalize step needs and no
// drawn unit provides.
//
// Instruction (instr_valid, one cycle): vd <- op(VRF[vs1], B) with B = SRF[vs2] broadcast to
// every lane when `scal` is set, else VRF[vs2]. EXP and RSQRT use only VRF[vs1]; MOV copies B. All
// lanes execute in parallel and the result is written at the next clock edge, so an
// instruction may use the previous one's result in the following cycle.
// Load port: writes WORD_LANES lanes (one shared-memory word) of register ld_reg at word
// position ld_word. Read port: the whole register rd_reg, combinationally. SRF write port:
// s_we/s_idx/s_data. Register counts (8 + 8) are this design's choice; the paper gives none.
// Lint note: verilator reports rst_n as used both synchronously and asynchronously
// (SYNCASYNCNET). The synchronous use is only the `disable iff (!rst_n)` of the
// assertions; in the logic rst_n is purely an asynchronous reset.
module sfpe
  import chime_pkg::*;
#(
  parameter int unsigned LANES      = 256,
  parameter int unsigned WORD_LANES = 4,
  parameter int unsigned NVREG      = 8,
  parameter int unsigned NSREG      = 8,
  localparam int unsigned NWORDS    = LANES / WORD_LANES,
  localparam int unsigned WAW       = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // instruction
  input  logic                   instr_valid,
  input  sfpe_op_e               op,
  input  logic [2:0]             vd,
  input  logic [2:0]             vs1,
  input  logic [2:0]             vs2,
  input  logic                   scal,
  // VRF load port (from shared memory)
  input  logic                   ld_we,
  input  logic [2:0]             ld_reg,
  input  logic [WAW-1:0]         ld_word,
  input  fp16_t [WORD_LANES-1:0] ld_data,
  // VRF read port (to shared memory / reducer)
  input  logic [2:0]             rd_reg,
  output fp16_t [LANES-1:0]      rd_vec,
  // SRF write port (from reducer / immediate)
  input  logic                   s_we,
  input  logic [2:0]             s_idx,
  input  fp16_t                  s_data,
  output fp16_t [NSREG-1:0]      srf_out
);
  fp16_t [LANES-1:0] vrf [NVREG];
  fp16_t [NSREG-1:0] srf;
  fp16_t [LANES-1:0] res;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      fp16_t a, b;
      a = vrf[vs1[$clog2(NVREG)-1:0]][i];
      b = scal ? srf[vs2[$clog2(NSREG)-1:0]] : vrf[vs2[$clog2(NVREG)-1:0]][i];
      unique case (op)
        SF_ADD:  res[i] = fp16_add(a, b);
        SF_SUB:  res[i] = fp16_sub(a, b);
        SF_MUL:  res[i] = fp16_mul(a, b);
        SF_MAX:  res[i] = fp16_max(a, b);
        SF_EXP:  res[i] = fp16_exp(a);
        SF_DIV:  res[i] = fp16_div(a, b);
        SF_RSQRT: res[i] = fp16_rsqrt(a);
        default: res[i] = b;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (instr_valid) vrf[vd[$clog2(NVREG)-1:0]] <= res;
    if (ld_we)
      for (int w = 0; w < WORD_LANES; w++)
        vrf[ld_reg[$clog2(NVREG)-1:0]][ld_word*WORD_LANES + w] <= ld_data[w];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) srf <= '0;
    else if (s_we) srf[s_idx[$clog2(NSREG)-1:0]] <= s_data;
  end

  assign rd_vec  = vrf[rd_reg[$clog2(NVREG)-1:0]];
  assign srf_out = srf;

  a_no_ld_conflict: assert property (@(posedge clk) disable iff (!rst_n)
                                     !(instr_valid && ld_we && vd == ld_reg));
endmodule
