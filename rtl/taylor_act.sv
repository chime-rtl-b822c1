// taylor_act: the pipelined Taylor-series activation unit of an RRAM processing unit.
//
// The RRAM PU has no SFPE; the figure of its PU shows a "Pipelined Taylor Series
// Approximation" block next to the shared memory, and the fused FFN kernel applies an
// activation (ACT) between its two GEMMs. The paper names neither the activation nor the
// series. This design uses SiLU, x * sigmoid(x) = x / (1 + exp(-x)), the activation of the
// Qwen2 and LLaMA backbones of the evaluated models, and computes exp(-x) with the
// package's range-reduced Taylor polynomial of 2^f (coefficients ln2^k/k!).
// Pipeline, LANES values per beat, one beat per cycle:
//   stage 1  z = exp(-x)      stage 2  d = 1 + z      stage 3  y = x / d
// out_valid/out_data follow in_valid/in_data by exactly 3 cycles.
module taylor_act
  import chime_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  fp16_t [LANES-1:0] in_data,
  output logic              out_valid,
  output fp16_t [LANES-1:0] out_data
);
  logic [2:0]        v;
  fp16_t [LANES-1:0] x1, z1, x2, d2, y3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      x1 <= '0; z1 <= '0; x2 <= '0; d2 <= '0; y3 <= '0;
    end else begin
      v <= {v[1:0], in_valid};
      for (int i = 0; i < LANES; i++) begin
        x1[i] <= in_data[i];
        z1[i] <= fp16_exp(fp16_neg(in_data[i]));
        x2[i] <= x1[i];
        d2[i] <= fp16_add(FP16_ONE, z1[i]);
        y3[i] <= fp16_div(x2[i], d2[i]);
      end
    end
  end

  assign out_valid = v[2];
  assign out_data  = y3;
endmodule
