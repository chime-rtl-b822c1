// nmp_reducer: the reducer of a processing unit.
//
// The paper places a reducer between the PE group and the shared memory of every PU (DRAM and
// RRAM) and names it only. Here it is a balanced binary tree of FP16 adders or FP16
// max units that reduces N values to one: SUM combines partial dot products of the 16 PEs
// when a dot product is split across them, MAX gives the row maximum for the online softmax.
// Interface: in_valid/op/in_data in one cycle; out_valid/out_data one cycle later (the tree is
// combinational, its result is registered). N must be a power of two; unused inputs should be
// driven with 0 for SUM and with negative infinity for MAX.
module nmp_reducer
  import chime_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  red_op_e         op,
  input  fp16_t [N-1:0]   in_data,
  output logic            out_valid,
  output fp16_t           out_data
);
  localparam int unsigned LEVELS = $clog2(N);

  fp16_t tree [LEVELS+1][N];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < N; i++) tree[l][i] = FP16_ZERO;
    for (int i = 0; i < N; i++) tree[0][i] = in_data[i];
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < (N >> l); i++)
        tree[l][i] = (op == RED_MAX) ? fp16_max(tree[l-1][2*i], tree[l-1][2*i+1])
                                     : fp16_add(tree[l-1][2*i], tree[l-1][2*i+1]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= FP16_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= tree[LEVELS][0];
    end
  end
endmodule
