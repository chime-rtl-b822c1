// nmp_pe: processing element of the DRAM and RRAM near-memory processors.
//
// Following the PE drawings of both processing units, a PE holds a matrix register file
// (MRF) of weights, a row of multipliers feeding an adder tree, an accumulator, a
// double-buffered result memory and a local controller. The tables give the multiplier count
// as a 2x2 tensor core on the DRAM die (N_MAC = 4) and a 4x4 tensor core on the RRAM die
// (N_MAC = 16); the drawings print MUL*16 and ADD*8 for both, which matches the RRAM PE, so the
// DRAM PE here is the same structure with 4 multipliers (this design's reading of the
// two sources). The double-buffered memory is 1 KB (DRAM) or 8 KB (RRAM) of FP16 results, split
// in two banks: results are written into one bank while the other is read out, and `swap`
// exchanges them, so moving one tile's results out overlaps computing the next tile.
//
// Operation (one dot product per pass): pulse `start` with `len` and `out_idx`. The PE then
// takes `len` beats on act_valid/act_data (N_MAC FP16 activations per beat). Beat k is
// multiplied element-wise with MRF row k, the products are summed by the adder tree and
// added to the accumulator. When the last beat has been accumulated, the sum is written into
// the write bank at `out_idx`, `result` holds it and `done` pulses. Beats may have gaps.
// Timing: products and tree sum are registered one cycle after a beat, accumulation happens
// the next cycle, and `done` rises two cycles after the last beat. The read port returns the
// read bank's word one cycle after rd_addr. The MRF size is not given in the paper
// (MRF_ROWS is this design's choice).
// Lint note: verilator reports rst_n as used both synchronously and asynchronously
// (SYNCASYNCNET). The synchronous use is only the `disable iff (!rst_n)` of the
// assertions; in the logic rst_n is purely an asynchronous reset.
module nmp_pe
  import chime_pkg::*;
#(
  parameter int unsigned N_MAC    = 4,
  parameter int unsigned MRF_ROWS = 64,
  parameter int unsigned DB_WORDS = 512,
  localparam int unsigned MRF_AW  = $clog2(MRF_ROWS),
  localparam int unsigned DB_AW   = $clog2(DB_WORDS / 2),
  localparam int unsigned LEVELS  = $clog2(N_MAC)
) (
  input  logic                clk,
  input  logic                rst_n,
  // MRF write port
  input  logic                mrf_we,
  input  logic [MRF_AW-1:0]   mrf_waddr,
  input  fp16_t [N_MAC-1:0]   mrf_wdata,
  // control
  input  logic                start,
  input  logic [MRF_AW:0]     len,
  input  logic [DB_AW-1:0]    out_idx,
  input  logic                act_valid,
  input  fp16_t [N_MAC-1:0]   act_data,
  output logic                busy,
  output logic                done,
  output fp16_t               result,
  // double-buffered result memory
  input  logic                swap,
  input  logic [DB_AW-1:0]    rd_addr,
  output fp16_t               rd_data,
  output logic                wbank
);
  fp16_t [N_MAC-1:0] mrf [MRF_ROWS];
  fp16_t             db  [2][DB_WORDS/2];

  logic [MRF_AW:0]   row, remaining;
  logic [DB_AW-1:0]  idx;
  fp16_t             acc;
  fp16_t             psum;
  logic              psum_v, psum_last;
  fp16_t             tree [LEVELS+1][N_MAC];

  always_ff @(posedge clk) begin
    if (mrf_we) mrf[mrf_waddr] <= mrf_wdata;
  end

  // multipliers and adder tree
  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < N_MAC; i++) tree[l][i] = FP16_ZERO;
    for (int i = 0; i < N_MAC; i++)
      tree[0][i] = fp16_mul(act_data[i], mrf[row[MRF_AW-1:0]][i]);
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < (N_MAC >> l); i++)
        tree[l][i] = fp16_add(tree[l-1][2*i], tree[l-1][2*i+1]);
  end

  // local controller
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      row       <= '0;
      remaining <= '0;
      idx       <= '0;
      acc       <= FP16_ZERO;
      psum      <= FP16_ZERO;
      psum_v    <= 1'b0;
      psum_last <= 1'b0;
      result    <= FP16_ZERO;
      wbank     <= 1'b0;
    end else begin
      done   <= 1'b0;
      psum_v <= 1'b0;
      if (swap) wbank <= ~wbank;
      if (start) begin
        busy      <= 1'b1;
        row       <= '0;
        remaining <= len;
        idx       <= out_idx;
        acc       <= FP16_ZERO;
      end else if (busy && act_valid && remaining != '0) begin
        psum      <= tree[LEVELS][0];
        psum_v    <= 1'b1;
        psum_last <= (remaining == 1);
        row       <= row + 1'b1;
        remaining <= remaining - 1'b1;
      end
      if (psum_v) begin
        if (psum_last) begin
          result <= fp16_add(acc, psum);
          acc    <= FP16_ZERO;
          busy   <= 1'b0;
          done   <= 1'b1;
        end else begin
          acc <= fp16_add(acc, psum);
        end
      end
    end
  end

  // double-buffered result memory
  always_ff @(posedge clk) begin
    if (psum_v && psum_last) db[wbank][idx] <= fp16_add(acc, psum);
    rd_data <= db[~wbank][rd_addr];
  end

  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  a_len_fits: assert property (@(posedge clk) disable iff (!rst_n)
                               start |-> (len != 0 && int'(len) <= MRF_ROWS));
endmodule
