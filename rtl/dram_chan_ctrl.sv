// dram_chan_ctrl: access controller of one M3D DRAM channel (one per processing unit).
//
// A channel has 16 banks; each bank keeps one open row in its 32 Kb row buffer and delivers
// 64-bit columns (the channel's data I/O width). The paper gives the access latency of the
// 200-layer stack as (3 + 0.8*L) ns, where L numbers the five in-memory tiers L1..L5 from the
// fastest (bottom) one; the mapping software places hot KV-cache blocks in the bottom tier.
// This controller turns that into cycles at CLK_PS: a row miss activates the row and waits
// ceil((3000 + 800*L) / CLK_PS) cycles, with the tier taken from the row address (the 6400
// rows of a 200 Mb bank split evenly into five tiers); a row hit waits HIT_CYC cycles
// (1, this design's choice). The bank arrays themselves are a process-specific macro outside
// this module; the controller drives their port (dram_arr_req_t) and reads arr_rdata one
// cycle after a column read. A request is answered HIT_CYC + 3 cycles (row hit) or
// tier latency + 3 cycles (activation) after the cycle in which it is accepted.
//
// Request port: req_valid/req_ready handshake, one request at a time. Address word layout
// (this design's choice): col = addr[8:0], row = addr[24:9], bank = addr[28:25], so
// consecutive addresses walk along one open row. Each request, read or write, is answered by
// one rsp_valid pulse (with rsp_data for reads). hit_cnt and miss_cnt count row hits and
// activations.
module dram_chan_ctrl
  import chime_pkg::*;
#(
  parameter int unsigned N_BANK  = 16,
  parameter int unsigned ROWS    = 6400,
  parameter int unsigned TIERS   = 5,
  parameter int unsigned CLK_PS  = 1000,
  parameter int unsigned HIT_CYC = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [31:0]   req_addr,
  input  logic [63:0]   req_wdata,
  output logic          rsp_valid,
  output logic [63:0]   rsp_data,
  output dram_arr_req_t arr,
  input  logic [63:0]   arr_rdata,
  output logic [31:0]   hit_cnt,
  output logic [31:0]   miss_cnt,
  output logic [2:0]    last_tier
);
  localparam int unsigned ROWS_PER_TIER = ROWS / TIERS;

  // activation latency in cycles of tier t (0-based, so L = t + 1)
  function automatic logic [7:0] tier_cycles(int t);
    int ps;
    ps = 3000 + 800 * (t + 1);
    return 8'((ps + CLK_PS - 1) / CLK_PS);
  endfunction

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_COL, S_DATA} state_e;
  state_e state;

  logic [15:0] open_row [N_BANK];
  logic [N_BANK-1:0] open_valid;

  logic [3:0]  bank;
  logic [15:0] row;
  logic [8:0]  col;
  logic        we;
  logic [63:0] wdata;
  logic [7:0]  cnt;

  logic [3:0]  in_bank;
  logic [15:0] in_row;
  logic        in_hit;
  int          in_tier;

  always_comb begin
    in_bank = req_addr[28:25];
    in_row  = req_addr[24:9];
    in_hit  = open_valid[in_bank] && open_row[in_bank] == in_row;
    in_tier = int'(in_row) / ROWS_PER_TIER;
    if (in_tier > TIERS - 1) in_tier = TIERS - 1;
  end

  assign req_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      open_valid <= '0;
      bank <= '0; row <= '0; col <= '0; we <= 1'b0; wdata <= '0; cnt <= '0;
      rsp_valid  <= 1'b0;
      rsp_data   <= '0;
      arr        <= '0;
      hit_cnt    <= '0;
      miss_cnt   <= '0;
      last_tier  <= '0;
      for (int b = 0; b < N_BANK; b++) open_row[b] <= '0;
    end else begin
      rsp_valid <= 1'b0;
      arr.act   <= 1'b0;
      arr.rd    <= 1'b0;
      arr.wr    <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          bank  <= in_bank;
          row   <= in_row;
          col   <= req_addr[8:0];
          we    <= req_we;
          wdata <= req_wdata;
          state <= S_WAIT;
          if (in_hit) begin
            hit_cnt <= hit_cnt + 1;
            cnt     <= 8'(HIT_CYC);
          end else begin
            miss_cnt  <= miss_cnt + 1;
            last_tier <= 3'(in_tier);
            cnt       <= tier_cycles(in_tier);
            open_valid[in_bank] <= 1'b1;
            open_row[in_bank]   <= in_row;
            arr.act  <= 1'b1;
            arr.bank <= in_bank;
            arr.row  <= in_row;
          end
        end
        S_WAIT: begin
          if (cnt <= 8'd1) state <= S_COL;
          cnt <= cnt - 1'b1;
        end
        S_COL: begin
          arr.bank  <= bank;
          arr.row   <= row;
          arr.col   <= col;
          arr.wdata <= wdata;
          arr.rd    <= !we;
          arr.wr    <= we;
          state     <= S_DATA;
        end
        S_DATA: begin
          // the array answers a column read one cycle after it sees arr.rd
          if (!(arr.rd || arr.wr)) begin
            rsp_valid <= 1'b1;
            rsp_data  <= we ? 64'd0 : arr_rdata;
            state     <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
