// rram_mem_ctrl: controller of one M3D RRAM layer.
//
// The RRAM die has eight controllers, one per RRAM layer, each serving a pair of processing
// units and 16 memory segments (channels) through M3D vertical connections; the segment
// interface has a 20-bit address and 512-bit read and write data paths. Read and write
// latencies of the array are 2.3 ns and 11 ns. This controller accepts one request at a time
// from each of its NPORT PUs, decodes the 20-bit address as {segment[3:0], word[15:0]} (this
// design's choice), and lets requests to different segments proceed in parallel while a
// segment with an access in flight is held busy. When two ports want a free segment in the
// same cycle, a round-robin pointer decides. Latencies in cycles at CLK_PS are
// ceil(2300/CLK_PS) = 3 for reads and ceil(11000/CLK_PS) = 11 for writes at 1 GHz.
//
// Per port: req_valid/req_ready handshake; rsp_valid is high LAT+3 cycles after the cycle in
// which the request was accepted (rsp_data valid for reads). The segment port (rram_seg_req_t) is driven for one
// cycle at the end of the latency; a read's data is taken from seg_rdata one cycle later.
// wr_cnt counts writes per controller, for endurance accounting by the host.
module rram_mem_ctrl
  import chime_pkg::*;
#(
  parameter int unsigned NPORT  = 2,
  parameter int unsigned N_SEG  = 16,
  parameter int unsigned CLK_PS = 1000,
  localparam int unsigned RD_LAT = (2300 + CLK_PS - 1) / CLK_PS,
  localparam int unsigned WR_LAT = (11000 + CLK_PS - 1) / CLK_PS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NPORT-1:0]          req_valid,
  output logic [NPORT-1:0]          req_ready,
  input  logic [NPORT-1:0]          req_we,
  input  logic [NPORT-1:0][19:0]    req_addr,
  input  logic [NPORT-1:0][511:0]   req_wdata,
  output logic [NPORT-1:0]          rsp_valid,
  output logic [NPORT-1:0][511:0]   rsp_data,
  output rram_seg_req_t [N_SEG-1:0] seg,
  input  logic [N_SEG-1:0][511:0]   seg_rdata,
  output logic [31:0]               wr_cnt
);
  typedef enum logic [1:0] {P_IDLE, P_WAIT, P_ACC, P_RD} pstate_e;

  pstate_e                 st   [NPORT];
  logic [7:0]              cnt  [NPORT];
  logic [3:0]              pseg [NPORT];
  logic [15:0]             pwrd [NPORT];
  logic                    pwe  [NPORT];
  logic [511:0]            pdat [NPORT];
  logic [N_SEG-1:0]        busy;
  logic [$clog2(NPORT > 1 ? NPORT : 2)-1:0] rr;
  logic [NPORT-1:0]        grant;

  // arbitration: a request wins if its segment is free and no higher-priority request
  // (in round-robin order starting at rr) asks for the same segment this cycle
  always_comb begin
    logic [N_SEG-1:0] taken;
    taken = busy;
    grant = '0;
    for (int k = 0; k < NPORT; k++) begin
      int p;
      p = (int'(rr) + k) % NPORT;
      if (st[p] == P_IDLE && req_valid[p] && !taken[req_addr[p][19:16]]) begin
        grant[p] = 1'b1;
        taken[req_addr[p][19:16]] = 1'b1;
      end
    end
  end
  assign req_ready = grant;

  // writes reaching the array this cycle
  logic [31:0] n_wr;
  always_comb begin
    n_wr = '0;
    for (int p = 0; p < NPORT; p++) if (st[p] == P_ACC && pwe[p]) n_wr = n_wr + 1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= '0;
      rr        <= '0;
      rsp_valid <= '0;
      rsp_data  <= '0;
      for (int s = 0; s < N_SEG; s++) seg[s] <= '0;
      wr_cnt    <= '0;
      for (int p = 0; p < NPORT; p++) begin
        st[p] <= P_IDLE; cnt[p] <= '0; pseg[p] <= '0; pwrd[p] <= '0; pwe[p] <= 1'b0;
        pdat[p] <= '0;
      end
    end else begin
      rsp_valid <= '0;
      for (int s = 0; s < N_SEG; s++) seg[s].en <= 1'b0;
      if (|grant) rr <= rr + 1'b1;
      wr_cnt <= wr_cnt + n_wr;
      for (int p = 0; p < NPORT; p++) begin
        unique case (st[p])
          P_IDLE: if (grant[p]) begin
            pseg[p] <= req_addr[p][19:16];
            pwrd[p] <= req_addr[p][15:0];
            pwe[p]  <= req_we[p];
            pdat[p] <= req_wdata[p];
            cnt[p]  <= 8'(req_we[p] ? WR_LAT : RD_LAT);
            busy[req_addr[p][19:16]] <= 1'b1;
            st[p]   <= P_WAIT;
          end
          P_WAIT: begin
            cnt[p] <= cnt[p] - 1'b1;
            if (cnt[p] <= 8'd2) st[p] <= P_ACC;
          end
          P_ACC: begin
            seg[pseg[p]].en    <= 1'b1;
            seg[pseg[p]].we    <= pwe[p];
            seg[pseg[p]].addr  <= pwrd[p];
            seg[pseg[p]].wdata <= pdat[p];
            st[p] <= P_RD;
          end
          P_RD: begin
            // seg[].en is seen by the array at the end of this cycle; data arrives next
            st[p] <= P_RD;
            if (!seg[pseg[p]].en) begin
              rsp_valid[p] <= 1'b1;
              rsp_data[p]  <= pwe[p] ? 512'd0 : seg_rdata[pseg[p]];
              busy[pseg[p]] <= 1'b0;
              st[p] <= P_IDLE;
            end
          end
          default: st[p] <= P_IDLE;
        endcase
      end
    end
  end
endmodule
