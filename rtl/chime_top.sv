// chime_top: the two near-memory logic dies of the accelerator and the link between them.
//
// The package pairs a monolithic-3D DRAM stack and a monolithic-3D RRAM stack, each on a logic
// die with near-memory processors, joined by a UCIe die-to-die link. The DRAM die runs every
// kernel except the feed-forward network (QKV projection, streaming attention with online
// softmax, normalisation) on N_DPU processing units with 4-multiplier PEs and a 256-lane SFPE;
// the RRAM die runs the fused FFN on N_RPU processing units with 16-multiplier PEs and a
// Taylor-series activation unit, fed by eight RRAM layer controllers (two PUs each). The only
// cross-chiplet traffic is AttnOut (DRAM -> RRAM) and FFNOut (RRAM -> DRAM), moved by one DMA
// engine. Two dispatchers take the host's per-die command streams and enforce the step order
// of the two-cut-point pipeline.
//
// Ports: two host command streams (valid/ready, chime_pkg::host_cmd_t), the per-channel port
// of the DRAM bank arrays (one dram_arr_req_t and its 64-bit read data per DRAM PU) and the
// per-segment port of the RRAM arrays (eight controllers x 16 segments, 512-bit data). The
// memory arrays themselves are process-specific macros and stay outside. Status outputs
// count steps, cut points, synchronisation stalls and memory events.
// RRAM address map seen by an RRAM PU (256-bit words): word w is half w[0] of 512-bit line
// w[20:1] of its controller; stores must come in (even, odd) pairs, the even half is held
// until the odd one arrives and the line is written once (write-once use of the RRAM).
// Lint note: verilator reports rst_n as used both synchronously and asynchronously
// (SYNCASYNCNET). The synchronous use is only the `disable iff (!rst_n)` of the
// assertions; in the logic rst_n is purely an asynchronous reset.
module chime_top
  import chime_pkg::*;
#(
  parameter int unsigned N_DPU     = 16,
  parameter int unsigned N_RPU     = 16,
  parameter int unsigned N_PE      = 16,
  parameter int unsigned LANES     = 256,
  parameter int unsigned MRF_ROWS  = 64,
  parameter int unsigned D_SHM     = 2560,   // 20 KB of 64-bit words
  parameter int unsigned R_SHM     = 2560,   // 80 KB of 256-bit words
  parameter int unsigned D_DB      = 512,    // 1 KB of FP16
  parameter int unsigned R_DB      = 4096,   // 8 KB of FP16
  parameter int unsigned DRAM_ROWS = 6400,   // 200 Mb bank / 32 Kb row
  parameter int unsigned N_SEG     = 16,
  parameter int unsigned LINK_LAT  = 4,
  localparam int unsigned N_RCTRL  = N_RPU / 2,
  localparam int unsigned DW       = 64,
  localparam int unsigned RW       = 256,
  localparam int unsigned DNW      = (N_DPU > 1) ? $clog2(N_DPU) : 1,
  localparam int unsigned RNW      = (N_RPU > 1) ? $clog2(N_RPU) : 1,
  localparam int unsigned DFLIT    = DNW + 16 + DW,
  localparam int unsigned RFLIT    = RNW + 16 + RW
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // host command streams
  input  logic                                  dcmd_valid,
  input  host_cmd_t                             dcmd,
  output logic                                  dcmd_ready,
  input  logic                                  rcmd_valid,
  input  host_cmd_t                             rcmd,
  output logic                                  rcmd_ready,
  // M3D DRAM bank arrays, one port per channel
  output dram_arr_req_t [N_DPU-1:0]             dram_arr,
  input  logic [N_DPU-1:0][63:0]                dram_arr_rdata,
  // M3D RRAM segments, per controller
  output rram_seg_req_t [N_RCTRL-1:0][N_SEG-1:0] rram_seg,
  input  logic [N_RCTRL-1:0][N_SEG-1:0][511:0]  rram_seg_rdata,
  // status
  output logic                                  idle,
  output logic [31:0]                           attn_out_cnt,
  output logic [31:0]                           ffn_out_cnt,
  output logic [31:0]                           dram_stall_cnt,
  output logic [31:0]                           rram_stall_cnt,
  output logic [31:0]                           row_hit_cnt,
  output logic [31:0]                           row_miss_cnt,
  output logic [31:0]                           db_swap_cnt,
  output logic [31:0]                           ring_flit_cnt,
  output logic [31:0]                           rram_write_cnt,
  output logic [31:0]                           link_word_cnt
);
  // ================================================================ dispatchers and DMA
  logic [N_DPU-1:0] dpu_valid, dpu_ready, dpu_done;
  logic [N_RPU-1:0] rpu_valid, rpu_ready, rpu_done;
  pu_cmd_t          dpu_cmd, rpu_cmd;
  logic             d_dma_req, r_dma_req, d_dma_gnt, r_dma_gnt, d_idle, r_idle;
  dma_cmd_t         d_dma_cmd, r_dma_cmd;
  logic             dma_busy, dma_done, dma_start, dma_owner_d, dma_owner_r, dma_last_to_dram;
  dma_cmd_t         dma_cmd;
  logic [31:0]      d_cmds, r_cmds;

  stream_dispatch #(.N_PU(N_DPU)) u_ddisp (
    .clk, .rst_n, .hvalid(dcmd_valid), .hcmd(dcmd), .hready(dcmd_ready),
    .sync_ok(attn_out_cnt == ffn_out_cnt),
    .pu_valid(dpu_valid), .pu_cmd(dpu_cmd), .pu_ready(dpu_ready),
    .dma_req(d_dma_req), .dma_cmd(d_dma_cmd), .dma_gnt(d_dma_gnt), .dma_done(dma_done && dma_owner_d),
    .idle(d_idle), .stall_cnt(dram_stall_cnt), .cmd_cnt(d_cmds)
  );

  stream_dispatch #(.N_PU(N_RPU)) u_rdisp (
    .clk, .rst_n, .hvalid(rcmd_valid), .hcmd(rcmd), .hready(rcmd_ready),
    .sync_ok(attn_out_cnt > ffn_out_cnt),
    .pu_valid(rpu_valid), .pu_cmd(rpu_cmd), .pu_ready(rpu_ready),
    .dma_req(r_dma_req), .dma_cmd(r_dma_cmd), .dma_gnt(r_dma_gnt), .dma_done(dma_done && dma_owner_r),
    .idle(r_idle), .stall_cnt(rram_stall_cnt), .cmd_cnt(r_cmds)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dma_last_to_dram <= 1'b0;
    else if (dma_start) dma_last_to_dram <= dma_cmd.to_dram;
  end

  // one DMA engine, DRAM-side requests first
  assign d_dma_gnt = d_dma_req && !dma_busy && !dma_owner_d && !dma_owner_r;
  assign r_dma_gnt = r_dma_req && !d_dma_req && !dma_busy && !dma_owner_d && !dma_owner_r;
  assign dma_start = d_dma_gnt || r_dma_gnt;
  assign dma_cmd   = d_dma_gnt ? d_dma_cmd : r_dma_cmd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dma_owner_d <= 1'b0; dma_owner_r <= 1'b0; attn_out_cnt <= '0; ffn_out_cnt <= '0;
    end else begin
      if (d_dma_gnt) dma_owner_d <= 1'b1;
      if (r_dma_gnt) dma_owner_r <= 1'b1;
      if (dma_done) begin
        dma_owner_d <= 1'b0;
        dma_owner_r <= 1'b0;
        if (dma_last_to_dram) ffn_out_cnt  <= ffn_out_cnt + 1;
        else                  attn_out_cnt <= attn_out_cnt + 1;
      end
    end
  end

  logic              dd_en, dd_we, rd_en, rd_we;
  logic [4:0]        dd_pu, rd_pu;
  logic [15:0]       dd_addr, rd_addr;
  logic [DW-1:0]     dd_wdata, dd_rdata;
  logic [RW-1:0]     rd_wdata, rd_rdata;

  ucie_dma #(.LINK_LAT(LINK_LAT), .SMALL_W(DW), .BIG_W(RW)) u_dma (
    .clk, .rst_n, .start(dma_start), .cmd(dma_cmd), .busy(dma_busy), .done(dma_done),
    .d_en(dd_en), .d_we(dd_we), .d_pu(dd_pu), .d_addr(dd_addr), .d_wdata(dd_wdata), .d_rdata(dd_rdata),
    .r_en(rd_en), .r_we(rd_we), .r_pu(rd_pu), .r_addr(rd_addr), .r_wdata(rd_wdata), .r_rdata(rd_rdata),
    .words_moved(link_word_cnt)
  );

  assign idle = d_idle && r_idle && !dma_busy && (&dpu_ready) && (&rpu_ready);

  // ================================================================ DRAM die
  logic [N_DPU-1:0][DFLIT-1:0] d_ring_flit;
  logic [N_DPU-1:0]            d_ring_valid;
  logic [N_DPU-1:0][DW-1:0]    d_ext_rdata;
  logic [N_DPU-1:0][31:0]      d_hits, d_miss, d_swaps, d_rx;

  for (genvar p = 0; p < N_DPU; p++) begin : g_dpu
    logic          mreq_v, mreq_r, mreq_we, mrsp_v;
    logic [31:0]   mreq_a;
    logic [DW-1:0] mreq_d, mrsp_d;
    logic [2:0]    tier_unused;

    nmp_pu #(
      .IS_DRAM(1'b1), .N_PE(N_PE), .N_MAC(4), .MRF_ROWS(MRF_ROWS), .DB_WORDS(D_DB),
      .SHM_WORDS(D_SHM), .LANES(LANES), .N_PU(N_DPU), .PU_ID(p)
    ) u_pu (
      .clk, .rst_n,
      .cmd_valid(dpu_valid[p]), .cmd(dpu_cmd), .cmd_ready(dpu_ready[p]), .done(dpu_done[p]),
      .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_we(mreq_we),
      .mem_req_addr(mreq_a), .mem_req_wdata(mreq_d),
      .mem_rsp_valid(mrsp_v), .mem_rsp_data(mrsp_d),
      .ring_in_valid(d_ring_valid[(p + N_DPU - 1) % N_DPU]),
      .ring_in_flit (d_ring_flit[(p + N_DPU - 1) % N_DPU]),
      .ring_out_valid(d_ring_valid[p]), .ring_out_flit(d_ring_flit[p]),
      .ext_en(dd_en && dd_pu == 5'(p)), .ext_we(dd_we), .ext_addr(dd_addr), .ext_wdata(dd_wdata),
      .ext_rdata(d_ext_rdata[p]),
      .swap_cnt(d_swaps[p]), .ring_rx_cnt(d_rx[p])
    );

    dram_chan_ctrl #(.ROWS(DRAM_ROWS)) u_chan (
      .clk, .rst_n,
      .req_valid(mreq_v), .req_ready(mreq_r), .req_we(mreq_we), .req_addr(mreq_a),
      .req_wdata(mreq_d), .rsp_valid(mrsp_v), .rsp_data(mrsp_d),
      .arr(dram_arr[p]), .arr_rdata(dram_arr_rdata[p]),
      .hit_cnt(d_hits[p]), .miss_cnt(d_miss[p]), .last_tier(tier_unused)
    );
  end

  // ================================================================ RRAM die
  logic [N_RPU-1:0][RFLIT-1:0] r_ring_flit;
  logic [N_RPU-1:0]            r_ring_valid;
  logic [N_RPU-1:0][RW-1:0]    r_ext_rdata;
  logic [N_RPU-1:0][31:0]      r_swaps, r_rx;
  logic [N_RCTRL-1:0][31:0]    r_wr;

  // per-PU port of its layer controller
  logic [N_RPU-1:0]            c_req_v, c_req_r, c_req_we, c_rsp_v;
  logic [N_RPU-1:0][19:0]      c_req_a;
  logic [N_RPU-1:0][511:0]     c_req_d, c_rsp_d;

  for (genvar p = 0; p < N_RPU; p++) begin : g_rpu
    logic          mreq_v, mreq_r, mreq_we, mrsp_v;
    logic [31:0]   mreq_a;
    logic [RW-1:0] mreq_d, mrsp_d;
    logic          half, local_ack;
    logic [RW-1:0] hold;

    nmp_pu #(
      .IS_DRAM(1'b0), .N_PE(N_PE), .N_MAC(16), .MRF_ROWS(MRF_ROWS), .DB_WORDS(R_DB),
      .SHM_WORDS(R_SHM), .LANES(LANES), .N_PU(N_RPU), .PU_ID(p)
    ) u_pu (
      .clk, .rst_n,
      .cmd_valid(rpu_valid[p]), .cmd(rpu_cmd), .cmd_ready(rpu_ready[p]), .done(rpu_done[p]),
      .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_we(mreq_we),
      .mem_req_addr(mreq_a), .mem_req_wdata(mreq_d),
      .mem_rsp_valid(mrsp_v), .mem_rsp_data(mrsp_d),
      .ring_in_valid(r_ring_valid[(p + N_RPU - 1) % N_RPU]),
      .ring_in_flit (r_ring_flit[(p + N_RPU - 1) % N_RPU]),
      .ring_out_valid(r_ring_valid[p]), .ring_out_flit(r_ring_flit[p]),
      .ext_en(rd_en && rd_pu == 5'(p)), .ext_we(rd_we), .ext_addr(rd_addr), .ext_wdata(rd_wdata),
      .ext_rdata(r_ext_rdata[p]),
      .swap_cnt(r_swaps[p]), .ring_rx_cnt(r_rx[p])
    );

    // 256-bit PU words onto 512-bit RRAM lines
    assign c_req_v[p]  = mreq_v && !(mreq_we && !mreq_a[0]);
    assign c_req_we[p] = mreq_we;
    assign c_req_a[p]  = mreq_a[20:1];
    assign c_req_d[p]  = {mreq_d, hold};
    assign mreq_r      = (mreq_we && !mreq_a[0]) ? 1'b1 : c_req_r[p];
    assign mrsp_v      = c_rsp_v[p] || local_ack;
    assign mrsp_d      = half ? c_rsp_d[p][511:256] : c_rsp_d[p][255:0];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        half <= 1'b0; hold <= '0; local_ack <= 1'b0;
      end else begin
        local_ack <= 1'b0;
        if (mreq_v && mreq_r) half <= mreq_a[0];
        if (mreq_v && mreq_we && !mreq_a[0]) begin
          hold      <= mreq_d;
          local_ack <= 1'b1;
        end
      end
    end
  end

  for (genvar c = 0; c < N_RCTRL; c++) begin : g_rctrl
    rram_mem_ctrl #(.NPORT(2), .N_SEG(N_SEG)) u_ctrl (
      .clk, .rst_n,
      .req_valid(c_req_v[2*c +: 2]), .req_ready(c_req_r[2*c +: 2]), .req_we(c_req_we[2*c +: 2]),
      .req_addr (c_req_a[2*c +: 2]), .req_wdata(c_req_d[2*c +: 2]),
      .rsp_valid(c_rsp_v[2*c +: 2]), .rsp_data(c_rsp_d[2*c +: 2]),
      .seg(rram_seg[c]), .seg_rdata(rram_seg_rdata[c]), .wr_cnt(r_wr[c])
    );
  end

  // ================================================================ DMA read data and counters
  logic [4:0] dd_pu_q, rd_pu_q;
  always_ff @(posedge clk) begin
    dd_pu_q <= dd_pu;
    rd_pu_q <= rd_pu;
  end
  assign dd_rdata = d_ext_rdata[dd_pu_q[DNW-1:0]];
  assign rd_rdata = r_ext_rdata[rd_pu_q[RNW-1:0]];

  always_comb begin
    row_hit_cnt = '0; row_miss_cnt = '0; db_swap_cnt = '0; ring_flit_cnt = '0;
    rram_write_cnt = '0;
    for (int p = 0; p < N_DPU; p++) begin
      row_hit_cnt   += d_hits[p];
      row_miss_cnt  += d_miss[p];
      db_swap_cnt   += d_swaps[p];
      ring_flit_cnt += d_rx[p];
    end
    for (int p = 0; p < N_RPU; p++) begin
      db_swap_cnt   += r_swaps[p];
      ring_flit_cnt += r_rx[p];
    end
    for (int c = 0; c < N_RCTRL; c++) rram_write_cnt += r_wr[c];
  end
endmodule
