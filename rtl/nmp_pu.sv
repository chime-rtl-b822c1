// nmp_pu: a processing unit (PU) of the DRAM or the RRAM near-memory processor.
//
// Each memory channel of either die feeds one PU on the logic die. Following the PU drawings,
// a PU holds a shared memory for activations, a group of N_PE processing elements, a reducer
// and a ring router; the DRAM PU adds the SIMD special-function PE (SFPE) with its vector and
// scalar register files, and the RRAM PU instead has a pipelined Taylor-series activation unit
// (its table lists no SFPE). IS_DRAM selects the flavour. Sizes follow the paper's tables:
// 16 PEs; 2x2 (4) or 4x4 (16) multipliers per PE; shared memory 20 KB (DRAM) or 80 KB (RRAM);
// PE double buffer 1 KB or 8 KB; 256 SFPE lanes. A shared-memory word is one PE beat,
// N_MAC FP16 values (64 bits on the DRAM die, matching its 64-bit channel I/O).
//
// The PU runs one command (chime_pkg::pu_cmd_t) at a time; cmd_ready is high when idle and
// `done` pulses when a command has finished. The paper describes the kernels the PUs run
// (Table "Fused near-memory kernels") but not the PU's command set; these commands are this
// design's decomposition of those kernels into steps:
//   PU_WLOAD   stream `len` rows from the memory channel (address maddr..) into the MRF of
//              PE number `pu`
//   PU_MLOAD   memory channel -> shared memory[dst..]      PU_MSTORE  shared memory -> channel
//   PU_GEMV    broadcast shared-memory words src..src+len-1 to all PEs; PE j forms the dot
//              product with its MRF rows 0..len-1. Results land in the PEs' double buffers,
//              the buffers are swapped and drained: with `sum` the reducer adds the N_PE
//              results into lane 0 of shared memory word dst, otherwise the N_PE results are
//              stored in order at dst.. (N_PE/N_MAC words)
//   PU_VLOAD / PU_VSTORE  shared memory <-> SFPE vector register (LANES/N_MAC words)
//   PU_SFPE    one SFPE instruction             PU_SETS   SRF[vd] <- imm
//   PU_VREDUCE SRF[vd] <- sum or max (sop == SF_MAX) of all lanes of VRF[vs1]
//   PU_ACT     Taylor-unit activation of words src.. into dst.. (pipelined, one word/cycle)
//   PU_SEND    words src.. travel over the ring to PU `pu`, shared memory dst..
// Shared memory port A serves the command datapath; port B takes ring deliveries first, then
// the activation write-back, then the external port (cross-chiplet DMA), which the host must
// not use while traffic for this PU is on the ring (assertion).
// Memory channel port: request/ready handshake, responses in request order, one per request.
// Lint note: verilator reports rst_n as used both synchronously and asynchronously
// (SYNCASYNCNET). The synchronous use is only the `disable iff (!rst_n)` of the
// assertions; in the logic rst_n is purely an asynchronous reset.
module nmp_pu
  import chime_pkg::*;
#(
  parameter bit          IS_DRAM   = 1'b1,
  parameter int unsigned N_PE      = 16,
  parameter int unsigned N_MAC     = 4,
  parameter int unsigned MRF_ROWS  = 64,
  parameter int unsigned DB_WORDS  = 512,
  parameter int unsigned SHM_WORDS = 2560,
  parameter int unsigned LANES     = 256,
  parameter int unsigned N_PU      = 16,
  parameter int unsigned PU_ID     = 0,
  localparam int unsigned WORD_W   = N_MAC * 16,
  localparam int unsigned NW       = (N_PU > 1) ? $clog2(N_PU) : 1,
  localparam int unsigned FLIT_W   = NW + 16 + WORD_W,
  localparam int unsigned SAW      = $clog2(SHM_WORDS),
  localparam int unsigned N_RED    = (IS_DRAM && LANES > N_PE) ? LANES : N_PE
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_valid,
  input  pu_cmd_t           cmd,
  output logic              cmd_ready,
  output logic              done,
  // memory channel
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [31:0]       mem_req_addr,
  output logic [WORD_W-1:0] mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  logic [WORD_W-1:0] mem_rsp_data,
  // ring
  input  logic              ring_in_valid,
  input  logic [FLIT_W-1:0] ring_in_flit,
  output logic              ring_out_valid,
  output logic [FLIT_W-1:0] ring_out_flit,
  // external shared-memory port (cross-chiplet DMA)
  input  logic              ext_en,
  input  logic              ext_we,
  input  logic [15:0]       ext_addr,
  input  logic [WORD_W-1:0] ext_wdata,
  output logic [WORD_W-1:0] ext_rdata,
  // event counters
  output logic [31:0]       swap_cnt,
  output logic [31:0]       ring_rx_cnt
);
  localparam int unsigned MRF_AW = $clog2(MRF_ROWS);
  localparam int unsigned DB_AW  = $clog2(DB_WORDS / 2);
  localparam int unsigned VWORDS = LANES / N_MAC;
  localparam int unsigned PWORDS = (N_PE * 16 + WORD_W - 1) / WORD_W;

  typedef enum logic [4:0] {
    S_IDLE, S_GEMV_RUN, S_GEMV_WAIT, S_GEMV_SETTLE, S_GEMV_RED, S_GEMV_STORE,
    S_VLOAD, S_VSTORE, S_VRED, S_ACT, S_SEND_RD, S_SEND_INJ,
    S_WLOAD, S_MLOAD, S_MSTORE_RD, S_MSTORE_REQ, S_DONE
  } state_e;

  state_e      state;
  pu_cmd_t     c;
  logic [15:0] k;         // issue counter
  logic [15:0] m;         // completion counter
  logic        rd_v;      // shared-memory read data valid this cycle (port A)
  logic [15:0] rd_k;

  // ---------------------------------------------------------------- shared memory
  logic              a_en, a_we;
  logic [SAW-1:0]    a_addr;
  logic [WORD_W-1:0] a_wdata, a_rdata;
  logic              b_en, b_we;
  logic [SAW-1:0]    b_addr;
  logic [WORD_W-1:0] b_wdata, b_rdata;

  nmp_sram #(.WIDTH(WORD_W), .DEPTH(SHM_WORDS)) u_shm (
    .clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata
  );
  assign ext_rdata = b_rdata;

  // ---------------------------------------------------------------- ring router
  logic              inj_valid, inj_ready, ej_valid;
  logic [FLIT_W-1:0] inj_flit;
  logic [15:0]       ej_addr;
  logic [WORD_W-1:0] ej_data;

  ring_router #(.NODES(N_PU), .ID(PU_ID), .DATA_W(WORD_W)) u_router (
    .clk, .rst_n,
    .ring_in_valid, .ring_in_flit, .ring_out_valid, .ring_out_flit,
    .inj_valid, .inj_flit, .inj_ready,
    .ej_valid, .ej_addr, .ej_data
  );

  // ---------------------------------------------------------------- PE group
  logic                       pe_start, pe_act_valid, pe_swap;
  logic [N_PE-1:0]            pe_done, pe_busy, pe_mrf_we, pe_wbank;
  fp16_t [N_PE-1:0]           pe_rd, pe_result;
  logic [MRF_AW-1:0]          mrf_waddr;
  fp16_t [N_MAC-1:0]          mrf_wdata;

  for (genvar j = 0; j < N_PE; j++) begin : g_pe
    nmp_pe #(.N_MAC(N_MAC), .MRF_ROWS(MRF_ROWS), .DB_WORDS(DB_WORDS)) u_pe (
      .clk, .rst_n,
      .mrf_we   (pe_mrf_we[j]),
      .mrf_waddr(mrf_waddr),
      .mrf_wdata(mrf_wdata),
      .start    (pe_start),
      .len      ((MRF_AW+1)'(cmd.len)),   // sampled with pe_start, in S_IDLE
      .out_idx  (DB_AW'(0)),
      .act_valid(pe_act_valid),
      .act_data (a_rdata),
      .busy     (pe_busy[j]),
      .done     (pe_done[j]),
      .result   (pe_result[j]),
      .swap     (pe_swap),
      .rd_addr  (DB_AW'(0)),
      .rd_data  (pe_rd[j]),
      .wbank    (pe_wbank[j])
    );
  end

  // ---------------------------------------------------------------- reducer
  logic              red_in_valid, red_out_valid;
  red_op_e           red_op;
  fp16_t [N_RED-1:0] red_in;
  fp16_t             red_out;

  nmp_reducer #(.N(N_RED)) u_reducer (
    .clk, .rst_n,
    .in_valid (red_in_valid),
    .op       (red_op),
    .in_data  (red_in),
    .out_valid(red_out_valid),
    .out_data (red_out)
  );

  // ---------------------------------------------------------------- SFPE or Taylor unit
  fp16_t [LANES-1:0]      vrd;
  logic                   sf_valid, ld_we, s_we;
  fp16_t                  s_data;
  logic                   act_in_valid, act_out_valid;
  fp16_t [N_MAC-1:0]      act_out;

  if (IS_DRAM) begin : g_sfpe
    fp16_t [7:0] srf_unused;
    sfpe #(.LANES(LANES), .WORD_LANES(N_MAC)) u_sfpe (
      .clk, .rst_n,
      .instr_valid(sf_valid),
      .op         (c.sop),
      .vd         (c.vd),
      .vs1        (c.vs1),
      .vs2        (c.vs2),
      .scal       (c.scal),
      .ld_we      (ld_we),
      .ld_reg     (c.vd),
      .ld_word    ($clog2(VWORDS)'(rd_k)),
      .ld_data    (a_rdata),
      .rd_reg     (c.vs1),
      .rd_vec     (vrd),
      .s_we       (s_we),
      .s_idx      (c.vd),
      .s_data     (s_data),
      .srf_out    (srf_unused)
    );
    assign act_out_valid = 1'b0;
    assign act_out       = '0;
  end else begin : g_taylor
    taylor_act #(.LANES(N_MAC)) u_act (
      .clk, .rst_n,
      .in_valid (act_in_valid),
      .in_data  (a_rdata),
      .out_valid(act_out_valid),
      .out_data (act_out)
    );
    assign vrd = '0;
  end

  // ---------------------------------------------------------------- datapath control
  assign cmd_ready = (state == S_IDLE);

  always_comb begin
    // shared memory port A
    a_en = 1'b0; a_we = 1'b0; a_addr = '0; a_wdata = '0;
    // PE group
    pe_start     = (state == S_IDLE) && cmd_valid && cmd.op == PU_GEMV;
    pe_act_valid = rd_v && (state == S_GEMV_RUN || state == S_GEMV_WAIT);
    pe_swap      = (state == S_GEMV_WAIT) && pe_done[0];
    pe_mrf_we    = '0;
    mrf_waddr    = MRF_AW'(m);
    mrf_wdata    = mem_rsp_data;
    // reducer
    red_in_valid = 1'b0;
    red_op       = RED_SUM;
    red_in       = '0;
    // SFPE / Taylor
    sf_valid     = 1'b0;
    ld_we        = rd_v && state == S_VLOAD;
    s_we         = 1'b0;
    s_data       = red_out;
    act_in_valid = rd_v && state == S_ACT;
    // ring
    inj_valid    = 1'b0;
    inj_flit     = {NW'(c.pu), c.dst + k, a_rdata};
    // memory channel
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = c.maddr + 32'(k);
    mem_req_wdata = a_rdata;

    unique case (state)
      S_GEMV_RUN, S_ACT: if (k < c.len) begin
        a_en = 1'b1; a_addr = SAW'(c.src + k);
      end
      S_VLOAD: if (k < 16'(VWORDS)) begin
        a_en = 1'b1; a_addr = SAW'(c.src + k);
      end
      S_GEMV_RED: begin
        red_in_valid = 1'b1;
        for (int i = 0; i < N_RED; i++) red_in[i] = (i < N_PE) ? pe_rd[i] : FP16_ZERO;
      end
      S_GEMV_STORE: begin
        a_en = 1'b1; a_we = 1'b1;
        if (c.sum) begin
          a_addr  = SAW'(c.dst);
          a_wdata = WORD_W'(red_out);
        end else begin
          a_addr = SAW'(c.dst + k);
          for (int i = 0; i < N_MAC; i++)
            if (int'(k) * N_MAC + i < N_PE) a_wdata[i*16 +: 16] = pe_rd[int'(k) * N_MAC + i];
        end
      end
      S_VSTORE: begin
        a_en = 1'b1; a_we = 1'b1; a_addr = SAW'(c.dst + k);
        a_wdata = vrd[int'(k) * N_MAC +: N_MAC];
      end
      S_VRED: begin
        if (m == 0) begin
          red_in_valid = 1'b1;
          red_op       = (c.sop == SF_MAX) ? RED_MAX : RED_SUM;
          for (int i = 0; i < N_RED; i++) red_in[i] = (i < LANES) ? vrd[i] : FP16_ZERO;
        end
        s_we = red_out_valid;
      end
      S_SEND_RD: begin
        a_en = 1'b1; a_addr = SAW'(c.src + k);
      end
      S_SEND_INJ: inj_valid = 1'b1;
      S_WLOAD, S_MLOAD: begin
        mem_req_valid = (k < c.len);
        if (mem_rsp_valid && state == S_WLOAD) begin
          for (int j = 0; j < N_PE; j++) pe_mrf_we[j] = (j == int'(c.pu));
        end
        if (mem_rsp_valid && state == S_MLOAD) begin
          a_en = 1'b1; a_we = 1'b1; a_addr = SAW'(c.dst + m); a_wdata = mem_rsp_data;
        end
      end
      S_MSTORE_RD: if (k < c.len) begin
        a_en = 1'b1; a_addr = SAW'(c.src + k);
      end
      S_MSTORE_REQ: begin
        mem_req_valid = (k == m);       // one request per word, then wait for its answer
        mem_req_we    = 1'b1;
      end
      default: ;
    endcase
    if (state == S_DONE && c.op == PU_SFPE) sf_valid = 1'b1;
    if (state == S_DONE && c.op == PU_SETS) begin s_we = 1'b1; s_data = c.imm; end
  end

  // shared memory port B: ring delivery, then activation write-back, then external port
  always_comb begin
    b_en = 1'b0; b_we = 1'b0; b_addr = '0; b_wdata = '0;
    if (ej_valid) begin
      b_en = 1'b1; b_we = 1'b1; b_addr = SAW'(ej_addr); b_wdata = ej_data;
    end else if (act_out_valid) begin
      b_en = 1'b1; b_we = 1'b1; b_addr = SAW'(c.dst + m); b_wdata = act_out;
    end else if (ext_en) begin
      b_en = 1'b1; b_we = ext_we; b_addr = SAW'(ext_addr); b_wdata = ext_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; k <= '0; m <= '0; rd_v <= 1'b0; rd_k <= '0;
      done <= 1'b0; swap_cnt <= '0; ring_rx_cnt <= '0;
    end else begin
      done <= 1'b0;
      rd_v <= a_en && !a_we;
      rd_k <= k;
      if (pe_swap) swap_cnt <= swap_cnt + 1;
      if (ej_valid) ring_rx_cnt <= ring_rx_cnt + 1;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; k <= '0; m <= '0;
          unique case (cmd.op)
            PU_GEMV:    state <= S_GEMV_RUN;
            PU_VLOAD:   state <= IS_DRAM ? S_VLOAD : S_DONE;
            PU_VSTORE:  state <= IS_DRAM ? S_VSTORE : S_DONE;
            PU_VREDUCE: state <= IS_DRAM ? S_VRED : S_DONE;
            PU_ACT:     state <= IS_DRAM ? S_DONE : S_ACT;
            PU_SEND:    state <= (cmd.len == 0) ? S_DONE : S_SEND_RD;
            PU_WLOAD:   state <= S_WLOAD;
            PU_MLOAD:   state <= S_MLOAD;
            PU_MSTORE:  state <= (cmd.len == 0) ? S_DONE : S_MSTORE_RD;
            default:    state <= S_DONE;     // NOP, SFPE, SETS finish in S_DONE
          endcase
        end
        S_GEMV_RUN: begin
          k <= k + 1'b1;
          if (k == c.len - 1) state <= S_GEMV_WAIT;
        end
        S_GEMV_WAIT: if (pe_done[0]) begin
          k <= '0; m <= '0;
          state <= S_GEMV_SETTLE;
        end
        S_GEMV_SETTLE: begin
          // the swapped read bank appears on the PEs' rd_data two cycles after the swap
          m <= m + 1'b1;
          if (m == 1) state <= c.sum ? S_GEMV_RED : S_GEMV_STORE;
        end
        S_GEMV_RED: state <= S_GEMV_STORE;
        S_GEMV_STORE: begin
          k <= k + 1'b1;
          if (c.sum || k == 16'(PWORDS - 1)) state <= S_DONE;
        end
        S_VLOAD: begin
          if (k < 16'(VWORDS)) k <= k + 1'b1;
          if (rd_v && rd_k == 16'(VWORDS - 1)) state <= S_DONE;
        end
        S_VSTORE: begin
          k <= k + 1'b1;
          if (k == 16'(VWORDS - 1)) state <= S_DONE;
        end
        S_VRED: begin
          m <= m + 1'b1;
          if (red_out_valid) state <= S_DONE;
        end
        S_ACT: begin
          if (k < c.len) k <= k + 1'b1;
          if (act_out_valid) begin
            m <= m + 1'b1;
            if (m == c.len - 1) state <= S_DONE;
          end
        end
        S_SEND_RD: state <= S_SEND_INJ;
        S_SEND_INJ: if (inj_ready) begin
          k <= k + 1'b1;
          state <= (k == c.len - 1) ? S_DONE : S_SEND_RD;
        end
        S_WLOAD, S_MLOAD: begin
          if (mem_req_valid && mem_req_ready) k <= k + 1'b1;
          if (mem_rsp_valid) begin
            m <= m + 1'b1;
            if (m == c.len - 1) state <= S_DONE;
          end
          if (c.len == 0) state <= S_DONE;
        end
        S_MSTORE_RD: state <= S_MSTORE_REQ;
        S_MSTORE_REQ: begin
          if (mem_req_valid && mem_req_ready) k <= k + 1'b1;
          if (mem_rsp_valid) begin
            m <= m + 1'b1;
            if (m == c.len - 1) state <= S_DONE;
            else state <= S_MSTORE_RD;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_port_b_loss: assert property (@(posedge clk) disable iff (!rst_n)
                                     ej_valid |-> !(act_out_valid || ext_en));
endmodule
