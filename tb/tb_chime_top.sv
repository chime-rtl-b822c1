// tb_chime_top: end-to-end self-checking test of chime_top at reduced size (2 + 2 PUs, 4 PEs, 16 SFPE lanes).
// Two decoding steps run through both dies with behavioural DRAM channel and RRAM segment
// models. DRAM die, per step: MLOAD of the input and score blocks (first step), WLOAD of
// projection weights from two rows in different DRAM tiers, GEMV, a two-block online softmax
// on the SFPE (running max, rescale by exp(m1 - m2), running sum, divide), a ring SEND from
// PU 0 to PU 1 and the AttnOut transfer to the RRAM die. RRAM die, per step: waits for
// AttnOut, WLOAD from RRAM, GEMV, Taylor SiLU, an MSTORE pair that writes one RRAM line, and
// the FFNOut transfer back, which the DRAM die's next step waits for. Results are compared
// with a double-precision reference, and the run fails if any mechanism (row hit, row miss,
// two DRAM tiers, double-buffer swap, ring delivery, SFPE softmax, Taylor activation, both cut
// points, stalls on both dies, RRAM write, die-to-die words) never happened.
// The program and the per-step mechanism counts follow the decoding dataflow of the design;
// the layer sizes, data values and the two-step length are this test's own choice. Sizes
// (ND, NR, NPE, LN, DROWS) are localparams at the top; the whole run is bounded by WATCHDOG cycles.
module tb_chime_top;
  import chime_pkg::*;
  import tb_fp16_pkg::*;
  localparam int ND = 2;
  localparam int NR = 2;
  localparam int NPE = 4;
  localparam int LN = 16;
  localparam int DROWS = 64;
  localparam int WATCHDOG = 200000;
  localparam int NCH = ND;                  // DRAM channels = DRAM PUs
  localparam int NRC = NR / 2;              // RRAM layer controllers
  localparam int VW  = LN / 4;              // 64-bit words per SFPE vector
  localparam int QA  = 16;                  // shared-memory word of score block A
  localparam int QB  = QA + VW;             // score block B
  localparam int PO  = QA + 2 * VW;         // softmax output (2*VW words)
  localparam int SD  = PO + 2 * VW;         // SEND destination on PU 1
  localparam int RROWS = VW / 2;            // RRAM GEMV rows (256-bit) = AttnOut size
  localparam int RH  = RROWS + (RROWS % 2); // RRAM word of h (even), activation at RH+1
  localparam int TPR = DROWS / 5;           // DRAM rows per tier
  localparam int W1ROW = 3 * TPR;           // step-1 weights live in the fourth tier
  localparam int STEPS = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0, checks = 0, failures = 0;
  always @(posedge clk) cyc++;

  logic dcmd_valid, dcmd_ready, rcmd_valid, rcmd_ready, idle;
  host_cmd_t dcmd, rcmd;
  dram_arr_req_t [NCH-1:0] dram_arr;
  logic [NCH-1:0][63:0] dram_arr_rdata;
  rram_seg_req_t [NRC-1:0][15:0] rram_seg;
  logic [NRC-1:0][15:0][511:0] rram_seg_rdata;
  logic [31:0] attn_out_cnt, ffn_out_cnt, dram_stall_cnt, rram_stall_cnt, row_hit_cnt,
               row_miss_cnt, db_swap_cnt, ring_flit_cnt, rram_write_cnt, link_word_cnt;

  chime_top #(.N_DPU(ND), .N_RPU(NR), .N_PE(NPE), .LANES(LN), .MRF_ROWS(16), .D_SHM(256),
              .R_SHM(256), .D_DB(8), .R_DB(8), .DRAM_ROWS(DROWS)) dut (.*);

  // initial array contents, copied into every channel / controller model on `load_ev`
  logic [63:0]  dinit [int];                // DRAM bank 0: row * 512 + column
  logic [511:0] rinit [int];                // RRAM segment 1: line
  event         load_ev;
  logic [NCH-1:0] bad_flag;

  for (genvar p = 0; p < NCH; p++) begin : g_dm
    m3d_dram_array_model u_m (.clk, .arr(dram_arr[p]), .arr_rdata(dram_arr_rdata[p]));
    always @(load_ev) foreach (dinit[a]) u_m.poke(4'd0, 16'(a / 512), 9'(a % 512), dinit[a]);
    always @(posedge clk) bad_flag[p] <= (u_m.bad_access != 0);
  end
  for (genvar c = 0; c < NRC; c++) begin : g_rc
    for (genvar s = 0; s < 16; s++) begin : g_seg
      m3d_rram_seg_model #(.SEG_ID(s)) u_m (.clk, .req(rram_seg[c][s]), .rdata(rram_seg_rdata[c][s]));
      if (s == 1) begin : g_init
        always @(load_ev) foreach (rinit[a]) u_m.poke(16'(a), rinit[a]);
      end
    end
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // tiers touched by row activations (all channels)
  bit tier_seen [5];
  int sfpe_issued = 0, act_issued = 0;
  always @(posedge clk) begin
    for (int p = 0; p < NCH; p++)
      if (dram_arr[p].act) tier_seen[(int'(dram_arr[p].row) / TPR > 4) ? 4 : int'(dram_arr[p].row) / TPR] = 1;
    if (|dut.dpu_valid && dut.dpu_cmd.op == PU_SFPE) sfpe_issued++;
    if (|dut.rpu_valid && dut.rpu_cmd.op == PU_ACT) act_issued++;
  end

  // ------------------------------------------------------------------ host command streams
  host_cmd_t dq[$], rq[$];
  always @(posedge clk) begin
    if (rst_n && dcmd_valid && dcmd_ready) void'(dq.pop_front());
    if (rst_n && rcmd_valid && rcmd_ready) void'(rq.pop_front());
  end
  always_comb begin
    dcmd_valid = rst_n && dq.size() > 0; dcmd = (dq.size() > 0) ? dq[0] : '0;
    rcmd_valid = rst_n && rq.size() > 0; rcmd = (rq.size() > 0) ? rq[0] : '0;
  end

  function automatic host_cmd_t pc(pu_op_e op, int mask);
    host_cmd_t h = '0;
    h.kind = HC_PU; h.mask = 16'(mask); h.cmd.op = op;
    return h;
  endfunction
  function automatic host_cmd_t sf(sfpe_op_e sop, int vd, int vs1, int vs2, bit scal);
    host_cmd_t h = pc(PU_SFPE, (1 << NCH) - 1);
    h.cmd.sop = sop; h.cmd.vd = 3'(vd); h.cmd.vs1 = 3'(vs1); h.cmd.vs2 = 3'(vs2); h.cmd.scal = scal;
    return h;
  endfunction
  function automatic host_cmd_t vred(bit is_max, int vd, int vs1);
    host_cmd_t h = pc(PU_VREDUCE, (1 << NCH) - 1);
    h.cmd.sop = is_max ? SF_MAX : SF_ADD; h.cmd.vd = 3'(vd); h.cmd.vs1 = 3'(vs1);
    return h;
  endfunction

  // ------------------------------------------------------------------ reference data
  real x0 [32 + 4 * 2 * VW * 0 + 32];       // not used beyond 32 entries
  real xin [STEPS+1][32];                   // GEMV input of each step
  real wq [STEPS][16][32];                  // DRAM weights: step, PE, 32 values
  real sc [4 * 2 * VW];                     // score blocks as loaded (entries 0..N_PE-1 replaced by q)
  real w2 [16][2 * LN];                     // RRAM weights: PE, 2*LANES values
  real pr [STEPS][4 * 2 * VW], hr [STEPS][16];

  function automatic real silu(real v);
    return v / (1.0 + $exp(-v));
  endfunction
  function automatic real h16(real v);       // round a reference value to FP16
    return h2r(r2h(v));
  endfunction

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    $display("FAIL watchdog (attn %0d ffn %0d, queues %0d %0d)", attn_out_cnt, ffn_out_cnt, dq.size(), rq.size());
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_cmd_t h;
    logic [63:0] wd;
    logic [511:0] line;
    int allm_d = (1 << NCH) - 1, allm_r = (1 << NR) - 1;
    // ---------------- data: x and scores at DRAM word 0.., weights at rows 1 and W1ROW
    for (int a = 0; a < QA + 2 * VW; a++) begin
      for (int i = 0; i < 4; i++) wd[i*16 +: 16] = r2h(urand(-1.0, 1.0));
      dinit[a] = wd;
      for (int i = 0; i < 4; i++) begin
        if (a < 8) xin[0][4*a + i] = h2r(wd[i*16 +: 16]);
        if (a >= QA) sc[4*(a - QA) + i] = h2r(wd[i*16 +: 16]);
      end
    end
    for (int t = 0; t < STEPS; t++)
      for (int j = 0; j < NPE; j++)
        for (int r = 0; r < 8; r++) begin
          for (int i = 0; i < 4; i++) begin
            wd[i*16 +: 16] = r2h(urand(-0.5, 0.5));
            wq[t][j][4*r + i] = h2r(wd[i*16 +: 16]);
          end
          dinit[((t == 0) ? 1 : W1ROW) * 512 + 8 * j + r] = wd;
        end
    // RRAM weights: segment 1, line j*RROWS/2 + l holds rows 2l and 2l+1 of PE j
    for (int j = 0; j < NPE; j++)
      for (int l = 0; l < RROWS / 2; l++) begin
        for (int i = 0; i < 32; i++) begin
          line[i*16 +: 16] = r2h(urand(-0.5, 0.5));
          w2[j][32*l + i] = h2r(line[i*16 +: 16]);
        end
        rinit[j * RROWS / 2 + l] = line;
      end

    // ---------------- DRAM stream
    h = pc(PU_MLOAD, allm_d); h.cmd.len = 16'(QA + 2 * VW); h.cmd.maddr = 0; dq.push_back(h);
    for (int t = 0; t < STEPS; t++) begin
      for (int j = 0; j < NPE; j++) begin
        h = pc(PU_WLOAD, allm_d); h.cmd.len = 8; h.cmd.pu = 5'(j);
        h.cmd.maddr = 32'(((t == 0) ? 1 : W1ROW) * 512 + 8 * j);
        h.sync = (t > 0 && j == 0);           // Attention(t) waits for FFNOut(t-1)
        dq.push_back(h);
      end
      h = pc(PU_GEMV, allm_d); h.cmd.src = 0; h.cmd.len = 8; h.cmd.dst = QA; dq.push_back(h);
      // online softmax over two blocks of LN scores
      h = pc(PU_VLOAD, allm_d); h.cmd.src = QA; h.cmd.vd = 1; dq.push_back(h);
      h = pc(PU_VLOAD, allm_d); h.cmd.src = QB; h.cmd.vd = 5; dq.push_back(h);
      dq.push_back(vred(1, 0, 1));             // s0 = m1 = max(A)
      dq.push_back(sf(SF_SUB, 2, 1, 0, 1));    // v2 = A - m1
      dq.push_back(sf(SF_EXP, 3, 2, 0, 0));    // v3 = exp(A - m1)
      dq.push_back(vred(1, 2, 5));             // s2 = max(B)
      dq.push_back(sf(SF_MOV, 6, 0, 2, 1));    // v6 = max(B)
      dq.push_back(sf(SF_MAX, 6, 6, 0, 1));    // v6 = m2 = max(m1, max(B))
      dq.push_back(vred(1, 3, 6));             // s3 = m2
      dq.push_back(sf(SF_MOV, 7, 0, 0, 1));    // v7 = m1
      dq.push_back(sf(SF_SUB, 7, 7, 3, 1));    // v7 = m1 - m2
      dq.push_back(sf(SF_EXP, 7, 7, 0, 0));    // v7 = c = exp(m1 - m2)
      dq.push_back(vred(1, 4, 7));             // s4 = c
      dq.push_back(sf(SF_MUL, 3, 3, 4, 1));    // rescale block A by c
      dq.push_back(sf(SF_SUB, 2, 5, 3, 1));    // v2 = B - m2
      dq.push_back(sf(SF_EXP, 2, 2, 0, 0));    // v2 = exp(B - m2)
      dq.push_back(sf(SF_ADD, 6, 3, 2, 0));    // v6 = v3 + v2
      dq.push_back(vred(0, 5, 6));             // s5 = running sum l
      dq.push_back(sf(SF_DIV, 3, 3, 5, 1));
      dq.push_back(sf(SF_DIV, 2, 2, 5, 1));
      h = pc(PU_VSTORE, allm_d); h.cmd.vs1 = 3; h.cmd.dst = PO; dq.push_back(h);
      h = pc(PU_VSTORE, allm_d); h.cmd.vs1 = 2; h.cmd.dst = PO + VW; dq.push_back(h);
      // PU 0 shares its result with PU 1 over the ring
      h = pc(PU_SEND, 1); h.cmd.src = PO; h.cmd.len = 16'(2 * VW); h.cmd.dst = SD; h.cmd.pu = 1;
      dq.push_back(h);
      // cut point 1: AttnOut to the RRAM die
      h = '0; h.kind = HC_DMA; h.dma.to_dram = 0; h.dma.d_pu = 0; h.dma.d_addr = PO;
      h.dma.r_pu = 0; h.dma.r_addr = 0; h.dma.n = 16'(2 * VW); dq.push_back(h);
    end
    // ---------------- RRAM stream
    for (int t = 0; t < STEPS; t++) begin
      for (int j = 0; j < NPE; j++) begin
        h = pc(PU_WLOAD, allm_r); h.cmd.len = 16'(RROWS); h.cmd.pu = 5'(j);
        h.cmd.maddr = 32'((1 << 17) + RROWS * j);
        h.sync = (j == 0);                    // FFN(t) waits for AttnOut(t)
        rq.push_back(h);
      end
      h = pc(PU_GEMV, allm_r); h.cmd.src = 0; h.cmd.len = 16'(RROWS); h.cmd.dst = RH; rq.push_back(h);
      h = pc(PU_ACT, allm_r); h.cmd.src = RH; h.cmd.len = 1; h.cmd.dst = RH + 1; rq.push_back(h);
      h = pc(PU_MSTORE, 1); h.cmd.src = RH; h.cmd.len = 2; h.cmd.maddr = 32'((2 << 17) + 2 * t);
      rq.push_back(h);
      // cut point 2: FFNOut back to the DRAM die
      h = '0; h.kind = HC_DMA; h.dma.to_dram = 1; h.dma.d_pu = 0; h.dma.d_addr = 0;
      h.dma.r_pu = 0; h.dma.r_addr = 16'(RH + 1); h.dma.n = 4; rq.push_back(h);
    end

    // ---------------- reference model (double precision, FP16 rounding at stage outputs)
    for (int t = 0; t < STEPS; t++) begin
      real m, l, v [4 * 2 * VW];
      for (int i = 0; i < 4 * 2 * VW; i++) v[i] = sc[i];
      for (int j = 0; j < NPE; j++) begin
        v[j] = 0.0;
        for (int i = 0; i < 32; i++) v[j] += wq[t][j][i] * xin[t][i];
        v[j] = h16(v[j]);
      end
      m = -1.0e9; l = 0.0;
      for (int i = 0; i < 4 * 2 * VW; i++) if (v[i] > m) m = v[i];
      for (int i = 0; i < 4 * 2 * VW; i++) l += $exp(v[i] - m);
      for (int i = 0; i < 4 * 2 * VW; i++) pr[t][i] = $exp(v[i] - m) / l;
      for (int j = 0; j < NPE; j++) begin
        hr[t][j] = 0.0;
        for (int i = 0; i < 2 * LN; i++) hr[t][j] += w2[j][i] * pr[t][i];
      end
      for (int i = 0; i < 32; i++) xin[t+1][i] = xin[t][i];
      for (int i = 0; i < 16; i++) xin[t+1][i] = (i < NPE) ? h16(silu(h16(hr[t][i]))) : 0.0;
    end

    @(negedge clk);
    -> load_ev;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (ffn_out_cnt == STEPS && dq.size() == 0 && rq.size() == 0);
    repeat (5) @(negedge clk);
    while (!idle) @(negedge clk);

    // ---------------- results of the last step on the DRAM die
    for (int i = 0; i < 4 * 2 * VW; i++) begin
      real g;
      g = h2r(dut.g_dpu[0].u_pu.u_shm.mem[PO + i / 4][(i % 4) * 16 +: 16]);
      chk(rabs(g - pr[STEPS-1][i]) <= 0.03 * pr[STEPS-1][i] + 0.002,
          $sformatf("softmax prob %0d got %f exp %f", i, g, pr[STEPS-1][i]));
    end
    for (int a = 0; a < 2 * VW; a++)
      chk(dut.g_dpu[1].u_pu.u_shm.mem[SD + a] === dut.g_dpu[0].u_pu.u_shm.mem[PO + a],
          $sformatf("ring SEND word %0d", a));
    // AttnOut of the last step in the RRAM PU
    for (int a = 0; a < 2 * VW; a++)
      chk(dut.g_rpu[0].u_pu.u_shm.mem[a / 4][(a % 4) * 64 +: 64] === dut.g_dpu[0].u_pu.u_shm.mem[PO + a],
          $sformatf("AttnOut word %0d", a));
    // FFN results of both steps as stored in the RRAM (segment 2, line t = {act, h})
    for (int t = 0; t < STEPS; t++) begin
      chk(g_rc[0].g_seg[2].u_m.mem.exists(16'(t)), $sformatf("RRAM line of step %0d", t));
      line = g_rc[0].g_seg[2].u_m.mem[16'(t)];
      for (int j = 0; j < NPE; j++) begin
        real gh, ga;
        gh = h2r(line[j*16 +: 16]); ga = h2r(line[256 + j*16 +: 16]);
        chk(rabs(gh - hr[t][j]) <= 0.03 * rabs(hr[t][j]) + 0.01,
            $sformatf("step %0d FFN h[%0d] got %f exp %f", t, j, gh, hr[t][j]));
        chk(rabs(ga - silu(hr[t][j])) <= 0.03 * rabs(silu(hr[t][j])) + 0.01,
            $sformatf("step %0d act[%0d] got %f exp %f", t, j, ga, silu(hr[t][j])));
      end
    end
    // FFNOut of the last step back in the DRAM PU
    for (int i = 0; i < 16; i++) begin
      real g;
      g = h2r(dut.g_dpu[0].u_pu.u_shm.mem[i / 4][(i % 4) * 16 +: 16]);
      chk(rabs(g - xin[STEPS][i]) <= 0.03 * rabs(xin[STEPS][i]) + 0.01,
          $sformatf("FFNOut value %0d got %f exp %f", i, g, xin[STEPS][i]));
    end

    // ---------------- every mechanism must have happened
    $display("attn_out=%0d ffn_out=%0d stalls d/r=%0d/%0d row hit/miss=%0d/%0d swaps=%0d ring=%0d rram_wr=%0d link=%0d cycles=%0d",
             attn_out_cnt, ffn_out_cnt, dram_stall_cnt, rram_stall_cnt, row_hit_cnt, row_miss_cnt,
             db_swap_cnt, ring_flit_cnt, rram_write_cnt, link_word_cnt, cyc);
    chk(attn_out_cnt == STEPS, "AttnOut cut point count");
    chk(ffn_out_cnt == STEPS, "FFNOut cut point count");
    chk(dram_stall_cnt > 0, "DRAM die never waited for FFNOut");
    chk(rram_stall_cnt > 0, "RRAM die never waited for AttnOut");
    chk(row_hit_cnt > 0, "no DRAM row-buffer hit");
    chk(row_miss_cnt > 0, "no DRAM row-buffer miss");
    chk(tier_seen[0] && tier_seen[3], "DRAM tiers 1 and 4 not both activated");
    chk(db_swap_cnt == STEPS * (ND + NR), $sformatf("double-buffer swaps %0d", db_swap_cnt));
    chk(ring_flit_cnt == STEPS * 2 * VW, "ring deliveries");
    chk(rram_write_cnt == STEPS, $sformatf("RRAM line writes %0d", rram_write_cnt));
    chk(link_word_cnt == STEPS * (2 * VW + 4), "die-to-die words");
    chk(sfpe_issued == STEPS * 13, "SFPE instructions");
    chk(act_issued == STEPS, "Taylor activations");
    chk(bad_flag == '0, "closed-row DRAM access");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
