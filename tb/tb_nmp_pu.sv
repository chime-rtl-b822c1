// tb_nmp_pu: self-checking test of a processing unit in both flavours, at reduced size
// (4 PEs of 4 multipliers, 16 SFPE lanes, 2-node ring, 256-word shared memory).
//  DRAM flavour (dut_d): a memory-channel model with random back-pressure and a fixed
//   3-cycle answer feeds MLOAD/WLOAD; GEMV results (stored and reduced) are compared with a
//   double-precision reference; VLOAD/SFPE/VREDUCE/SETS/VSTORE run a small softmax-style
//   sequence (x * y, x - max(x), 2 * x); SEND is checked at a second ring node, which also
//   sends flits back that must land in the shared memory; MSTORE is checked in the memory.
//  RRAM flavour (dut_r): ACT (Taylor SiLU) over words written through the external port.
// Rates: GEMV and ACT must take exactly one extra cycle per extra shared-memory word, and
// every GEMV must swap the PE double buffers once.
module tb_nmp_pu;
  import chime_pkg::*;
  import tb_fp16_pkg::*;
  localparam int NPE = 4, NMAC = 4, ROWS = 16, DBW = 8, SHM = 256, LN = 16, NPU = 2;
  localparam int W = NMAC * 16, FW = 1 + 16 + W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0, checks = 0, failures = 0;
  always @(posedge clk) cyc++;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ------------------------------------------------------------------ DRAM-flavour PU
  logic d_cmd_valid, d_cmd_ready, d_done;
  pu_cmd_t d_cmd;
  logic mreq_v, mreq_rdy, mreq_we, mrsp_v;
  logic [31:0] mreq_a;
  logic [W-1:0] mreq_wd, mrsp_d;
  logic r0_v, r1_v;
  logic [FW-1:0] r0_f, r1_f;
  logic d_ext_en, d_ext_we;
  logic [15:0] d_ext_addr;
  logic [W-1:0] d_ext_wdata, d_ext_rdata;
  logic [31:0] d_swaps, d_rx;

  nmp_pu #(.IS_DRAM(1), .N_PE(NPE), .N_MAC(NMAC), .MRF_ROWS(ROWS), .DB_WORDS(DBW),
           .SHM_WORDS(SHM), .LANES(LN), .N_PU(NPU), .PU_ID(0)) dut_d (
    .clk, .rst_n, .cmd_valid(d_cmd_valid), .cmd(d_cmd), .cmd_ready(d_cmd_ready), .done(d_done),
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_rdy), .mem_req_we(mreq_we),
    .mem_req_addr(mreq_a), .mem_req_wdata(mreq_wd), .mem_rsp_valid(mrsp_v),
    .mem_rsp_data(mrsp_d),
    .ring_in_valid(r1_v), .ring_in_flit(r1_f), .ring_out_valid(r0_v), .ring_out_flit(r0_f),
    .ext_en(d_ext_en), .ext_we(d_ext_we), .ext_addr(d_ext_addr), .ext_wdata(d_ext_wdata),
    .ext_rdata(d_ext_rdata), .swap_cnt(d_swaps), .ring_rx_cnt(d_rx));

  // second ring node
  logic n1_inj_v, n1_inj_rdy, n1_ej_v;
  logic [FW-1:0] n1_inj_f;
  logic [15:0] n1_ej_a;
  logic [W-1:0] n1_ej_d;
  ring_router #(.NODES(NPU), .ID(1), .DATA_W(W)) node1 (
    .clk, .rst_n, .ring_in_valid(r0_v), .ring_in_flit(r0_f), .ring_out_valid(r1_v),
    .ring_out_flit(r1_f), .inj_valid(n1_inj_v), .inj_flit(n1_inj_f), .inj_ready(n1_inj_rdy),
    .ej_valid(n1_ej_v), .ej_addr(n1_ej_a), .ej_data(n1_ej_d));
  logic [W-1:0] n1_got [int];
  always @(posedge clk) if (n1_ej_v) n1_got[int'(n1_ej_a)] = n1_ej_d;

  // memory-channel model: random ready, answers in order 3 cycles after acceptance
  logic [W-1:0] mem [int];
  typedef struct { int due; logic [W-1:0] d; } rsp_t;
  rsp_t q[$];
  always @(negedge clk) mreq_rdy = ($urandom % 4) != 0;
  always @(posedge clk) begin
    mrsp_v <= 1'b0;
    if (q.size() > 0 && q[0].due <= cyc) begin
      mrsp_v <= 1'b1; mrsp_d <= q[0].d; void'(q.pop_front());
    end
    if (mreq_v && mreq_rdy) begin
      rsp_t r;
      r.due = cyc + 3;
      r.d = mem.exists(int'(mreq_a)) ? mem[int'(mreq_a)] : '0;
      if (mreq_we) mem[int'(mreq_a)] = mreq_wd;
      q.push_back(r);
    end
  end

  // ------------------------------------------------------------------ RRAM-flavour PU
  logic r_cmd_valid, r_cmd_ready, r_done;
  pu_cmd_t r_cmd;
  logic r_ext_en, r_ext_we;
  logic [15:0] r_ext_addr;
  logic [W-1:0] r_ext_wdata, r_ext_rdata;
  logic rr_ov, rr_mv, rr_mwe;
  logic [FW-1:0] rr_of;
  logic [31:0] rr_ma, r_swaps, r_rx;
  logic [W-1:0] rr_mwd;
  nmp_pu #(.IS_DRAM(0), .N_PE(NPE), .N_MAC(NMAC), .MRF_ROWS(ROWS), .DB_WORDS(DBW),
           .SHM_WORDS(SHM), .LANES(LN), .N_PU(NPU), .PU_ID(0)) dut_r (
    .clk, .rst_n, .cmd_valid(r_cmd_valid), .cmd(r_cmd), .cmd_ready(r_cmd_ready), .done(r_done),
    .mem_req_valid(rr_mv), .mem_req_ready(1'b1), .mem_req_we(rr_mwe), .mem_req_addr(rr_ma),
    .mem_req_wdata(rr_mwd), .mem_rsp_valid(1'b0), .mem_rsp_data('0),
    .ring_in_valid(1'b0), .ring_in_flit('0), .ring_out_valid(rr_ov), .ring_out_flit(rr_of),
    .ext_en(r_ext_en), .ext_we(r_ext_we), .ext_addr(r_ext_addr), .ext_wdata(r_ext_wdata),
    .ext_rdata(r_ext_rdata), .swap_cnt(r_swaps), .ring_rx_cnt(r_rx));

  // ------------------------------------------------------------------ helpers
  task automatic run_d(pu_cmd_t c, output int dur);
    int t0;
    @(negedge clk);
    while (!d_cmd_ready) @(negedge clk);
    d_cmd = c; d_cmd_valid = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); d_cmd_valid = 0;
    while (!d_done) @(negedge clk);
    dur = cyc - t0;
  endtask
  task automatic run_r(pu_cmd_t c, output int dur);
    int t0;
    @(negedge clk);
    while (!r_cmd_ready) @(negedge clk);
    r_cmd = c; r_cmd_valid = 1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); r_cmd_valid = 0;
    while (!r_done) @(negedge clk);
    dur = cyc - t0;
  endtask
  task automatic d_rd(int a, output logic [W-1:0] d);
    @(negedge clk); d_ext_en = 1; d_ext_we = 0; d_ext_addr = 16'(a);
    @(negedge clk); d_ext_en = 0; d = d_ext_rdata;
  endtask
  task automatic r_rd(int a, output logic [W-1:0] d);
    @(negedge clk); r_ext_en = 1; r_ext_we = 0; r_ext_addr = 16'(a);
    @(negedge clk); r_ext_en = 0; d = r_ext_rdata;
  endtask
  task automatic r_wr(int a, logic [W-1:0] d);
    @(negedge clk); r_ext_en = 1; r_ext_we = 1; r_ext_addr = 16'(a); r_ext_wdata = d;
    @(negedge clk); r_ext_en = 0; r_ext_we = 0;
  endtask
  function automatic logic [W-1:0] rnd_word(real lo, real hi);
    logic [W-1:0] w;
    for (int i = 0; i < NMAC; i++) w[i*16 +: 16] = r2h(urand(lo, hi));
    return w;
  endfunction
  function automatic pu_cmd_t mk(pu_op_e op);
    pu_cmd_t c = '0;
    c.op = op;
    return c;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog d_state=%0d r_state=%0d k=%0d m=%0d", dut_d.state, dut_r.state, dut_d.k, dut_d.m);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pu_cmd_t c;
    int dur, dur8, dur16;
    logic [W-1:0] w, x [16], v1 [LN/NMAC], v2 [LN/NMAC];
    real res [NPE], tot, mag, totmag, mx;
    d_cmd_valid = 0; r_cmd_valid = 0; d_cmd = '0; r_cmd = '0;
    d_ext_en = 0; d_ext_we = 0; d_ext_addr = '0; d_ext_wdata = '0;
    r_ext_en = 0; r_ext_we = 0; r_ext_addr = '0; r_ext_wdata = '0;
    n1_inj_v = 0; n1_inj_f = '0;
    for (int a = 0; a < 1024; a++) mem[a] = rnd_word(-1.0, 1.0);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- MLOAD: 16 activation words into shared memory 0..15
    c = mk(PU_MLOAD); c.len = 16; c.dst = 0; c.maddr = 100;
    run_d(c, dur);
    for (int i = 0; i < 16; i++) begin
      d_rd(i, x[i]);
      chk(x[i] === mem[100 + i], $sformatf("MLOAD word %0d", i));
    end
    // ---- WLOAD: 16 weight rows per PE
    for (int j = 0; j < NPE; j++) begin
      c = mk(PU_WLOAD); c.len = 16; c.pu = 5'(j); c.maddr = 32'(200 + 16 * j);
      run_d(c, dur);
    end
    // ---- GEMV, stored results (len 16 and len 8) and reduced result
    for (int pass = 0; pass < 3; pass++) begin
      int len;
      len = (pass == 1) ? 8 : 16;
      c = mk(PU_GEMV); c.src = 0; c.len = 16'(len); c.dst = 16'(32 + pass); c.sum = (pass == 2);
      run_d(c, dur);
      if (pass == 0) dur16 = dur;
      if (pass == 1) dur8 = dur;
      tot = 0.0; totmag = 0.0;
      for (int j = 0; j < NPE; j++) begin
        res[j] = 0.0; mag = 0.0;
        for (int r = 0; r < len; r++)
          for (int i = 0; i < NMAC; i++) begin
            real p;
            p = h2r(mem[200 + 16 * j + r][i*16 +: 16]) * h2r(x[r][i*16 +: 16]);
            res[j] += p; mag += rabs(p);
          end
        tot += res[j]; totmag += mag;
        if (pass < 2) begin
          d_rd(32 + pass, w);
          chk(rabs(h2r(w[j*16 +: 16]) - res[j]) <= 0.01 * mag + 0.002,
              $sformatf("GEMV pass %0d PE %0d got %f exp %f", pass, j, h2r(w[j*16 +: 16]), res[j]));
        end
      end
      if (pass == 2) begin
        d_rd(34, w);
        chk(rabs(h2r(w[15:0]) - tot) <= 0.01 * totmag + 0.004,
            $sformatf("GEMV sum got %f exp %f", h2r(w[15:0]), tot));
      end
    end
    chk(dur16 - dur8 == 8, $sformatf("GEMV rate: len16 %0d cycles, len8 %0d", dur16, dur8));
    chk(d_swaps == 3, $sformatf("double-buffer swaps %0d", d_swaps));

    // ---- SFPE: v1 = x[0..3], v2 = x[4..7]; v3 = v1 * v2; v4 = v1 - max(v1); v5 = v1 * 2
    c = mk(PU_VLOAD); c.src = 0; c.vd = 1; run_d(c, dur);
    c = mk(PU_VLOAD); c.src = 4; c.vd = 2; run_d(c, dur);
    c = mk(PU_SFPE); c.sop = SF_MUL; c.vd = 3; c.vs1 = 1; c.vs2 = 2; run_d(c, dur);
    c = mk(PU_VSTORE); c.vs1 = 3; c.dst = 40; run_d(c, dur);
    c = mk(PU_VREDUCE); c.sop = SF_MAX; c.vs1 = 1; c.vd = 0; run_d(c, dur);
    c = mk(PU_SFPE); c.sop = SF_SUB; c.vd = 4; c.vs1 = 1; c.vs2 = 0; c.scal = 1; run_d(c, dur);
    c = mk(PU_VSTORE); c.vs1 = 4; c.dst = 48; run_d(c, dur);
    c = mk(PU_SETS); c.vd = 5; c.imm = 16'h4000; run_d(c, dur);
    c = mk(PU_SFPE); c.sop = SF_MUL; c.vd = 5; c.vs1 = 1; c.vs2 = 5; c.scal = 1; run_d(c, dur);
    c = mk(PU_VSTORE); c.vs1 = 5; c.dst = 56; run_d(c, dur);
    mx = -100.0;
    for (int i = 0; i < LN; i++) if (h2r(x[i / NMAC][(i % NMAC)*16 +: 16]) > mx)
      mx = h2r(x[i / NMAC][(i % NMAC)*16 +: 16]);
    for (int wd = 0; wd < LN / NMAC; wd++) begin
      logic [W-1:0] a, b, e;
      d_rd(40 + wd, a); d_rd(48 + wd, b); d_rd(56 + wd, e);
      for (int i = 0; i < NMAC; i++) begin
        real xv, yv;
        xv = h2r(x[wd][i*16 +: 16]); yv = h2r(x[4 + wd][i*16 +: 16]);
        chk(rabs(h2r(a[i*16 +: 16]) - xv * yv) <= 0.001 * rabs(xv * yv) + 1e-4, "SFPE mul");
        chk(rabs(h2r(b[i*16 +: 16]) - (xv - mx)) <= 0.001 * rabs(xv - mx) + 1e-3, "SFPE x-max");
        chk(h2r(e[i*16 +: 16]) == 2.0 * xv, "SFPE scalar mul");
      end
    end

    // ---- SEND 8 words to PU 1 (the second ring node)
    c = mk(PU_SEND); c.src = 0; c.len = 8; c.dst = 100; c.pu = 1; run_d(c, dur);
    repeat (4) @(negedge clk);
    for (int i = 0; i < 8; i++)
      chk(n1_got.exists(100 + i) && n1_got[100 + i] === x[i], $sformatf("SEND word %0d", i));
    // ---- the second node sends 6 words back into shared memory 200..205
    for (int i = 0; i < 6; i++) begin
      @(negedge clk);
      n1_inj_v = 1; n1_inj_f = {1'b0, 16'(200 + i), mem[300 + i]};
      @(posedge clk);
      while (!n1_inj_rdy) @(posedge clk);
      @(negedge clk); n1_inj_v = 0;
    end
    repeat (4) @(negedge clk);
    chk(d_rx == 6, $sformatf("ring deliveries %0d", d_rx));
    for (int i = 0; i < 6; i++) begin
      d_rd(200 + i, w); chk(w === mem[300 + i], $sformatf("ring receive word %0d", i));
    end
    // ---- MSTORE shared memory 200..205 to channel address 600..
    c = mk(PU_MSTORE); c.src = 200; c.len = 6; c.maddr = 600; run_d(c, dur);
    for (int i = 0; i < 6; i++) chk(mem[600 + i] === mem[300 + i], $sformatf("MSTORE %0d", i));

    // ---- RRAM flavour: ACT over 16 words, then over 8 words
    for (int i = 0; i < 16; i++) begin x[i] = rnd_word(-6.0, 6.0); r_wr(i, x[i]); end
    c = mk(PU_ACT); c.src = 0; c.len = 16; c.dst = 32; run_r(c, dur16);
    c = mk(PU_ACT); c.src = 0; c.len = 8; c.dst = 64; run_r(c, dur8);
    chk(dur16 - dur8 == 8, $sformatf("ACT rate: len16 %0d cycles, len8 %0d", dur16, dur8));
    for (int i = 0; i < 16; i++) begin
      r_rd(32 + i, w);
      for (int l = 0; l < NMAC; l++) begin
        real xv, s;
        xv = h2r(x[i][l*16 +: 16]);
        s = xv / (1.0 + $exp(-xv));
        chk(rabs(h2r(w[l*16 +: 16]) - s) <= 0.01 * rabs(s) + 0.003,
            $sformatf("ACT x=%f got %f exp %f", xv, h2r(w[l*16 +: 16]), s));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
