// tb_nmp_pe: self-checking test of the processing element in both configurations, the DRAM
// PE (4 multipliers, 1 KB double buffer) and the RRAM PE (16 multipliers, 8 KB). For each, the
// MRF is loaded with random FP16 weights, random activation beats are streamed (with gaps)
// and the dot product is compared with a double-precision reference. It checks that `done`
// rises two cycles after the last beat, that results land in the write bank and become
// readable after `swap`, and that a second pass writes the other bank while the first
// pass's result stays readable (the double-buffer overlap).
module tb_nmp_pe;
  import chime_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0, checks = 0, failures = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ DRAM PE (N_MAC = 4)
  `define PE_SIGS(P, N, DBW) \
  logic P``_mrf_we, P``_start, P``_act_valid, P``_busy, P``_done, P``_swap, P``_wbank; \
  logic [5:0] P``_mrf_waddr; logic [6:0] P``_len; \
  logic [$clog2(DBW/2)-1:0] P``_out_idx, P``_rd_addr; \
  fp16_t [N-1:0] P``_mrf_wdata, P``_act_data; fp16_t P``_result, P``_rd_data;

  `PE_SIGS(d, 4, 512)
  `PE_SIGS(r, 16, 4096)

  nmp_pe #(.N_MAC(4), .MRF_ROWS(64), .DB_WORDS(512)) dut_d (
    .clk, .rst_n, .mrf_we(d_mrf_we), .mrf_waddr(d_mrf_waddr), .mrf_wdata(d_mrf_wdata),
    .start(d_start), .len(d_len), .out_idx(d_out_idx), .act_valid(d_act_valid), .act_data(d_act_data),
    .busy(d_busy), .done(d_done), .result(d_result), .swap(d_swap), .rd_addr(d_rd_addr),
    .rd_data(d_rd_data), .wbank(d_wbank));
  nmp_pe #(.N_MAC(16), .MRF_ROWS(64), .DB_WORDS(4096)) dut_r (
    .clk, .rst_n, .mrf_we(r_mrf_we), .mrf_waddr(r_mrf_waddr), .mrf_wdata(r_mrf_wdata),
    .start(r_start), .len(r_len), .out_idx(r_out_idx), .act_valid(r_act_valid), .act_data(r_act_data),
    .busy(r_busy), .done(r_done), .result(r_result), .swap(r_swap), .rd_addr(r_rd_addr),
    .rd_data(r_rd_data), .wbank(r_wbank));

  task automatic check_close(real got, real exp, real mag, string what);
    checks++;
    if (rabs(got - exp) > 0.01 * mag + 0.01) begin
      failures++; $display("FAIL %s got %f exp %f", what, got, exp);
    end
  endtask

  // Generic pass for one configuration, written out for each because the ports differ in width.
  real wd [64][4];
  real wr_ [64][16];

  task automatic run_d(int len, int idx, output real exp_out);
    real s, mag; int last_beat;
    s = 0.0; mag = 0.0;
    d_start = 1; d_len = 7'(len); d_out_idx = 8'(idx);
    @(negedge clk);
    d_start = 0;
    for (int k = 0; k < len; k++) begin
      while (($urandom % 3) == 0) begin d_act_valid = 0; @(negedge clk); end
      d_act_valid = 1;
      for (int i = 0; i < 4; i++) begin
        d_act_data[i] = r2h(urand(-2.0, 2.0));
        s += h2r(d_act_data[i]) * wd[k][i];
        mag += rabs(h2r(d_act_data[i]) * wd[k][i]);
      end
      last_beat = cyc;
      @(negedge clk);
    end
    d_act_valid = 0;
    while (!d_done) @(negedge clk);
    checks++;
    if (cyc - last_beat != 2) begin failures++; $display("FAIL DRAM PE done latency %0d", cyc - last_beat); end
    check_close(h2r(d_result), s, mag, "DRAM PE dot product");
    exp_out = s;
  endtask

  task automatic run_r(int len, int idx, output real exp_out);
    real s, mag; int last_beat;
    s = 0.0; mag = 0.0;
    r_start = 1; r_len = 7'(len); r_out_idx = 11'(idx);
    @(negedge clk);
    r_start = 0;
    for (int k = 0; k < len; k++) begin
      r_act_valid = 1;
      for (int i = 0; i < 16; i++) begin
        r_act_data[i] = r2h(urand(-2.0, 2.0));
        s += h2r(r_act_data[i]) * wr_[k][i];
        mag += rabs(h2r(r_act_data[i]) * wr_[k][i]);
      end
      last_beat = cyc;
      @(negedge clk);
    end
    r_act_valid = 0;
    while (!r_done) @(negedge clk);
    checks++;
    if (cyc - last_beat != 2) begin failures++; $display("FAIL RRAM PE done latency %0d", cyc - last_beat); end
    check_close(h2r(r_result), s, mag, "RRAM PE dot product");
    exp_out = s;
  endtask

  initial begin
    real e0, e1, e2;
    d_mrf_we = 0; d_start = 0; d_act_valid = 0; d_swap = 0; d_rd_addr = 0; d_mrf_waddr = 0;
    d_mrf_wdata = '0; d_len = 0; d_out_idx = 0; d_act_data = '0;
    r_mrf_we = 0; r_start = 0; r_act_valid = 0; r_swap = 0; r_rd_addr = 0; r_mrf_waddr = 0;
    r_mrf_wdata = '0; r_len = 0; r_out_idx = 0; r_act_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      // load both MRFs
      for (int k = 0; k < 64; k++) begin
        d_mrf_we = 1; d_mrf_waddr = 6'(k);
        r_mrf_we = 1; r_mrf_waddr = 6'(k);
        for (int i = 0; i < 4; i++) begin d_mrf_wdata[i] = r2h(urand(-1.0, 1.0)); wd[k][i] = h2r(d_mrf_wdata[i]); end
        for (int i = 0; i < 16; i++) begin r_mrf_wdata[i] = r2h(urand(-1.0, 1.0)); wr_[k][i] = h2r(r_mrf_wdata[i]); end
        @(negedge clk);
      end
      d_mrf_we = 0; r_mrf_we = 0;
      // DRAM PE: pass 0 into bank A index 3, swap, pass 1 into bank B index 3 while reading A
      run_d(1 + $urandom % 64, 3, e0);
      d_swap = 1; @(negedge clk); d_swap = 0;
      d_rd_addr = 3;
      @(negedge clk);
      check_close(h2r(d_rd_data), e0, rabs(e0) + 1.0, "DRAM PE result after swap");
      run_d(1 + $urandom % 64, 3, e1);
      check_close(h2r(d_rd_data), e0, rabs(e0) + 1.0, "DRAM PE read bank kept during next pass");
      d_swap = 1; @(negedge clk); d_swap = 0; @(negedge clk);
      check_close(h2r(d_rd_data), e1, rabs(e1) + 1.0, "DRAM PE second result after swap");
      // RRAM PE
      run_r(1 + $urandom % 64, 1000, e2);
      r_swap = 1; @(negedge clk); r_swap = 0;
      r_rd_addr = 1000;
      @(negedge clk);
      check_close(h2r(r_rd_data), e2, rabs(e2) + 1.0, "RRAM PE result after swap");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
