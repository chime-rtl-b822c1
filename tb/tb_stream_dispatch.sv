// tb_stream_dispatch: self-checking test of the per-die command dispatcher with 4 fake PUs
// (busy for a random 1..8 cycles after each command) and a fake DMA engine (random grant and
// completion delays). 400 random host commands (PU broadcasts with random masks and DMA
// transfers, some with the sync flag) are streamed while sync_ok toggles at random. Checked:
// every selected PU receives exactly the commands addressed to it, in order, and only while
// idle; a PU command is issued in the cycle it is accepted; no command is taken while the
// previous one is unfinished (PUs busy or DMA not done); a sync command is taken only with
// sync_ok high; the stall and command counters match the testbench's own count.
module tb_stream_dispatch;
  import chime_pkg::*;
  localparam int NPU = 4, NCMD = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0, checks = 0, failures = 0;
  always @(posedge clk) cyc++;

  logic hvalid, hready, sync_ok, dma_req, dma_gnt, dma_done, idle;
  host_cmd_t hcmd;
  logic [NPU-1:0] pu_valid, pu_ready;
  pu_cmd_t pu_cmd;
  dma_cmd_t dma_cmd;
  logic [31:0] stall_cnt, cmd_cnt;

  stream_dispatch #(.N_PU(NPU)) dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", msg, cyc); end
  endtask

  // fake PUs
  int busy_left [NPU];
  pu_cmd_t got [NPU][$];
  for (genvar i = 0; i < NPU; i++) begin : g_pu
    assign pu_ready[i] = (busy_left[i] == 0);
    always @(posedge clk) begin
      if (!rst_n) busy_left[i] <= 0;
      else if (pu_valid[i]) begin
        chk(busy_left[i] == 0, $sformatf("PU %0d given a command while busy", i));
        got[i].push_back(pu_cmd);
        busy_left[i] <= 1 + $urandom % 8;
      end else if (busy_left[i] > 0) busy_left[i] <= busy_left[i] - 1;
    end
  end

  // fake DMA engine
  int dma_phase, dma_wait, dma_busy_n;
  dma_cmd_t dma_got[$];
  always @(posedge clk) begin
    dma_gnt <= 1'b0; dma_done <= 1'b0;
    if (!rst_n) dma_phase <= 0;
    else if (dma_phase == 0 && dma_req && !dma_gnt) begin
      if ($urandom % 3 == 0) begin
        dma_gnt <= 1'b1; dma_got.push_back(dma_cmd); dma_phase <= 1; dma_wait <= 1 + $urandom % 10;
      end
    end else if (dma_phase == 1) begin
      if (dma_wait == 0) begin dma_done <= 1'b1; dma_phase <= 0; end
      else dma_wait <= dma_wait - 1;
    end
  end
  assign dma_busy_n = (dma_phase == 0) && !dma_req;

  // expected traffic and stall count
  pu_cmd_t   exp_pu [NPU][$];
  dma_cmd_t  exp_dma [$];
  int        exp_stall = 0, accepted = 0;
  always @(negedge clk) sync_ok = ($urandom % 3) != 0;
  always @(posedge clk) if (rst_n) begin
    if (hvalid && idle && hcmd.sync && !sync_ok) exp_stall++;
    if (hvalid && hready) begin
      accepted++;
      chk(!hcmd.sync || sync_ok, "sync command taken without sync_ok");
      chk((pu_ready | ~NPU'(dut.mask)) == '1 || dut.state == 0, "accepted while PUs busy");
      chk(dma_busy_n, "accepted while DMA unfinished");
      if (hcmd.kind == HC_PU) begin
        chk(pu_valid == hcmd.mask[NPU-1:0], "PU command not issued in the accept cycle");
        for (int i = 0; i < NPU; i++) if (hcmd.mask[i]) exp_pu[i].push_back(hcmd.cmd);
      end else exp_dma.push_back(hcmd.dma);
    end
    for (int i = 0; i < NPU; i++)
      if (pu_valid[i] && !(hvalid && hready)) chk(0, "PU command issued without acceptance");
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NPU; i++) busy_left[i] = 0;
    dma_phase = 0; dma_wait = 0;
    hvalid = 0; hcmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NCMD; n++) begin
      @(negedge clk);
      hcmd = '0;
      hcmd.kind = ($urandom % 4 == 0) ? HC_DMA : HC_PU;
      hcmd.sync = ($urandom % 3 == 0);
      hcmd.mask = 16'(1 + $urandom % ((1 << NPU) - 1));
      hcmd.cmd.op = pu_op_e'($urandom % 12);
      hcmd.cmd.src = 16'($urandom); hcmd.cmd.len = 16'($urandom); hcmd.cmd.maddr = $urandom;
      hcmd.dma.n = 16'($urandom); hcmd.dma.d_addr = 16'($urandom); hcmd.dma.to_dram = 1'($urandom);
      hvalid = 1;
      @(posedge clk);
      while (!(hvalid && hready)) @(posedge clk);
      #1 hvalid = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
    repeat (40) @(negedge clk);
    for (int i = 0; i < NPU; i++) begin
      chk(got[i].size() == exp_pu[i].size(), $sformatf("PU %0d command count", i));
      for (int k = 0; k < got[i].size() && k < exp_pu[i].size(); k++)
        chk(got[i][k] == exp_pu[i][k], $sformatf("PU %0d command %0d", i, k));
    end
    chk(dma_got.size() == exp_dma.size(), $sformatf("DMA command count %0d expected %0d", dma_got.size(), exp_dma.size()));
    for (int k = 0; k < dma_got.size() && k < exp_dma.size(); k++)
      chk(dma_got[k] == exp_dma[k], $sformatf("DMA command %0d", k));
    chk(int'(cmd_cnt) == NCMD && accepted == NCMD, $sformatf("command counter %0d", cmd_cnt));
    chk(int'(stall_cnt) == exp_stall, $sformatf("stall counter %0d expected %0d", stall_cnt, exp_stall));
    chk(exp_stall > 0, "no sync stall was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
