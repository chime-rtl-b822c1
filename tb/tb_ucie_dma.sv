// tb_ucie_dma: self-checking test of the cross-chiplet DMA. Two small shared-memory models
// (one per die, 64-bit and 256-bit words, several PUs each) surround the engine. Random
// AttnOut transfers (DRAM -> RRAM) and FFNOut transfers (RRAM -> DRAM) of random length are
// run; every destination word is compared with the source, words outside the destination
// range must be untouched, and `done` must come n + LINK_LAT + 2 cycles after `start`.
module tb_ucie_dma;
  import chime_pkg::*;
  localparam int LAT = 4, NPU = 4, DEPTH = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  dma_cmd_t cmd;
  logic d_en, d_we, r_en, r_we;
  logic [4:0] d_pu, r_pu;
  logic [15:0] d_addr, r_addr;
  logic [63:0] d_wdata, d_rdata;
  logic [255:0] r_wdata, r_rdata;
  logic [31:0] words_moved;
  logic [63:0]  dmem [NPU][DEPTH];
  logic [255:0] rmem [NPU][DEPTH];
  int cyc = 0, checks = 0, failures = 0;
  always @(posedge clk) cyc++;

  ucie_dma #(.LINK_LAT(LAT)) dut (.*);

  always @(posedge clk) begin
    if (d_en && !d_we) d_rdata <= dmem[d_pu][d_addr];
    if (d_en && d_we) dmem[d_pu][d_addr] <= d_wdata;
    if (r_en && !r_we) r_rdata <= rmem[r_pu][r_addr];
    if (r_en && r_we) rmem[r_pu][r_addr] <= r_wdata;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0]  dref [NPU][DEPTH];
    logic [255:0] rref [NPU][DEPTH];
    int t0;
    start = 0; cmd = '0;
    for (int p = 0; p < NPU; p++)
      for (int a = 0; a < DEPTH; a++) begin
        dmem[p][a] = {$urandom, $urandom};
        rmem[p][a] = {8{$urandom}};
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      dref = dmem; rref = rmem;
      cmd.to_dram = t % 2;
      cmd.d_pu = 5'($urandom % NPU);
      cmd.r_pu = 5'($urandom % NPU);
      cmd.n = 16'(4 * (1 + $urandom % 16));
      cmd.d_addr = 16'($urandom % (DEPTH - 64));
      cmd.r_addr = 16'($urandom % (DEPTH - 16));
      start = 1;
      t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t0 != int'(cmd.n) + LAT + 2) begin
        failures++; $display("FAIL done after %0d cycles, n=%0d", cyc - t0, cmd.n);
      end
      for (int i = 0; i < int'(cmd.n); i++) begin
        logic [63:0] src_w, dst_w;
        if (cmd.to_dram) begin
          src_w = rref[cmd.r_pu][cmd.r_addr + i / 4][(i % 4) * 64 +: 64];
          dst_w = dmem[cmd.d_pu][cmd.d_addr + i];
          dref[cmd.d_pu][cmd.d_addr + i] = src_w;
        end else begin
          src_w = dref[cmd.d_pu][cmd.d_addr + i];
          dst_w = rmem[cmd.r_pu][cmd.r_addr + i / 4][(i % 4) * 64 +: 64];
          rref[cmd.r_pu][cmd.r_addr + i / 4][(i % 4) * 64 +: 64] = src_w;
        end
        checks++;
        if (src_w !== dst_w) begin failures++; $display("FAIL word %0d dir %0d", i, cmd.to_dram); end
      end
      // nothing else changed
      checks++;
      if (dref != dmem || rref != rmem) begin failures++; $display("FAIL stray write"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
