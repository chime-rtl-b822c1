// tb_nmp_sram: self-checking test of the two-port shared memory. Writes random words through
// both ports, reads them back through both ports, checks the one-cycle read latency and that
// a read in the cycle of a write to the same address returns the old word.
module tb_nmp_sram;
  localparam int W = 64, D = 2560;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en, a_we, b_en, b_we;
  logic [11:0] a_addr, b_addr;
  logic [W-1:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  nmp_sram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic chk(logic [W-1:0] got, logic [W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    @(negedge clk);
    for (int i = 0; i < D; i++) begin
      a_en = 1; a_we = 1; a_addr = 12'(i); a_wdata = {$urandom, $urandom};
      ref_mem[i] = a_wdata;
      b_en = (i % 3 == 0); b_we = 1; b_addr = 12'((i + 1280) % D); b_wdata = {$urandom, $urandom};
      @(negedge clk);
      if (b_en) ref_mem[(i + 1280) % D] = b_wdata;
    end
    a_en = 0; b_en = 0;
    for (int i = 0; i < 300; i++) begin
      int x, y;
      x = $urandom % D; y = $urandom % D;
      a_en = 1; a_we = 0; a_addr = 12'(x);
      b_en = 1; b_we = 0; b_addr = 12'(y);
      @(negedge clk);
      chk(a_rdata, ref_mem[x], "port A read");
      chk(b_rdata, ref_mem[y], "port B read");
    end
    // read-during-write on port A returns the old word, new word visible next read
    a_en = 1; a_we = 0; a_addr = 12'd7; b_en = 1; b_we = 1; b_addr = 12'd7; b_wdata = 64'hDEAD_BEEF_0123_4567;
    @(negedge clk);
    chk(a_rdata, ref_mem[7], "read during write");
    b_en = 0;
    @(negedge clk);
    chk(a_rdata, 64'hDEAD_BEEF_0123_4567, "read after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
