// tb_rram_mem_ctrl: self-checking test of an RRAM layer controller with 16 behavioural
// segment models. Both PU ports issue random reads and writes, sometimes to the same
// segment. Checks read data against a reference memory, the latency of every access (read
// ceil(2.3 ns) = 3 cycles, write ceil(11 ns) = 11 cycles, plus 3 cycles of port handling,
// counted from the cycle of acceptance), that two ports were served in parallel on different
// segments, that a busy segment held back the other port, and the controller's write count.
module tb_rram_mem_ctrl;
  import chime_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] req_valid, req_ready, req_we, rsp_valid;
  logic [1:0][19:0] req_addr;
  logic [1:0][511:0] req_wdata, rsp_data;
  rram_seg_req_t [15:0] seg;
  logic [15:0][511:0] seg_rdata;
  logic [31:0] wr_cnt;
  int cyc = 0, checks = 0, failures = 0, parallel = 0, blocked = 0, writes = 0;
  int finished = 0;
  logic [511:0] refm [logic [19:0]];
  always @(posedge clk) cyc++;

  rram_mem_ctrl dut (.*);
  for (genvar s = 0; s < 16; s++) begin : g_seg
    m3d_rram_seg_model #(.SEG_ID(s)) u_seg (.clk, .req(seg[s]), .rdata(seg_rdata[s]));
  end

  function automatic logic [511:0] pat(logic [19:0] a);
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = {8'(a[19:16]), 8'(i), a[15:0]};
    return v;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one driver per port
  for (genvar p = 0; p < 2; p++) begin : g_drv
    initial begin
      int t0, lat;
      logic [19:0] a;
      logic we;
      logic [511:0] d;
      req_valid[p] = 0; req_we[p] = 0; req_addr[p] = '0; req_wdata[p] = '0;
      wait (rst_n);
      @(negedge clk);
      for (int n = 0; n < 400; n++) begin
        a = {4'($urandom % 4), 16'($urandom % 64)};   // few segments: collisions happen
        we = ($urandom % 3) == 0;
        d = {16{$urandom}};
        req_valid[p] = 1; req_addr[p] = a; req_we[p] = we; req_wdata[p] = d;
        #1;
        while (!req_ready[p]) begin
          if (dut.busy[a[19:16]]) blocked++;
          @(negedge clk); #1;
        end
        if (req_ready[0] && req_ready[1]) parallel++;
        t0 = cyc;
        @(negedge clk);
        req_valid[p] = 0;
        while (!rsp_valid[p]) @(negedge clk);
        lat = cyc - t0;
        checks++;
        if (lat != (we ? 11 : 3) + 3) begin
          failures++; $display("FAIL port %0d latency %0d (%s)", p, lat, we ? "write" : "read");
        end
        if (we) begin refm[a] = d; writes++; end
        else begin
          checks++;
          if (rsp_data[p] !== (refm.exists(a) ? refm[a] : pat(a))) begin
            failures++; $display("FAIL port %0d read data at %h", p, a);
          end
        end
        repeat ($urandom % 3) @(negedge clk);
      end
      finished++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (finished == 2);
    repeat (3) @(negedge clk);
    checks += 3;
    if (parallel == 0) begin failures++; $display("FAIL never served both ports at once"); end
    if (blocked == 0) begin failures++; $display("FAIL busy segment never held a port back"); end
    if (wr_cnt != 32'(writes)) begin failures++; $display("FAIL write count %0d vs %0d", wr_cnt, writes); end
    $display("parallel %0d blocked %0d writes %0d", parallel, blocked, writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
