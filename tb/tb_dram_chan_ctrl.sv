// tb_dram_chan_ctrl: self-checking test of the DRAM channel controller with a behavioural
// bank-array model. Issues random reads and writes over the 16 banks and all five tiers and
// checks: read data (against a reference memory), and the latency of every request, which
// must be HIT_CYC + 4 cycles for a row-buffer hit and ceil(3 + 0.8*L) + 4 cycles (1 ns clock),
// counted from the cycle the request is presented, for an activation in tier L = 1..5; also
// the hit and miss counters.
module tb_dram_chan_ctrl;
  import chime_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, req_we, rsp_valid;
  logic [31:0] req_addr;
  logic [63:0] req_wdata, rsp_data, arr_rdata;
  dram_arr_req_t arr;
  logic [31:0] hit_cnt, miss_cnt;
  logic [2:0] last_tier;
  int cyc = 0, checks = 0, failures = 0, hits = 0, misses = 0;
  logic [63:0] refm [logic [28:0]];
  logic [15:0] open_row [16];
  logic        open_v [16];
  int tier_seen [5];
  always @(posedge clk) cyc++;

  dram_chan_ctrl dut (.*);
  m3d_dram_array_model u_arr (.clk, .arr, .arr_rdata);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat, exp_lat, tier;
    logic [3:0] b; logic [15:0] r; logic [8:0] cl; logic [28:0] a;
    req_valid = 0; req_we = 0; req_addr = 0; req_wdata = 0;
    for (int i = 0; i < 16; i++) open_v[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      b = 4'($urandom % 16);
      if (open_v[b] && ($urandom % 2)) r = open_row[b];
      else r = 16'($urandom % 6400);
      cl = 9'($urandom % 512);
      a = {b, r, cl};
      req_valid = 1; req_addr = {3'd0, a}; req_we = ($urandom % 3) == 0; req_wdata = {$urandom, $urandom};
      tier = int'(r) / 1280;
      exp_lat = (open_v[b] && open_row[b] == r) ? 1 + 4 : (3000 + 800 * (tier + 1) + 999) / 1000 + 4;
      if (!(open_v[b] && open_row[b] == r)) begin misses++; tier_seen[tier]++; end else hits++;
      open_v[b] = 1; open_row[b] = r;
      while (!req_ready) @(negedge clk);
      t0 = cyc;
      @(negedge clk);
      req_valid = 0;
      while (!rsp_valid) @(negedge clk);
      lat = cyc - t0;
      checks++;
      if (lat != exp_lat) begin failures++; $display("FAIL latency %0d exp %0d (tier %0d)", lat, exp_lat, tier); end
      if (req_we) refm[a] = req_wdata;
      else begin
        checks++;
        if (rsp_data !== (refm.exists(a) ? refm[a] : u_arr.pattern(a))) begin
          failures++; $display("FAIL data at %h", a);
        end
      end
    end
    checks += 3;
    if (hit_cnt != 32'(hits)) begin failures++; $display("FAIL hit count %0d vs %0d", hit_cnt, hits); end
    if (miss_cnt != 32'(misses)) begin failures++; $display("FAIL miss count"); end
    if (u_arr.bad_access != 0) begin failures++; $display("FAIL column access to a closed row (%0d)", u_arr.bad_access); end
    for (int t = 0; t < 5; t++) begin
      checks++;
      if (tier_seen[t] == 0) begin failures++; $display("FAIL tier %0d never exercised", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
