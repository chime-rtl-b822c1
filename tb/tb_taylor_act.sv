// tb_taylor_act: self-checking test of the activation unit. Streams random FP16 beats
// (one per cycle, with gaps) and compares each lane with SiLU(x) = x / (1 + e^-x) computed in
// double precision; checks that every result leaves exactly three cycles after its input.
module tb_taylor_act;
  import chime_pkg::*;
  import tb_fp16_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  fp16_t [L-1:0] in_data, out_data;
  fp16_t [L-1:0] q [$];
  int in_cyc [$];
  int cyc = 0, checks = 0, failures = 0, sent = 0, got = 0;

  taylor_act #(.LANES(L)) dut (.*);

  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(negedge clk) if (rst_n && out_valid) begin
    fp16_t [L-1:0] x;
    int c0;
    x = q.pop_front();
    c0 = in_cyc.pop_front();
    checks++;
    if (cyc - c0 != 3) begin failures++; $display("FAIL latency %0d", cyc - c0); end
    for (int i = 0; i < L; i++) begin
      real xr, yr, er;
      xr = h2r(x[i]);
      er = xr / (1.0 + $exp(-xr));
      yr = h2r(out_data[i]);
      checks++;
      if (rabs(yr - er) > 0.004 * rabs(er) + 0.002) begin
        failures++; $display("FAIL silu(%f) got %f exp %f", xr, yr, er);
      end
    end
    got++;
  end

  initial begin
    in_valid = 0; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (sent < 300) begin
      in_valid = ($urandom % 4) != 0;
      for (int i = 0; i < L; i++) in_data[i] = r2h(urand(-9.0, 9.0));
      if (in_valid) begin q.push_back(in_data); in_cyc.push_back(cyc); sent++; end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("FAIL got %0d of %0d", got, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
