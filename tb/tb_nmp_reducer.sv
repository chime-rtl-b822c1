// tb_nmp_reducer: self-checking test of the reducer. Random FP16 vectors are reduced by sum
// and by max; the sum is compared with a double-precision sum (relative tolerance for FP16
// rounding in a 4-level tree), the max must be exact, and the result must appear exactly one
// cycle after in_valid.
module tb_nmp_reducer;
  import chime_pkg::*;
  import tb_fp16_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  red_op_e op;
  fp16_t [N-1:0] in_data;
  fp16_t out_data;
  int checks = 0, failures = 0;

  nmp_reducer #(.N(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real s, mx, sabs, got;
    in_valid = 0; op = RED_SUM; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      s = 0.0; sabs = 0.0; mx = -1.0e9;
      for (int i = 0; i < N; i++) begin
        in_data[i] = r2h(urand(-20.0, 20.0));
        s += h2r(in_data[i]);
        sabs += rabs(h2r(in_data[i]));
        if (h2r(in_data[i]) > mx) mx = h2r(in_data[i]);
      end
      op = (t % 2) ? RED_MAX : RED_SUM;
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no out_valid after one cycle"); end
      got = h2r(out_data);
      checks++;
      if (op == RED_SUM) begin
        if (rabs(got - s) > 0.004 * sabs + 0.01) begin
          failures++; $display("FAIL sum got %f exp %f", got, s);
        end
      end else if (got != mx) begin
        failures++; $display("FAIL max got %f exp %f", got, mx);
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
