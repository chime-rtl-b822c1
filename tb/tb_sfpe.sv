// tb_sfpe: self-checking test of the special-function PE at 32 lanes. Loads vector registers
// word by word through the load port, executes every operation in vector-vector and
// vector-scalar form and compares every lane with a double-precision reference (relative
// tolerance of FP16 rounding; EXP and DIV a little wider). RSQRT is checked on three ranges,
// including negative operands, whose sign it ignores. Also runs the online-softmax
// update sequence of streaming attention (max, subtract, exp, rescale) on one tile.
module tb_sfpe;
  import chime_pkg::*;
  import tb_fp16_pkg::*;
  localparam int L = 32, WL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic instr_valid, scal, ld_we, s_we;
  sfpe_op_e op;
  logic [2:0] vd, vs1, vs2, ld_reg, rd_reg, s_idx;
  logic [2:0] ld_word;
  fp16_t [WL-1:0] ld_data;
  fp16_t [L-1:0] rd_vec;
  fp16_t s_data;
  fp16_t [7:0] srf_out;
  int checks = 0, failures = 0;
  real vr [8][L];
  real sr [8];

  sfpe #(.LANES(L), .WORD_LANES(WL)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(int r, real lo, real hi);
    for (int w = 0; w < L / WL; w++) begin
      ld_we = 1; ld_reg = 3'(r); ld_word = 3'(w);
      for (int i = 0; i < WL; i++) begin
        ld_data[i] = r2h(urand(lo, hi));
        vr[r][w*WL+i] = h2r(ld_data[i]);
      end
      @(negedge clk);
    end
    ld_we = 0;
  endtask

  task automatic sets(int i, real v);
    s_we = 1; s_idx = 3'(i); s_data = r2h(v); sr[i] = h2r(s_data);
    @(negedge clk);
    s_we = 0;
  endtask

  function automatic real model(sfpe_op_e o, real a, real b);
    case (o)
      SF_ADD: return a + b;
      SF_SUB: return a - b;
      SF_MUL: return a * b;
      SF_MAX: return (a > b) ? a : b;
      SF_EXP: return $exp(a);
      SF_DIV: return a / b;
      SF_RSQRT: return 1.0 / $sqrt(rabs(a));
      default: return b;
    endcase
  endfunction

  task automatic exec(sfpe_op_e o, int d, int a, int b, bit s, real tol);
    real ex, got, bb;
    instr_valid = 1; op = o; vd = 3'(d); vs1 = 3'(a); vs2 = 3'(b); scal = s;
    @(negedge clk);
    instr_valid = 0;
    rd_reg = 3'(d);
    #1;
    for (int i = 0; i < L; i++) begin
      bb = s ? sr[b] : vr[b][i];
      ex = model(o, vr[a][i], bb);
      got = h2r(rd_vec[i]);
      checks++;
      if (rabs(got - ex) > tol * rabs(ex) + 1.0e-3) begin
        failures++; $display("FAIL op %s lane %0d got %f exp %f", o.name(), i, got, ex);
      end
    end
    for (int i = 0; i < L; i++) vr[d][i] = h2r(rd_vec[i]);
  endtask

  initial begin
    real m, l, tile_max;
    instr_valid = 0; scal = 0; ld_we = 0; s_we = 0; op = SF_ADD; vd = 0; vs1 = 0; vs2 = 0;
    ld_reg = 0; rd_reg = 0; s_idx = 0; ld_word = 0; ld_data = '0; s_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      load(0, -4.0, 4.0);
      load(1, 0.5, 3.0);
      sets(2, urand(-2.0, 2.0));
      exec(SF_ADD, 2, 0, 1, 0, 0.002);
      exec(SF_SUB, 3, 0, 1, 0, 0.002);
      exec(SF_MUL, 4, 0, 1, 0, 0.002);
      exec(SF_MAX, 5, 0, 1, 0, 0.0);
      exec(SF_EXP, 6, 0, 0, 0, 0.003);
      exec(SF_DIV, 7, 0, 1, 0, 0.002);
      exec(SF_ADD, 2, 0, 2, 1, 0.002);
      exec(SF_MUL, 3, 1, 2, 1, 0.002);
      exec(SF_MOV, 4, 0, 2, 1, 0.0);
      exec(SF_RSQRT, 5, 1, 0, 0, 0.002);
      load(6, 0.01, 0.5);
      exec(SF_RSQRT, 7, 6, 0, 0, 0.002);
      load(6, -900.0, -20.0);
      exec(SF_RSQRT, 7, 6, 0, 0, 0.002);
    end
    // online softmax update on one tile: scores in v0, running max m in s0, new max s1
    load(0, -6.0, 6.0);
    m = urand(-1.0, 1.0);
    sets(0, m);
    tile_max = -1.0e9;
    for (int i = 0; i < L; i++) if (vr[0][i] > tile_max) tile_max = vr[0][i];
    sets(1, (tile_max > sr[0]) ? tile_max : sr[0]);
    exec(SF_SUB, 1, 0, 1, 1, 0.002);    // s - m_new
    exec(SF_EXP, 2, 1, 0, 0, 0.003);    // p = exp(s - m_new)
    l = 0.0;
    for (int i = 0; i < L; i++) l += vr[2][i];
    checks++;
    if (l < 1.0 - 0.01) begin failures++; $display("FAIL softmax tile: sum %f below 1", l); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
