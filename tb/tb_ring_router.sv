// tb_ring_router: self-checking test of the ring router. Four routers form a unidirectional
// ring; every node injects random flits to random other nodes. Checks that every flit is
// ejected exactly once at its destination with its address and data, that a flit that met no
// contention arrives after exactly `distance` cycles (one per hop), and that ring traffic
// really took priority over injection at least once (inj_ready low while a node wanted to
// inject).
module tb_ring_router;
  localparam int N = 4, DW = 64, NW = 2, FW = NW + 16 + DW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] rv, inj_valid, inj_ready, ej_valid;
  logic [N-1:0][FW-1:0] rf, inj_flit;
  logic [N-1:0][15:0] ej_addr;
  logic [N-1:0][DW-1:0] ej_data;
  int cyc = 0, checks = 0, failures = 0, stalls = 0, sent = 0, recv = 0, exact = 0;
  typedef struct { int dst; int src; int t; logic [15:0] addr; } rec_t;
  rec_t pending [logic [DW-1:0]];
  always @(posedge clk) cyc++;

  for (genvar i = 0; i < N; i++) begin : g
    ring_router #(.NODES(N), .ID(i), .DATA_W(DW)) u (
      .clk, .rst_n,
      .ring_in_valid(rv[(i + N - 1) % N]), .ring_in_flit(rf[(i + N - 1) % N]),
      .ring_out_valid(rv[i]), .ring_out_flit(rf[i]),
      .inj_valid(inj_valid[i]), .inj_flit(inj_flit[i]), .inj_ready(inj_ready[i]),
      .ej_valid(ej_valid[i]), .ej_addr(ej_addr[i]), .ej_data(ej_data[i]));
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ejection checker (sampled at negedge)
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) if (ej_valid[i]) begin
      checks++;
      if (!pending.exists(ej_data[i])) begin
        failures++; $display("FAIL unexpected flit at node %0d", i);
      end else begin
        rec_t r;
        int hops;
        r = pending[ej_data[i]];
        if (r.dst != i || r.addr != ej_addr[i]) begin
          failures++; $display("FAIL flit for %0d ejected at %0d", r.dst, i);
        end
        hops = (r.dst - r.src + N) % N;
        if (cyc - r.t == hops) exact++;
        else if (cyc - r.t < hops) begin failures++; $display("FAIL flit faster than hops"); end
        pending.delete(ej_data[i]);
        recv++;
      end
    end
  end

  initial begin
    logic [N-1:0] want;
    rst_n = 0; inj_valid = '0; inj_flit = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < N; i++) begin
        if (!inj_valid[i] && ($urandom % 3 == 0)) begin
          int d;
          logic [15:0] a;
          logic [DW-1:0] dat;
          d = (i + 1 + $urandom % (N - 1)) % N;
          a = 16'($urandom);
          dat = {32'(t), 16'(i), 16'($urandom)};
          inj_valid[i] = 1;
          inj_flit[i] = {NW'(d), a, dat};
        end
      end
      #1;
      want = '0;
      for (int i = 0; i < N; i++) begin
        if (inj_valid[i] && !inj_ready[i]) stalls++;
        if (inj_valid[i] && inj_ready[i]) begin
          rec_t r;
          r.dst = int'(inj_flit[i][FW-1 -: NW]); r.src = i; r.t = cyc;
          r.addr = inj_flit[i][DW +: 16];
          pending[inj_flit[i][DW-1:0]] = r;
          sent++;
          want[i] = 1'b1;
        end
      end
      @(negedge clk);
      inj_valid = inj_valid & ~want;     // accepted at the edge just passed
    end
    inj_valid = '0;
    repeat (20) @(negedge clk);
    checks += 3;
    if (pending.size() != 0) begin failures++; $display("FAIL %0d flits lost", pending.size()); end
    if (stalls == 0) begin failures++; $display("FAIL ring priority never exercised"); end
    if (exact == 0) begin failures++; $display("FAIL no flit arrived at hop latency"); end
    $display("sent %0d received %0d stalls %0d hop-exact %0d", sent, recv, stalls, exact);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
