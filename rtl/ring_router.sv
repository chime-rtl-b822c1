// ring_router: the router of a processing unit on the logic-die ring.
//
// The paper gives every PU a low-latency "ring router" (128 GB/s per link) that connects the
// PUs of a die; it does not describe its protocol. This design uses a unidirectional,
// bufferless ring in which traffic already on the ring has priority: a flit arriving on
// ring_in is ejected if it is addressed to this node, otherwise it is forwarded to ring_out
// in the next cycle. The local PU may inject a flit only in a cycle in which the outgoing
// link is free (inj_ready); ejection is always accepted, so the ring never stalls.
// Ejection is combinational: ej_valid, ej_addr and ej_data are decoded from ring_in in the
// cycle the flit arrives, so those outputs are fields of the input with no register between.
// A flit carries the destination node, a destination shared-memory word address and one
// data word. Each hop costs one cycle. DATA_W defaults to one DRAM shared-memory word; at
// 1 GHz the paper's 128 GB/s per link would be a 1024-bit flit, which this design does not use.
// Lint note: verilator reports rst_n as used both synchronously and asynchronously
// (SYNCASYNCNET). The synchronous use is only the `disable iff (!rst_n)` of the
// assertions; in the logic rst_n is purely an asynchronous reset.
module ring_router #(
  parameter int unsigned NODES  = 16,
  parameter int unsigned ID     = 0,
  parameter int unsigned DATA_W = 64,
  localparam int unsigned NW    = (NODES > 1) ? $clog2(NODES) : 1,
  localparam int unsigned FLIT_W = NW + 16 + DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ring_in_valid,
  input  logic [FLIT_W-1:0] ring_in_flit,
  output logic              ring_out_valid,
  output logic [FLIT_W-1:0] ring_out_flit,
  input  logic              inj_valid,
  input  logic [FLIT_W-1:0] inj_flit,
  output logic              inj_ready,
  output logic              ej_valid,
  output logic [15:0]       ej_addr,
  output logic [DATA_W-1:0] ej_data
);
  logic for_me, forward;

  assign for_me    = ring_in_valid && (ring_in_flit[FLIT_W-1 -: NW] == NW'(ID));
  assign forward   = ring_in_valid && !for_me;
  assign inj_ready = !forward;
  assign ej_valid  = for_me;
  assign ej_addr   = ring_in_flit[DATA_W +: 16];
  assign ej_data   = ring_in_flit[DATA_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ring_out_valid <= 1'b0;
      ring_out_flit  <= '0;
    end else begin
      ring_out_valid <= forward || inj_valid;
      if (forward)        ring_out_flit <= ring_in_flit;
      else if (inj_valid) ring_out_flit <= inj_flit;
    end
  end

  a_no_self_inject: assert property (@(posedge clk) disable iff (!rst_n)
                                     inj_valid |-> inj_flit[FLIT_W-1 -: NW] != NW'(ID));
endmodule
