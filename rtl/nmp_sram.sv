// nmp_sram: the shared memory of a processing unit (also used, at other sizes, wherever the
// design needs a plain on-die SRAM).
//
// The paper gives each PU a shared memory that keeps activations on the logic die: 20 KB per
// DRAM PU and 80 KB per RRAM PU. It does not describe its ports. This design gives it two
// ports so that the PU datapath (port A) and the ring router / cross-chiplet DMA (port B) can
// use it in the same cycle. Both ports read and write; reads are synchronous with one cycle of
// latency (rdata is valid the cycle after the address). A write and a read of the same address
// on one port in one cycle return the old data. If both ports write the same address in the
// same cycle, port B wins; an assertion flags it, since the PU never lets that happen.
// Default: 2560 words of 64 bits = 20 KB, the DRAM PU size.
module nmp_sram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 2560,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  // port A
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  // port B
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en && !a_we) a_rdata <= mem[a_addr];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
    if (a_en && a_we) mem[a_addr] <= a_wdata;
    if (b_en && b_we) mem[b_addr] <= b_wdata;
  end

  property p_no_write_collision;
    @(posedge clk) !(a_en && a_we && b_en && b_we && a_addr == b_addr);
  endproperty
  a_no_write_collision: assert property (p_no_write_collision);
endmodule
