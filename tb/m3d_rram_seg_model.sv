// m3d_rram_seg_model: behavioural model of one M3D RRAM memory segment (channel), for
// simulation only. The real part is an array of 1024x1024 1T1R units joined by H-trees; its
// segment interface has a 20-bit address path (16 bits of it inside a segment in this design)
// and 512-bit read and write data. The model stores written lines sparsely and answers a read
// one cycle after `en`; latency beyond that is enforced by the controller. Unwritten lines
// read as a pattern derived from SEG_ID and the address. `poke` places a line directly
// (weights are resident in the non-volatile array before inference).
module m3d_rram_seg_model
  import chime_pkg::*;
#(
  parameter int unsigned SEG_ID = 0
) (
  input  logic          clk,
  input  rram_seg_req_t req,
  output logic [511:0]  rdata
);
  logic [511:0] mem [logic [15:0]];
  int           writes = 0;

  function automatic logic [511:0] pattern(logic [15:0] a);
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = {8'(SEG_ID), 8'(i), a};
    return v;
  endfunction

  task automatic poke(input logic [15:0] addr, input logic [511:0] data);
    mem[addr] = data;
  endtask

  always @(posedge clk) begin
    if (req.en && !req.we) rdata <= mem.exists(req.addr) ? mem[req.addr] : pattern(req.addr);
    if (req.en && req.we) begin
      mem[req.addr] = req.wdata;
      writes = writes + 1;
    end
  end
endmodule
