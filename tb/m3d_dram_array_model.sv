// m3d_dram_array_model: behavioural model of the bank arrays of one M3D DRAM channel, for
// simulation only. The real part is a process-specific 200-layer 1T1C memory with a 32 Kb row
// buffer per bank. The model keeps sparse storage (only written columns use memory), keeps
// the open row of every bank, and answers a column read one cycle after it sees arr.rd.
// Access timing (activation latency per tier) is enforced by the controller, not here.
// Unwritten columns read as a pattern derived from their address. The `poke` task lets a
// testbench place data directly (standing in for data written before the test).
module m3d_dram_array_model
  import chime_pkg::*;
#(
  parameter int unsigned N_BANK = 16
) (
  input  logic          clk,
  input  dram_arr_req_t arr,
  output logic [63:0]   arr_rdata
);
  logic [63:0] mem [logic [28:0]];
  logic [15:0] open_row [N_BANK];
  bit          opened [N_BANK];       // a bank counts as open after its first activation
  int          bad_access = 0;

  function automatic logic [63:0] pattern(logic [28:0] a);
    return {3'd0, a, 3'd5, a} ^ 64'h5A5A_0000_A5A5_0000;
  endfunction

  task automatic poke(input logic [3:0] bank, input logic [15:0] row, input logic [8:0] col,
                      input logic [63:0] data);
    mem[{bank, row, col}] = data;
  endtask

  always @(posedge clk) begin
    if (arr.rd) arr_rdata <= mem.exists({arr.bank, arr.row, arr.col}) ?
                             mem[{arr.bank, arr.row, arr.col}] : pattern({arr.bank, arr.row, arr.col});
    if (arr.rd || arr.wr) begin
      if (opened[arr.bank] && open_row[arr.bank] != arr.row) begin
        bad_access++;
        $display("closed-row access bank %0d row %0d open %0d", arr.bank, arr.row, open_row[arr.bank]);
      end
    end
    if (arr.wr) mem[{arr.bank, arr.row, arr.col}] = arr.wdata;
    if (arr.act) begin
      open_row[arr.bank] <= arr.row;
      opened[arr.bank]   <= 1'b1;
    end
  end
endmodule
