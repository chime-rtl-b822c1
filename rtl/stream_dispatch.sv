// stream_dispatch: command dispatcher of one logic die (the on-chip controller).
//
// The host (running the mapping software) hands each die an in-order stream of commands
// (chime_pkg::host_cmd_t). A PU command is broadcast to the PUs selected by `mask`; the
// dispatcher waits until all of them are idle again before taking the next command. A DMA
// command is passed to the shared cross-chiplet DMA engine and waited for. This keeps every
// kernel inside one die and makes the two cut points of a decoding step the only points
// where the dies meet: a command with `sync` set is held until `sync_ok`, which the top
// derives from the cut-point counters (the RRAM die may start FFN(t) only after AttnOut(t)
// has arrived, the DRAM die may start Attention(t+1) only after FFNOut(t) has returned).
// The paper states this ordering; the command format and the blocking dispatch are this
// design's choice. stall_cnt counts cycles a command waited for sync_ok.
// Timing: a PU command is issued (pu_valid pulse) in the cycle the host command is accepted.
// pu_cmd is the host command's PU field passed straight through (the DMA command is registered);
// only the valid strobes, ready and the counters are the dispatcher's own logic.
module stream_dispatch
  import chime_pkg::*;
#(
  parameter int unsigned N_PU = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            hvalid,
  input  host_cmd_t       hcmd,
  output logic            hready,
  input  logic            sync_ok,
  // processing units
  output logic [N_PU-1:0] pu_valid,
  output pu_cmd_t         pu_cmd,
  input  logic [N_PU-1:0] pu_ready,
  // DMA engine
  output logic            dma_req,
  output dma_cmd_t        dma_cmd,
  input  logic            dma_gnt,
  input  logic            dma_done,
  // status
  output logic            idle,
  output logic [31:0]     stall_cnt,
  output logic [31:0]     cmd_cnt
);
  typedef enum logic [1:0] {D_IDLE, D_WAIT_PU, D_DMA_REQ, D_DMA_WAIT} state_e;
  state_e          state;
  logic [N_PU-1:0] mask;
  logic            first;

  assign hready = (state == D_IDLE) && !(hcmd.sync && !sync_ok);
  assign idle   = (state == D_IDLE);
  assign pu_cmd = hcmd.cmd;

  always_comb begin
    pu_valid = '0;
    if (state == D_IDLE && hvalid && hready && hcmd.kind == HC_PU)
      pu_valid = hcmd.mask[N_PU-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; mask <= '0; first <= 1'b0;
      dma_req <= 1'b0; dma_cmd <= '0; stall_cnt <= '0; cmd_cnt <= '0;
    end else begin
      unique case (state)
        D_IDLE: if (hvalid) begin
          if (!hready) begin
            stall_cnt <= stall_cnt + 1;
          end else begin
            cmd_cnt <= cmd_cnt + 1;
            if (hcmd.kind == HC_PU) begin
              mask  <= hcmd.mask[N_PU-1:0];
              first <= 1'b1;
              state <= D_WAIT_PU;
            end else begin
              dma_cmd <= hcmd.dma;
              dma_req <= 1'b1;
              state   <= D_DMA_REQ;
            end
          end
        end
        D_WAIT_PU: begin
          first <= 1'b0;
          if (!first && ((pu_ready | ~mask) == '1)) state <= D_IDLE;
        end
        D_DMA_REQ: if (dma_gnt) begin
          dma_req <= 1'b0;
          state   <= D_DMA_WAIT;
        end
        D_DMA_WAIT: if (dma_done) state <= D_IDLE;
        default: state <= D_IDLE;
      endcase
    end
  end
endmodule
