// ucie_dma: the cross-chiplet DMA engine over the UCIe die-to-die link.
//
// In this design the only data that crosses between the two chiplets are the activations at
// the two cut points of every decoding step: AttnOut (DRAM die -> RRAM die) and FFNOut
// (RRAM die -> DRAM die). The paper says data move "via DMA over UCIe" and does not describe
// the engine or the link's width; the UCIe PHY itself is standard IP. Here the DMA reads a
// PU's shared memory on one die and writes a PU's shared memory on the other. DRAM PU
// shared-memory words are 64 bits and RRAM PU words are 256 bits (RATIO = 4); the link moves
// one 64-bit piece per cycle (this design's choice) and is modelled as LINK_LAT register
// stages, standing in for the PHY's latency.
//
// Interface: pulse `start` with a dma_cmd_t when !busy. For AttnOut the engine reads one 64-bit DRAM word per cycle, sends it over the link and packs
// RATIO pieces into one RRAM word, which it writes when complete. For FFNOut it reads the
// RRAM word holding piece i every cycle, selects the piece and writes it to the DRAM side.
// Field `to_dram` = 1 means RRAM -> DRAM (FFNOut), 0 means DRAM -> RRAM (AttnOut).
// `done` pulses when the last word has been written: n + LINK_LAT + 2 cycles after start.
// Shared-memory ports: one-cycle read latency, as nmp_sram.
// Lint note: verilator reports rst_n as used both synchronously and asynchronously
// (SYNCASYNCNET). The synchronous use is only the `disable iff (!rst_n)` of the
// assertions; in the logic rst_n is purely an asynchronous reset.
module ucie_dma
  import chime_pkg::*;
#(
  parameter int unsigned LINK_LAT = 4,
  parameter int unsigned SMALL_W  = 64,
  parameter int unsigned BIG_W    = 256,
  localparam int unsigned RATIO   = BIG_W / SMALL_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  dma_cmd_t           cmd,
  output logic               busy,
  output logic               done,
  // DRAM-die shared memory port
  output logic               d_en,
  output logic               d_we,
  output logic [4:0]         d_pu,
  output logic [15:0]        d_addr,
  output logic [SMALL_W-1:0] d_wdata,
  input  logic [SMALL_W-1:0] d_rdata,
  // RRAM-die shared memory port
  output logic               r_en,
  output logic               r_we,
  output logic [4:0]         r_pu,
  output logic [15:0]        r_addr,
  output logic [BIG_W-1:0]   r_wdata,
  input  logic [BIG_W-1:0]   r_rdata,
  output logic [31:0]        words_moved
);
  dma_cmd_t    c;
  logic [15:0] rd_i;          // next piece to read
  logic        reading;
  // stage after the read: the memory's rdata is valid
  logic        s1_v;
  logic [15:0] s1_i;
  // link pipeline
  logic [LINK_LAT-1:0]              l_v;
  logic [LINK_LAT-1:0][15:0]        l_i;
  logic [LINK_LAT-1:0][SMALL_W-1:0] l_d;
  logic [SMALL_W-1:0] piece;
  logic [BIG_W-1:0]   pack;
  logic [15:0]        wr_cnt;
  localparam logic [15:0] R16 = 16'(RATIO);

  assign d_pu = c.d_pu;
  assign r_pu = c.r_pu;

  always_comb begin
    piece = c.to_dram ? r_rdata[(int'(s1_i) % RATIO) * SMALL_W +: SMALL_W] : d_rdata;
    // read side
    d_en = 1'b0; d_we = 1'b0; d_addr = '0; d_wdata = '0;
    r_en = 1'b0; r_we = 1'b0; r_addr = '0; r_wdata = '0;
    if (reading) begin
      if (c.to_dram) begin r_en = 1'b1; r_addr = c.r_addr + rd_i / R16; end
      else           begin d_en = 1'b1; d_addr = c.d_addr + rd_i; end
    end
    // write side (the other die's port)
    if (l_v[LINK_LAT-1]) begin
      if (c.to_dram) begin
        d_en = 1'b1; d_we = 1'b1;
        d_addr  = c.d_addr + l_i[LINK_LAT-1];
        d_wdata = l_d[LINK_LAT-1];
      end else if ((l_i[LINK_LAT-1] % R16) == R16 - 16'd1) begin
        r_en = 1'b1; r_we = 1'b1;
        r_addr  = c.r_addr + l_i[LINK_LAT-1] / R16;
        r_wdata = pack;
        r_wdata[(RATIO-1)*SMALL_W +: SMALL_W] = l_d[LINK_LAT-1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; rd_i <= '0; reading <= 1'b0; s1_v <= 1'b0; s1_i <= '0;
      l_v <= '0; l_i <= '0; l_d <= '0; pack <= '0; wr_cnt <= '0;
      busy <= 1'b0; done <= 1'b0; words_moved <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        c       <= cmd;
        rd_i    <= '0;
        reading <= (cmd.n != 0);
        busy    <= (cmd.n != 0);
        wr_cnt  <= '0;
      end else if (reading) begin
        rd_i <= rd_i + 1'b1;
        if (rd_i == c.n - 1) reading <= 1'b0;
      end
      s1_v <= reading;
      s1_i <= rd_i;
      l_v  <= {l_v[LINK_LAT-2:0], s1_v};
      l_i  <= {l_i[LINK_LAT-2:0], s1_i};
      l_d  <= {l_d[LINK_LAT-2:0], piece};
      if (l_v[LINK_LAT-1]) begin
        pack[(int'(l_i[LINK_LAT-1]) % RATIO) * SMALL_W +: SMALL_W] <= l_d[LINK_LAT-1];
        wr_cnt      <= wr_cnt + 1'b1;
        words_moved <= words_moved + 1;
        if (wr_cnt == c.n - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_n_multiple: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> (int'(cmd.n) % RATIO) == 0);
endmodule
