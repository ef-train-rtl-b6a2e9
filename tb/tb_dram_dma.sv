// tb_dram_dma -- behavioural model of the off-chip DRAM and the four AXI DMA
// stream channels (IFM, OFM, WEI read; OUT write) that feed the accelerator.
//
// Each channel takes one burst command (word address, length) at a time and
// then streams the words, P per beat. A burst that does not continue where
// the previous burst of the same channel ended pays TSTART idle cycles first,
// modelling the DMA restart cost (about 400 cycles on the boards measured);
// restarts[] counts them per channel. The read streams assert valid at
// random (about 3 in 4 cycles) and the write channel is ready at random, so
// the design sees back-pressure. Not synthesizable; for simulation only.
module tb_dram_dma
  import fp32_pkg::*;
  import ef_pkg::*;
#(
  parameter int unsigned P      = 4,
  parameter int unsigned WORDS  = 1 << 20,
  parameter int unsigned TSTART = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  // read channels 0: IFM, 1: OFM, 2: WEI
  input  logic     rd_cmd_valid [3],
  input  dma_cmd_t rd_cmd       [3],
  output logic     rd_cmd_ready [3],
  output logic     rd_valid     [3],
  output fp32_t    rd_data      [3][P],
  input  logic     rd_ready     [3],
  // write channel (OUT)
  input  logic     wr_cmd_valid,
  input  dma_cmd_t wr_cmd,
  output logic     wr_cmd_ready,
  input  logic     wr_valid,
  input  fp32_t    wr_data [P],
  output logic     wr_ready
);
  logic [31:0] mem [WORDS];
  int unsigned restarts [4];
  int unsigned words_moved [4];

  // per channel state
  logic [31:0] ptr   [4];
  logic [31:0] left  [4];
  logic [31:0] nextA [4];
  int          wait_c[4];
  logic        go    [4];

  initial begin
    for (int i = 0; i < 4; i++) begin
      restarts[i] = 0; words_moved[i] = 0; nextA[i] = '1;
    end
  end

  always_comb begin
    for (int ch = 0; ch < 3; ch++) begin
      rd_cmd_ready[ch] = (left[ch] == 0);
      for (int j = 0; j < P; j++) rd_data[ch][j] = mem[ptr[ch] + 32'(j)];
    end
    wr_cmd_ready = (left[3] == 0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int ch = 0; ch < 4; ch++) begin
        left[ch] <= 0; ptr[ch] <= 0; wait_c[ch] <= 0; go[ch] <= 1'b0;
      end
      for (int ch = 0; ch < 3; ch++) rd_valid[ch] <= 1'b0;
      wr_ready <= 1'b0;
    end else begin
      for (int ch = 0; ch < 3; ch++) begin
        if (rd_cmd_valid[ch] && rd_cmd_ready[ch]) begin
          ptr[ch]  <= rd_cmd[ch].addr;
          left[ch] <= rd_cmd[ch].len;
          wait_c[ch] <= (rd_cmd[ch].addr == nextA[ch]) ? 0 : int'(TSTART);
          if (rd_cmd[ch].addr != nextA[ch]) restarts[ch]++;
          nextA[ch] <= rd_cmd[ch].addr + rd_cmd[ch].len;
          rd_valid[ch] <= 1'b0;
        end else if (left[ch] != 0) begin
          if (wait_c[ch] > 0) wait_c[ch] <= wait_c[ch] - 1;
          else if (rd_valid[ch] && rd_ready[ch]) begin
            ptr[ch]  <= ptr[ch] + P;
            left[ch] <= left[ch] - P;
            words_moved[ch] += P;
            rd_valid[ch] <= (left[ch] > P) && ($urandom_range(3, 0) != 0);
          end else if (!rd_valid[ch])
            rd_valid[ch] <= ($urandom_range(3, 0) != 0);
        end else rd_valid[ch] <= 1'b0;
      end
      // write channel
      if (wr_cmd_valid && wr_cmd_ready) begin
        ptr[3]  <= wr_cmd.addr;
        left[3] <= wr_cmd.len;
        wait_c[3] <= (wr_cmd.addr == nextA[3]) ? 0 : int'(TSTART);
        if (wr_cmd.addr != nextA[3]) restarts[3]++;
        nextA[3] <= wr_cmd.addr + wr_cmd.len;
        wr_ready <= 1'b0;
      end else if (left[3] != 0) begin
        if (wait_c[3] > 0) wait_c[3] <= wait_c[3] - 1;
        else begin
          if (wr_valid && wr_ready) begin
            for (int j = 0; j < P; j++) mem[ptr[3] + 32'(j)] <= wr_data[j];
            ptr[3]  <= ptr[3] + P;
            left[3] <= left[3] - P;
            words_moved[3] += P;
          end
          wr_ready <= ($urandom_range(3, 0) != 0) && !(wr_valid && wr_ready && left[3] == P);
        end
      end else wr_ready <= 1'b0;
    end
  end
endmodule
