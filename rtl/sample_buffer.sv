// sample_buffer: on-chip copy of one measured time series.
//
// The host's DMA engine streams the series in over AXI4-Stream, one sample per
// beat: the N measured states x[0..N-1] in the low N*16 bits, then the M
// external inputs u[0..M-1] of the twin at that sample. Samples are written in
// arrival order from index 0. Every element is its own register (complete array
// partitioning), so the two read ports below are plain multiplexers and can
// read different samples in the same cycle with no port conflict: the pipeline
// reads the inputs of the sample entering it and, three cycles later, the
// measured states of the sample leaving the GRU flow layer.
//
// Interface: clear rewinds the write pointer; s_tready is high until DEPTH
// samples are held, then low (back-pressure) until the next clear; count is the
// number of samples held; rd_u = inputs of sample rd_u_idx and rd_x = states of
// sample rd_x_idx, both combinational (0 beyond DEPTH).
// Timing: a beat is stored on the clock edge where s_tvalid & s_tready.
// Loading the input into on-chip memory and partitioning it completely follow the
// source; the beat format and the full-buffer behaviour are this design's choices.
module sample_buffer
  import mr_pkg::*;
#(
  parameter int unsigned N     = N_STATE,
  parameter int unsigned M     = N_INPUT,
  parameter int unsigned DEPTH = N_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                s_tvalid,
  output logic                s_tready,
  input  logic [(N+M)*16-1:0] s_tdata,
  output logic [CW-1:0]       count,
  input  logic [AW-1:0]       rd_u_idx,
  output fx_t                 rd_u [M],
  input  logic [AW-1:0]       rd_x_idx,
  output fx_t                 rd_x [N]
);

  fx_t mem [DEPTH][N+M];

  assign s_tready = (count < CW'(DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
    end else if (clear) begin
      count <= '0;
    end else if (s_tvalid && s_tready) begin
      count <= count + 1'b1;
    end
  end

  // Storage has no reset: a sample is only read after it has been written.
  always_ff @(posedge clk) begin
    if (!clear && s_tvalid && s_tready) begin
      for (int i = 0; i < N + M; i++) mem[AW'(count)][i] <= fx_t'(s_tdata[i*16 +: 16]);
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++)
      rd_x[i] = (32'(rd_x_idx) < DEPTH) ? mem[rd_x_idx][i] : '0;
    for (int m = 0; m < M; m++)
      rd_u[m] = (32'(rd_u_idx) < DEPTH) ? mem[rd_u_idx][N+m] : '0;
  end

endmodule
