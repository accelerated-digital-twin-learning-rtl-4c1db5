// axil_regs: AXI4-Lite register file through which the host processor controls
// the accelerator and loads the model.
//
// Register map (byte addresses, 32-bit words, data in the low 16 bits unless noted):
//   0x000 CTRL     W  bit0 start a run, bit1 clear (rewind the sample buffer),
//                     bit2 training step (ignored while busy)
//   0x004 STATUS   R  bit0 busy, bit1 done, bits 31:16 samples held in the buffer
//   0x008 NSAMP    RW samples per run (reset: DEPTH)
//   0x00C DT       RW sample-time step, Q4.12 (reset: 0)
//   0x010 II       RW initiation interval 1..3 in bits 1:0 (reset: 1)
//   0x014 MASK     RW states that enter the loss, bits N-1:0 (reset: all)
//   0x018 LOSS_LO  R  loss bits 31:0      0x01C LOSS_HI  R  loss bits 47:32
//   0x020 CYCLES   R  clock cycles of the last run
//   0x024 LR       RW learning-rate shift s in bits 5:0 (reset: 8)
//   0x040 + 4i     RW z0[i]                          i < N
//   0x100 + 4k     RW GRU weight, k = gate*N*N + row*N + col  (gate 0 r, 1 zg, 2 c)
//   0x200 + 4k     RW GRU time weight, k = gate*N + row
//   0x280 + 4k     RW GRU bias,        k = gate*N + row
//   0x500 + 4k     RW GRU input weight, k = gate*N*M + row*M + col  (col < M)
//   0x300 + 4k     RW dense weight,    k = row*N + col        (row < NV)
//   0x400 + 4k     RW dense bias,      k = row
//   0x600 + 4k     R  loss gradient of GRU parameter k, Q.12 saturated to 32 bits,
//                     k over weights (3N*N), time weights (3N), biases (3N),
//                     input weights (3N*M), each in the order of its region above
// A training step replaces every GRU-flow parameter p by sat16(p - (dL/dp >>> s)),
// i.e. plain gradient descent with learning rate 2^-s, using the gradient
// accumulated over the last run.
// Unmapped addresses read 0 and ignore writes. WSTRB bytes 0 and 1 are honoured.
// Every response is OKAY.
//
// Handshake: a write is taken in the cycle where AWVALID and WVALID are both high
// and no response is pending; BVALID follows one cycle later and holds until
// BREADY. A read is taken when ARVALID is high and no read data is pending;
// RVALID follows one cycle later and holds, with RDATA stable, until RREADY.
// start and clear are one-cycle pulses in the cycle after the CTRL write; a
// training step takes effect on the edge that accepts the CTRL write.
// That the host talks to the kernel over AXI4-Lite follows the source; the map,
// reset values and behaviour above are this design's choices.
module axil_regs
  import mr_pkg::*;
#(
  parameter int unsigned N     = N_STATE,
  parameter int unsigned M     = N_INPUT,
  parameter int unsigned NV    = N_LIB,
  parameter int unsigned DEPTH = N_DEPTH,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite slave
  input  logic [11:0]   s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
  input  logic [3:0]    s_wstrb,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic [11:0]   s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  // commands and settings
  output logic          start,
  output logic          clear,
  output logic [CW-1:0] nsamp,
  output fx_t           dt,
  output logic [1:0]    ii,
  output logic [N-1:0]  mask,
  output fx_t           z0     [N],
  output fx_t           gru_w  [3][N][N],
  output fx_t           gru_u  [3][N],
  output fx_t           gru_v  [3][N][M],
  output fx_t           gru_b  [3][N],
  output fx_t           dense_w[NV][N],
  output fx_t           dense_b[NV],
  // accumulated loss gradients of the GRU parameters
  input  logic signed [47:0] grad_w [3][N][N],
  input  logic signed [47:0] grad_u [3][N],
  input  logic signed [47:0] grad_v [3][N][M],
  input  logic signed [47:0] grad_b [3][N],
  // status
  input  logic          busy,
  input  logic          done,
  input  logic [CW-1:0] count,
  input  logic [47:0]   loss,
  input  logic [31:0]   cycles
);

  localparam logic [11:0] A_CTRL   = 12'h000;
  localparam logic [11:0] A_STATUS = 12'h004;
  localparam logic [11:0] A_NSAMP  = 12'h008;
  localparam logic [11:0] A_DT     = 12'h00C;
  localparam logic [11:0] A_II     = 12'h010;
  localparam logic [11:0] A_MASK   = 12'h014;
  localparam logic [11:0] A_LOSSL  = 12'h018;
  localparam logic [11:0] A_LOSSH  = 12'h01C;
  localparam logic [11:0] A_CYC    = 12'h020;
  localparam logic [11:0] A_LR     = 12'h024;
  localparam int unsigned B_Z0  = 'h040 / 4;
  localparam int unsigned B_GW  = 'h100 / 4;
  localparam int unsigned B_GU  = 'h200 / 4;
  localparam int unsigned B_GB  = 'h280 / 4;
  localparam int unsigned B_DW  = 'h300 / 4;
  localparam int unsigned B_DB  = 'h400 / 4;
  localparam int unsigned B_GV  = 'h500 / 4;
  localparam int unsigned B_GR  = 'h600 / 4;
  localparam int unsigned K_U   = 3*N*N;          // gradient index offsets
  localparam int unsigned K_B   = K_U + 3*N;
  localparam int unsigned K_V   = K_B + 3*N;

  // Keep regions from overlapping at larger sizes.
  initial begin
    assert (3*N*N <= 64 && 3*N <= 32 && NV*N <= 64 && NV <= 64 && 3*N*M <= 64
            && K_V + 3*N*M <= 64)
      else $error("axil_regs: sizes overflow the register map");
  end

  function automatic fx_t merge16(input fx_t old, input logic [31:0] d, input logic [3:0] s);
    fx_t r;
    r[7:0]  = s[0] ? d[7:0]  : old[7:0];
    r[15:8] = s[1] ? d[15:8] : old[15:8];
    return r;
  endfunction

  // One gradient-descent update of a parameter.
  function automatic fx_t sgd(input fx_t p, input logic signed [47:0] g, input logic [5:0] sh);
    logic signed [47:0] d;
    d = 48'(signed'(p)) - (g >>> sh);
    if (d > 48'(signed'(FX_MAX))) return FX_MAX;
    if (d < 48'(signed'(FX_MIN))) return FX_MIN;
    return fx_t'(d);
  endfunction

  function automatic logic [31:0] sat32(input logic signed [47:0] g);
    if (g > 48'sh0000_7FFF_FFFF) return 32'h7FFF_FFFF;
    if (g < -48'sh0000_8000_0000) return 32'h8000_0000;
    return g[31:0];
  endfunction

  logic [5:0] lr;

  // ---------------------------------------------------------------- write side
  logic wr_go;
  logic [9:0] wi;   // word index
  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_bresp   = 2'b00;
  assign wi        = s_awaddr[11:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      start    <= 1'b0;
      clear    <= 1'b0;
      nsamp    <= CW'(DEPTH);
      dt       <= '0;
      ii       <= 2'd1;
      mask     <= '1;
      lr       <= 6'd8;
      for (int i = 0; i < N; i++) z0[i] <= '0;
      for (int g = 0; g < 3; g++)
        for (int i = 0; i < N; i++) begin
          gru_u[g][i] <= '0;
          gru_b[g][i] <= '0;
          for (int j = 0; j < N; j++) gru_w[g][i][j] <= '0;
          for (int m = 0; m < M; m++) gru_v[g][i][m] <= '0;
        end
      for (int k = 0; k < NV; k++) begin
        dense_b[k] <= '0;
        for (int j = 0; j < N; j++) dense_w[k][j] <= '0;
      end
    end else begin
      start <= 1'b0;
      clear <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_go) begin
        s_bvalid <= 1'b1;
        unique case ({wi, 2'b00})
          A_CTRL:  if (s_wstrb[0]) begin
                     start <= s_wdata[0];
                     clear <= s_wdata[1];
                     if (s_wdata[2] && !busy)
                       for (int g = 0; g < 3; g++)
                         for (int i = 0; i < N; i++) begin
                           gru_u[g][i] <= sgd(gru_u[g][i], grad_u[g][i], lr);
                           gru_b[g][i] <= sgd(gru_b[g][i], grad_b[g][i], lr);
                           for (int j = 0; j < N; j++)
                             gru_w[g][i][j] <= sgd(gru_w[g][i][j], grad_w[g][i][j], lr);
                           for (int m = 0; m < M; m++)
                             gru_v[g][i][m] <= sgd(gru_v[g][i][m], grad_v[g][i][m], lr);
                         end
                   end
          A_NSAMP: nsamp <= CW'(merge16(fx_t'(nsamp), s_wdata, s_wstrb));
          A_DT:    dt    <= merge16(dt, s_wdata, s_wstrb);
          A_II:    if (s_wstrb[0]) ii <= s_wdata[1:0];
          A_MASK:  if (s_wstrb[0]) mask <= s_wdata[N-1:0];
          A_LR:    if (s_wstrb[0]) lr <= s_wdata[5:0];
          default: begin
            for (int i = 0; i < N; i++)
              if (int'(wi) == B_Z0 + i) z0[i] <= merge16(z0[i], s_wdata, s_wstrb);
            for (int g = 0; g < 3; g++)
              for (int i = 0; i < N; i++) begin
                if (int'(wi) == B_GU + g*N + i) gru_u[g][i] <= merge16(gru_u[g][i], s_wdata, s_wstrb);
                if (int'(wi) == B_GB + g*N + i) gru_b[g][i] <= merge16(gru_b[g][i], s_wdata, s_wstrb);
                for (int j = 0; j < N; j++)
                  if (int'(wi) == B_GW + g*N*N + i*N + j)
                    gru_w[g][i][j] <= merge16(gru_w[g][i][j], s_wdata, s_wstrb);
                for (int m = 0; m < M; m++)
                  if (int'(wi) == B_GV + g*N*M + i*M + m)
                    gru_v[g][i][m] <= merge16(gru_v[g][i][m], s_wdata, s_wstrb);
              end
            for (int k = 0; k < NV; k++) begin
              if (int'(wi) == B_DB + k) dense_b[k] <= merge16(dense_b[k], s_wdata, s_wstrb);
              for (int j = 0; j < N; j++)
                if (int'(wi) == B_DW + k*N + j) dense_w[k][j] <= merge16(dense_w[k][j], s_wdata, s_wstrb);
            end
          end
        endcase
      end
    end
  end

  // ----------------------------------------------------------------- read side
  logic [31:0] rd_word;
  logic [9:0]  ri;
  assign ri        = s_araddr[11:2];
  assign s_arready = !s_rvalid;
  assign s_rresp   = 2'b00;

  function automatic logic [31:0] sx(input fx_t v);
    return 32'(signed'(v));
  endfunction

  always_comb begin
    rd_word = '0;
    unique case ({ri, 2'b00})
      A_STATUS: rd_word = {16'(count), 14'd0, done, busy};
      A_NSAMP:  rd_word = 32'(nsamp);
      A_DT:     rd_word = sx(dt);
      A_II:     rd_word = 32'(ii);
      A_MASK:   rd_word = 32'(mask);
      A_LOSSL:  rd_word = loss[31:0];
      A_LOSSH:  rd_word = 32'(loss[47:32]);
      A_CYC:    rd_word = cycles;
      A_LR:     rd_word = 32'(lr);
      default: begin
        for (int i = 0; i < N; i++)
          if (int'(ri) == B_Z0 + i) rd_word = sx(z0[i]);
        for (int g = 0; g < 3; g++)
          for (int i = 0; i < N; i++) begin
            if (int'(ri) == B_GU + g*N + i) rd_word = sx(gru_u[g][i]);
            if (int'(ri) == B_GB + g*N + i) rd_word = sx(gru_b[g][i]);
            if (int'(ri) == B_GR + K_U + g*N + i) rd_word = sat32(grad_u[g][i]);
            if (int'(ri) == B_GR + K_B + g*N + i) rd_word = sat32(grad_b[g][i]);
            for (int j = 0; j < N; j++)
              if (int'(ri) == B_GR + g*N*N + i*N + j) rd_word = sat32(grad_w[g][i][j]);
            for (int m = 0; m < M; m++)
              if (int'(ri) == B_GR + K_V + g*N*M + i*M + m) rd_word = sat32(grad_v[g][i][m]);
            for (int j = 0; j < N; j++)
              if (int'(ri) == B_GW + g*N*N + i*N + j) rd_word = sx(gru_w[g][i][j]);
            for (int m = 0; m < M; m++)
              if (int'(ri) == B_GV + g*N*M + i*M + m) rd_word = sx(gru_v[g][i][m]);
          end
        for (int k = 0; k < NV; k++) begin
          if (int'(ri) == B_DB + k) rd_word = sx(dense_b[k]);
          for (int j = 0; j < N; j++)
            if (int'(ri) == B_DW + k*N + j) rd_word = sx(dense_w[k][j]);
        end
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else if (s_arvalid && s_arready) begin
      s_rvalid <= 1'b1;
      s_rdata  <= rd_word;
    end else if (s_rvalid && s_rready) begin
      s_rvalid <= 1'b0;
    end
  end

  // AXI4-Lite: a response, once raised, is held with its data until accepted.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
