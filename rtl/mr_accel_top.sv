// mr_accel_top: model-recovery accelerator (forward pass, loss and training of
// the flow layer) for physics-guided model recovery.
//
// The host writes z0 (the latent initial state produced by its encoder), the
// GRU-flow and dense-layer weights and the run settings over AXI4-Lite, and
// streams one measured time series into the on-chip sample buffer through its
// DMA engine. A start command then runs sample i = 0 .. NSAMP-1 through
//   mr_ctrl        issues (i, t_i = i*dt) every II cycles
//   gru_flow_cell  z(t_i) = F(t_i, z0; u_i), the discretized Neural-ODE solution,
//                  with u_i the twin's external inputs at sample i (3 stages)
//   loss_unit      adds the masked squared error between z(t_i) and sample i
//   dense_layer    nu_i = tanh(W z(t_i) + b), the high-dimensional inverse solution (1 stage)
//   flow_grad      backpropagates the loss through the GRU flow layer and sums the
//                  gradient of every GRU-flow parameter over the run
// and sends {nu_i, z(t_i)} back on an AXI4-Stream master for the host-side
// sparsity-guided dropout and low-order ODE solver. The loss and the run's cycle
// count are read back over AXI4-Lite, as are the gradients; a CTRL command
// applies one gradient-descent step to the GRU-flow parameters. irq mirrors
// STATUS.done.
//
// Interfaces:
//   s_axil_*  AXI4-Lite slave, register map in axil_regs.
//   s_axis_*  sample stream, (N + M) x 16 bits per beat: measured states
//             x[0..N-1] in the low bits, then external inputs u[0..M-1].
//   m_axis_*  result stream, (N + NV) x 16 bits per beat: z[0..N-1] in the low
//             N*16 bits, then nu[0..NV-1]; tlast marks the last sample of a run.
// Timing: with II = 1 one sample enters per cycle and the first result appears
// 4 cycles after it entered (3 GRU-flow stages + 1 dense stage). A run of n
// samples takes n*II + 4 cycles plus one for done, if the output is never
// stalled. When m_axis_tready is low while a result waits, the whole pipeline,
// the sample counter and the II counter hold (global stall).
// The block split (GRU flow layer, dense analytical-inverse layer, loss,
// backpropagation, on-chip
// partitioned input, AXI4-Lite control, DMA data path, II = 1/2/3) follows the
// source; the stream formats, the stall scheme and all widths are this design's.
module mr_accel_top
  import mr_pkg::*;
#(
  parameter int unsigned N     = N_STATE,
  parameter int unsigned M     = N_INPUT,
  parameter int unsigned NV    = N_LIB,
  parameter int unsigned DEPTH = N_DEPTH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // AXI4-Lite control
  input  logic [11:0]          s_axil_awaddr,
  input  logic                 s_axil_awvalid,
  output logic                 s_axil_awready,
  input  logic [31:0]          s_axil_wdata,
  input  logic [3:0]           s_axil_wstrb,
  input  logic                 s_axil_wvalid,
  output logic                 s_axil_wready,
  output logic [1:0]           s_axil_bresp,
  output logic                 s_axil_bvalid,
  input  logic                 s_axil_bready,
  input  logic [11:0]          s_axil_araddr,
  input  logic                 s_axil_arvalid,
  output logic                 s_axil_arready,
  output logic [31:0]          s_axil_rdata,
  output logic [1:0]           s_axil_rresp,
  output logic                 s_axil_rvalid,
  input  logic                 s_axil_rready,
  // sample stream in (from DMA)
  input  logic                 s_axis_tvalid,
  output logic                 s_axis_tready,
  input  logic [(N+M)*16-1:0]  s_axis_tdata,
  // result stream out (to DMA)
  output logic                 m_axis_tvalid,
  input  logic                 m_axis_tready,
  output logic [(N+NV)*16-1:0] m_axis_tdata,
  output logic                 m_axis_tlast,
  output logic                 irq
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  // ------------------------------------------------------------ registers
  logic          start, clear, busy, done;
  logic [CW-1:0] nsamp, count;
  fx_t           dt;
  logic [1:0]    ii;
  logic [N-1:0]  mask;
  fx_t           z0      [N];
  fx_t           gru_w   [3][N][N];
  fx_t           gru_u   [3][N];
  fx_t           gru_v   [3][N][M];
  fx_t           gru_b   [3][N];
  fx_t           dense_w [NV][N];
  fx_t           dense_b [NV];
  logic [47:0]   loss;
  logic [31:0]   cycles;
  logic signed [47:0] grad_w [3][N][N];
  logic signed [47:0] grad_u [3][N];
  logic signed [47:0] grad_v [3][N][M];
  logic signed [47:0] grad_b [3][N];

  axil_regs #(.N(N), .M(M), .NV(NV), .DEPTH(DEPTH)) u_regs (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid),
    .s_wready(s_axil_wready), .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid),
    .s_bready(s_axil_bready), .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid),
    .s_arready(s_axil_arready), .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp),
    .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .start, .clear, .nsamp, .dt, .ii, .mask, .z0, .gru_w, .gru_u, .gru_v, .gru_b,
    .dense_w, .dense_b, .grad_w, .grad_u, .grad_v, .grad_b, .busy, .done, .count, .loss, .cycles
  );

  assign irq = done;

  // ------------------------------------------------------------ sample buffer
  logic [AW-1:0] rd_x_idx, rd_u_idx;
  fx_t           meas [N];
  fx_t           uin  [M];

  sample_buffer #(.N(N), .M(M), .DEPTH(DEPTH)) u_buf (
    .clk, .rst_n, .clear,
    .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready), .s_tdata(s_axis_tdata),
    .count, .rd_u_idx, .rd_u(uin), .rd_x_idx, .rd_x(meas)
  );

  // ------------------------------------------------------------ controller
  logic          en, retire;
  logic          issue_valid, issue_last;
  logic [AW-1:0] issue_idx;
  fx_t           issue_t;

  assign en     = !m_axis_tvalid || m_axis_tready;
  assign retire = m_axis_tvalid && m_axis_tready;

  mr_ctrl #(.DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .nsamp, .dt, .ii, .en, .retire,
    .issue_valid, .issue_idx, .issue_t, .issue_last, .busy, .done, .cycles
  );

  // Sample index and last flag travel beside the GRU-flow stages.
  logic [AW-1:0] idx_p  [3];
  logic          last_p [4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 3; s++) idx_p[s] <= '0;
      for (int s = 0; s < 4; s++) last_p[s] <= 1'b0;
    end else if (en) begin
      idx_p[0]  <= issue_idx;
      last_p[0] <= issue_last;
      for (int s = 1; s < 3; s++) idx_p[s] <= idx_p[s-1];
      for (int s = 1; s < 4; s++) last_p[s] <= last_p[s-1];
    end
  end

  // ------------------------------------------------------------ GRU flow layer
  logic gru_valid;
  fx_t  zt [N];
  fx_t  a_h [N], a_r [N], a_zg [N], a_c [N], a_dr [N], a_dz [N], a_dc [N];
  fx_t  a_u [M];
  fx_t  a_t, a_phi;

  assign rd_u_idx = issue_idx;

  gru_flow_cell #(.N(N), .M(M)) u_gru (
    .clk, .rst_n, .en, .in_valid(issue_valid), .h(z0), .t(issue_t), .ux(uin),
    .w(gru_w), .u(gru_u), .v(gru_v), .b(gru_b), .out_valid(gru_valid), .y(zt),
    .aux_h(a_h), .aux_t(a_t), .aux_u(a_u), .aux_r(a_r), .aux_zg(a_zg), .aux_c(a_c),
    .aux_phi(a_phi), .aux_dr(a_dr), .aux_dz(a_dz), .aux_dc(a_dc)
  );

  // ------------------------------------------------------------ loss
  assign rd_x_idx = idx_p[2];

  loss_unit #(.N(N)) u_loss (
    .clk, .rst_n, .clear(start), .en, .in_valid(gru_valid),
    .pred(zt), .meas, .mask, .loss
  );

  // ------------------------------------------------------------ backpropagation
  flow_grad #(.N(N), .M(M)) u_grad (
    .clk, .rst_n, .clear(start), .en, .in_valid(gru_valid),
    .z(zt), .meas, .mask,
    .aux_h(a_h), .aux_t(a_t), .aux_u(a_u), .aux_r(a_r), .aux_zg(a_zg), .aux_c(a_c),
    .aux_phi(a_phi), .aux_dr(a_dr), .aux_dz(a_dz), .aux_dc(a_dc),
    .w_c(gru_w[GATE_C]), .grad_w, .grad_u, .grad_v, .grad_b
  );

  // ------------------------------------------------------------ dense layer
  logic dense_valid;
  fx_t  nu [NV];
  fx_t  zt_d [N];

  dense_layer #(.N(N), .NV(NV)) u_dense (
    .clk, .rst_n, .en, .in_valid(gru_valid), .x(zt),
    .w(dense_w), .b(dense_b), .out_valid(dense_valid), .y(nu)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < N; i++) zt_d[i] <= '0;
    else if (en) for (int i = 0; i < N; i++) zt_d[i] <= zt[i];
  end

  // ------------------------------------------------------------ result stream
  assign m_axis_tvalid = dense_valid;
  assign m_axis_tlast  = last_p[3];
  always_comb begin
    for (int i = 0; i < N; i++)  m_axis_tdata[i*16 +: 16]       = zt_d[i];
    for (int k = 0; k < NV; k++) m_axis_tdata[(N+k)*16 +: 16]   = nu[k];
  end

  // AXI4-Stream: a result, once offered, stays with its data until taken.
  a_tvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata)
                                        && $stable(m_axis_tlast));

endmodule
