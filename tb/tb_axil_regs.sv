// tb_axil_regs: exercises the AXI4-Lite register file as a host would. Writes
// random values to every parameter register and reads them back both over the
// bus and at the register outputs, checks byte strobes, the start/clear pulses,
// read-only status words, and that the write and read channels hold a response
// until the master accepts it (delayed BREADY/RREADY). Reads every gradient
// word (including 32-bit saturation) and checks that a training step moves
// every GRU parameter to sat16(p - (g >>> LR)) computed here, that it leaves
// the dense layer alone and is ignored while busy.
module tb_axil_regs;
  import mr_pkg::*;

  localparam int N = 3, M = 2, NV = 10, DEPTH = 200;
  localparam int CW = $clog2(DEPTH + 1);

  logic clk = 0, rst_n = 0;
  logic [11:0] s_awaddr = '0, s_araddr = '0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [31:0] s_wdata = '0, s_rdata;
  logic [3:0] s_wstrb = '1;
  logic [1:0] s_bresp, s_rresp;
  logic start, clear;
  logic [CW-1:0] nsamp;
  fx_t dt;
  logic [1:0] ii;
  logic [N-1:0] mask;
  fx_t z0 [N], gru_w [3][N][N], gru_u [3][N], gru_v [3][N][M], gru_b [3][N], dense_w [NV][N], dense_b [NV];
  logic busy = 0, done = 0;
  logic [CW-1:0] count = '0;
  logic [47:0] loss = '0;
  logic [31:0] cycles = '0;
  logic signed [47:0] grad_w [3][N][N], grad_u [3][N], grad_v [3][N][M], grad_b [3][N];
  int checks = 0, failures = 0;

  axil_regs #(.N(N), .M(M), .NV(NV), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  int start_pulses = 0, clear_pulses = 0;
  always @(posedge clk) if (rst_n) begin
    if (start) start_pulses++;
    if (clear) clear_pulses++;
  end

  task automatic axi_write(input logic [11:0] a, input logic [31:0] d,
                           input logic [3:0] strb = 4'hF, input int bdelay = 0);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wstrb = strb; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    repeat (bdelay) begin
      @(negedge clk);
      check(s_bvalid, "bvalid held");
    end
    s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    check(s_bresp == 2'b00, "bresp");
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic axi_read(input logic [11:0] a, output logic [31:0] d, input int rdelay = 0);
    logic [31:0] first;
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    first = s_rdata;
    repeat (rdelay) begin
      @(negedge clk);
      check(s_rvalid && s_rdata == first, "rvalid/rdata held");
    end
    s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk);
    s_rready = 0;
  endtask

  function automatic logic [31:0] sx(input fx_t v);
    return 32'(signed'(v));
  endfunction

  function automatic logic signed [47:0] rgrad(input int k);
    // mostly moderate values, a few beyond 32 bits
    if (k % 11 == 3) return 48'sh0123_4567_89AB;
    if (k % 11 == 7) return -48'sh0100_0000_0001;
    return 48'(signed'(24'($urandom)));
  endfunction

  function automatic logic [31:0] m_sat32(input logic signed [47:0] g);
    longint x;
    x = longint'(g);
    if (x > 64'sd2147483647) return 32'h7FFF_FFFF;
    if (x < -64'sd2147483648) return 32'h8000_0000;
    return 32'(x);
  endfunction

  function automatic fx_t m_sgd(input fx_t p, input logic signed [47:0] g, input int sh);
    longint x;
    x = longint'(p) - (longint'(g) >>> sh);
    if (x > 32767) return 16'sh7FFF;
    if (x < -32768) return -16'sh8000;
    return 16'(x);
  endfunction

  task automatic check_grads();
    logic [31:0] rd;
    int k;
    k = 0;
    for (int g = 0; g < 3; g++) for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      axi_read(12'(12'h600 + 4*k), rd); check(rd == m_sat32(grad_w[g][i][j]), "grad W read"); k++;
    end
    for (int g = 0; g < 3; g++) for (int i = 0; i < N; i++) begin
      axi_read(12'(12'h600 + 4*k), rd); check(rd == m_sat32(grad_u[g][i]), "grad U read"); k++;
    end
    for (int g = 0; g < 3; g++) for (int i = 0; i < N; i++) begin
      axi_read(12'(12'h600 + 4*k), rd); check(rd == m_sat32(grad_b[g][i]), "grad B read"); k++;
    end
    for (int g = 0; g < 3; g++) for (int i = 0; i < N; i++) for (int m = 0; m < M; m++) begin
      axi_read(12'(12'h600 + 4*k), rd); check(rd == m_sat32(grad_v[g][i][m]), "grad V read"); k++;
    end
    axi_read(12'(12'h600 + 4*k), rd); check(rd == 0, "past the gradients reads 0");
  endtask

  initial begin
    logic [31:0] rd;
    fx_t v;
    begin
      int k;
      k = 0;
      for (int g = 0; g < 3; g++) for (int i = 0; i < N; i++) begin
        grad_u[g][i] = rgrad(k++); grad_b[g][i] = rgrad(k++);
        for (int j = 0; j < N; j++) grad_w[g][i][j] = rgrad(k++);
        for (int m = 0; m < M; m++) grad_v[g][i][m] = rgrad(k++);
      end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Reset values.
    axi_read(12'h008, rd); check(rd == DEPTH, "NSAMP reset");
    axi_read(12'h010, rd); check(rd == 1, "II reset");
    axi_read(12'h014, rd); check(rd == 32'h7, "MASK reset");
    // Settings.
    axi_write(12'h008, 32'd150); check(nsamp == 150, "nsamp out");
    axi_write(12'h00C, 32'hFFFF_FF9C); check(dt == -16'sd100, "dt out");
    axi_read(12'h00C, rd); check(rd == 32'hFFFF_FF9C, "dt read sign-extended");
    axi_write(12'h010, 32'd3, 4'hF, 3); check(ii == 3, "ii out");
    axi_write(12'h014, 32'd4); check(mask == 3'b100, "mask out");
    // z0 and all weights.
    for (int i = 0; i < N; i++) begin
      v = 16'($urandom);
      axi_write(12'(12'h040 + 4*i), sx(v));
      check(z0[i] == v, "z0 out");
      axi_read(12'(12'h040 + 4*i), rd, i);
      check(rd == sx(v), "z0 read");
    end
    for (int g = 0; g < 3; g++)
      for (int i = 0; i < N; i++) begin
        v = 16'($urandom);
        axi_write(12'(12'h200 + 4*(g*N + i)), sx(v));
        check(gru_u[g][i] == v, "gru_u out");
        axi_read(12'(12'h200 + 4*(g*N + i)), rd); check(rd == sx(v), "gru_u read");
        v = 16'($urandom);
        axi_write(12'(12'h280 + 4*(g*N + i)), sx(v));
        check(gru_b[g][i] == v, "gru_b out");
        axi_read(12'(12'h280 + 4*(g*N + i)), rd); check(rd == sx(v), "gru_b read");
        for (int j = 0; j < N; j++) begin
          v = 16'($urandom);
          axi_write(12'(12'h100 + 4*(g*N*N + i*N + j)), sx(v));
          check(gru_w[g][i][j] == v, "gru_w out");
          axi_read(12'(12'h100 + 4*(g*N*N + i*N + j)), rd); check(rd == sx(v), "gru_w read");
        end
        for (int m = 0; m < M; m++) begin
          v = 16'($urandom);
          axi_write(12'(12'h500 + 4*(g*N*M + i*M + m)), sx(v));
          check(gru_v[g][i][m] == v, "gru_v out");
          axi_read(12'(12'h500 + 4*(g*N*M + i*M + m)), rd); check(rd == sx(v), "gru_v read");
        end
      end
    for (int k = 0; k < NV; k++) begin
      v = 16'($urandom);
      axi_write(12'(12'h400 + 4*k), sx(v));
      check(dense_b[k] == v, "dense_b out");
      axi_read(12'(12'h400 + 4*k), rd); check(rd == sx(v), "dense_b read");
      for (int j = 0; j < N; j++) begin
        v = 16'($urandom);
        axi_write(12'(12'h300 + 4*(k*N + j)), sx(v));
        check(dense_w[k][j] == v, "dense_w out");
        axi_read(12'(12'h300 + 4*(k*N + j)), rd); check(rd == sx(v), "dense_w read");
      end
    end
    // Byte strobes: write only the high byte of z0[0].
    v = z0[0];
    axi_write(12'h040, 32'h0000_AB12, 4'b0010);
    check(z0[0] == {8'hAB, v[7:0]}, "wstrb high byte only");
    axi_write(12'h040, 32'h0000_CD34, 4'b0001);
    check(z0[0] == 16'hAB34, "wstrb low byte only");
    axi_write(12'h00C, 32'h0000_5566, 4'b0000);
    check(dt == -16'sd100, "wstrb none");
    // Commands.
    axi_write(12'h000, 32'h1);
    axi_write(12'h000, 32'h2);
    axi_write(12'h000, 32'h3);
    check(start_pulses == 2 && clear_pulses == 2, "start/clear pulses");
    // Status.
    busy = 1; done = 0; count = CW'(123); loss = 48'h1234_89AB_CDEF; cycles = 32'd777;
    axi_read(12'h004, rd); check(rd == {16'd123, 16'h0001}, "STATUS busy");
    busy = 0; done = 1;
    axi_read(12'h004, rd); check(rd == {16'd123, 16'h0002}, "STATUS done");
    axi_read(12'h018, rd); check(rd == 32'h89AB_CDEF, "LOSS_LO");
    axi_read(12'h01C, rd); check(rd == 32'h0000_1234, "LOSS_HI");
    axi_read(12'h020, rd, 2); check(rd == 32'd777, "CYCLES");
    axi_read(12'h7F0, rd); check(rd == 0, "unmapped reads 0");
    // Gradients and the training step.
    check_grads();
    axi_read(12'h024, rd); check(rd == 8, "LR reset");
    axi_write(12'h024, 32'd5); axi_read(12'h024, rd); check(rd == 5, "LR write");
    begin
      fx_t ew [3][N][N], eu [3][N], ev [3][N][M], eb [3][N], dw0;
      fx_t sw [3][N][N], su [3][N], sv [3][N][M], sb [3][N];
      int sp;
      dw0 = dense_w[0][0];
      for (int g = 0; g < 3; g++) for (int i = 0; i < N; i++) begin
        eu[g][i] = m_sgd(gru_u[g][i], grad_u[g][i], 5);
        eb[g][i] = m_sgd(gru_b[g][i], grad_b[g][i], 5);
        for (int j = 0; j < N; j++) ew[g][i][j] = m_sgd(gru_w[g][i][j], grad_w[g][i][j], 5);
        for (int m = 0; m < M; m++) ev[g][i][m] = m_sgd(gru_v[g][i][m], grad_v[g][i][m], 5);
      end
      // ignored while busy
      sw = gru_w; su = gru_u; sv = gru_v; sb = gru_b;
      busy = 1;
      axi_write(12'h000, 32'h4);
      check(gru_w == sw && gru_u == su && gru_v == sv && gru_b == sb, "step ignored while busy");
      busy = 0;
      sp = start_pulses;
      axi_write(12'h000, 32'h4);
      @(negedge clk);
      check(start_pulses == sp, "a step does not start a run");
      for (int g = 0; g < 3; g++) for (int i = 0; i < N; i++) begin
        check(gru_u[g][i] == eu[g][i], "step U");
        check(gru_b[g][i] == eb[g][i], "step B");
        for (int j = 0; j < N; j++) check(gru_w[g][i][j] == ew[g][i][j], "step W");
        for (int m = 0; m < M; m++) check(gru_v[g][i][m] == ev[g][i][m], "step V");
      end
      check(dense_w[0][0] == dw0, "step leaves the dense layer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
