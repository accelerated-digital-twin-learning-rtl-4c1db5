// tb_sample_buffer: streams DEPTH random samples into the buffer with random
// gaps, checks that the stream is back-pressured once the buffer is full and
// that extra beats are not stored, reads every sample back through both
// combinational ports (states and inputs, at different indices in the same
// cycle), and checks that clear rewinds the write pointer.
module tb_sample_buffer;
  import mr_pkg::*;

  localparam int N = 3, M = 2, DEPTH = 200;
  localparam int AW = $clog2(DEPTH), CW = $clog2(DEPTH + 1);

  logic clk = 0, rst_n = 0, clear = 0, s_tvalid = 0, s_tready;
  logic [(N+M)*16-1:0] s_tdata = '0;
  logic [CW-1:0] count;
  logic [AW-1:0] rd_x_idx = '0, rd_u_idx = '0;
  fx_t rd_x [N], rd_u [M];
  int checks = 0, failures = 0;
  logic [(N+M)*16-1:0] ref_mem [DEPTH];

  sample_buffer #(.N(N), .M(M), .DEPTH(DEPTH)) dut (.*);

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
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load(input int n, input int seed_ofs);
    int sent;
    sent = 0;
    while (sent < n) begin
      s_tvalid = $urandom_range(0, 2) != 0;
      s_tdata  = {16'($urandom), 16'($urandom), 16'(sent + seed_ofs), 16'($urandom), 16'($urandom)};
      @(posedge clk);
      if (s_tvalid && s_tready) begin
        ref_mem[sent] = s_tdata;
        sent++;
      end
      @(negedge clk);
    end
    s_tvalid = 0;
  endtask

  task automatic read_all(input int n);
    for (int i = 0; i < n; i++) begin
      int j;
      j = n - 1 - i;
      rd_x_idx = AW'(i);
      rd_u_idx = AW'(j);
      #1;
      for (int s = 0; s < N; s++)
        check(rd_x[s] == fx_t'(ref_mem[i][s*16 +: 16]), $sformatf("read x %0d.%0d", i, s));
      for (int m = 0; m < M; m++)
        check(rd_u[m] == fx_t'(ref_mem[j][(N+m)*16 +: 16]), $sformatf("read u %0d.%0d", j, m));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(count == 0 && s_tready, "empty after reset");
    load(DEPTH, 0);
    check(count == CW'(DEPTH), "count full");
    check(!s_tready, "tready low when full");
    // Extra beats must be refused.
    s_tvalid = 1;
    s_tdata  = '1;
    repeat (5) @(negedge clk);
    s_tvalid = 0;
    check(count == CW'(DEPTH), "no overflow write");
    read_all(DEPTH);
    // Clear and reload a shorter series.
    clear = 1; @(negedge clk); clear = 0;
    check(count == 0 && s_tready, "clear rewinds");
    load(17, 1000);
    check(count == 17, "count after partial load");
    read_all(17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
