// tb_workload_small_nets: the smaller controller networks (2 x 32 and 2 x 64
// neurons) on the default 2 x 128-neuron accelerator.
//
// A smaller network runs on the full-size hardware by zero-padding: its
// weights are placed in the 128-neuron layout and every other weight and bias
// is 0. A padded neuron then has r = u = 1/2 and candidate 0, so its state
// stays 0, never fires a delta and feeds nothing forward. The outputs and the
// number of fired deltas must therefore equal those of the small network's
// own reference model, frame by frame, which is what this test checks.
module tb_workload_small_nets;
  import edgedrnn_pkg::*;
  import edgedrnn_ref_pkg::*;

  localparam int N_IN = 5, M = 128, Q = 2, STEPS = 16;
  localparam int BASE0 = 32'h0000_0000, BASE1 = 32'h0001_0000, BASE2 = 32'h0003_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic reg_we = 0; logic [3:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic s_valid = 0, s_ready; act_t s_data = 0;
  logic m_valid, m_ready = 0, m_last; act_t m_data;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [63:0] r_data;

  edgedrnn_pl dut (.*);
  ddr_model #(.LATENCY(20)) u_ddr (.clk, .rst_n, .ar_valid, .ar_ready, .ar_addr, .ar_len,
    .r_valid, .r_ready, .r_data, .r_last);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask

  // column of the small net -> column of the padded net
  function automatic int pad_col(int l, int c, int ms);
    int isz_s, isz_b;
    isz_s = (l == 0) ? N_IN : ms;
    isz_b = (l == 0) ? N_IN : M;
    if (c < isz_s) return c;
    if (c == isz_s) return isz_b;
    return isz_b + 1 + (c - isz_s - 1);
  endfunction

  task automatic run_net(int ms);
    delta_gru_ref net_s, net_p;
    int x[] = new[N_IN];
    int y[] = new[Q];
    net_s = new(N_IN, ms, Q);
    net_p = new(N_IN, M, Q);
    net_s.random_weights(24);
    for (int l = 0; l < 3; l++) begin
      foreach (net_p.w[l][c, r]) net_p.w[l][c][r] = 0;
      for (int c = 0; c < net_s.ncols[l]; c++)
        for (int r = 0; r < net_s.rows[l]; r++)
          net_p.w[l][pad_col(l, c, ms)][(l == 2) ? r : (r / ms) * M + (r % ms)] = net_s.w[l][c][r];
    end
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < net_p.image_bytes(l); i++)
        u_ddr.mem[((l == 0) ? BASE0 : (l == 1) ? BASE1 : BASE2) + i] = 8'(net_p.image_byte(l, i));
    wr(4'h0, 32'h3);   // new sequence, enabled
    foreach (x[i]) x[i] = int'($urandom_range(300)) - 150;
    for (int t = 0; t < STEPS; t++) begin
      int yh[Q];
      logic [31:0] nz;
      for (int i = 0; i < 4; i++) x[i] += int'($urandom_range(30)) - 15;
      x[4] = ((t / 5) % 2) ? 256 : 0;
      net_s.step(x, y);
      for (int i = 0; i < N_IN; i++) begin
        @(negedge clk); s_valid = 1; s_data = act_t'(x[i]);
        #1;
        while (!s_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 s_valid = 0;
      end
      for (int i = 0; i < Q; i++) begin
        @(negedge clk); m_ready = 1; #1;
        while (!m_valid) begin @(negedge clk); #1; end
        yh[i] = m_data;
        @(posedge clk); #1 m_ready = 0;
      end
      @(negedge clk); reg_addr = 4'h7; #1 nz = reg_rdata;
      for (int i = 0; i < Q; i++)
        check(yh[i] == y[i], $sformatf("2L-%0dH step %0d y[%0d] %0d vs %0d", ms, t, i, yh[i], y[i]));
      check(int'(nz) == net_s.nz, $sformatf("2L-%0dH step %0d fired deltas %0d vs %0d", ms, t, nz, net_s.nz));
    end
    $display("2L-%0dH network on the 2L-128H accelerator: %0d frames compared", ms, STEPS);
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    wr(4'h3, BASE0); wr(4'h4, BASE1); wr(4'h5, BASE2);
    run_net(32);
    run_net(64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
