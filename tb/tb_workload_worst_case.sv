// tb_workload_worst_case: the default 2 x 128-neuron accelerator with both
// delta thresholds at 0 and inputs that jump across their whole range every
// frame. Every change then fires, so most columns of every layer fire each
// frame (about 350 to 450 of 520). Only neurons held in saturation keep their
// state and stay silent. This approaches the dense worst case of the
// real-time loop.
//
// Besides comparing outputs and fired-delta counts with the reference model,
// it checks the frame latency against the fetch cost. Each fired column of a
// GRU layer costs 48 DRAM beats and each fired FC column 1 beat. The port
// delivers at most one beat per cycle, so the sum of beats is a lower bound.
// The upper bound adds the column scans (520 cycles), the activations
// (258 cycles), one DRAM latency per layer, and two cycles per burst for
// request/response turnaround. The frame must also finish well inside the 5 ms
// (500,000-cycle) period of the 200 Hz control loop.
module tb_workload_worst_case;
  import edgedrnn_pkg::*;
  import edgedrnn_ref_pkg::*;

  localparam int N_IN = 5, M = 128, Q = 2, STEPS = 8, DDR_LAT = 20;
  localparam int BASE0 = 32'h0000_0000, BASE1 = 32'h0001_0000, BASE2 = 32'h0003_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic reg_we = 0; logic [3:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic s_valid = 0, s_ready; act_t s_data = 0;
  logic m_valid, m_ready = 0, m_last; act_t m_data;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [63:0] r_data;

  edgedrnn_pl dut (.*);
  ddr_model #(.LATENCY(DDR_LAT)) u_ddr (.clk, .rst_n, .ar_valid, .ar_ready, .ar_addr, .ar_len,
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

  initial begin
    delta_gru_ref rm;
    automatic int x[] = new[N_IN];
    automatic int y[] = new[Q];
    int worst;
    worst = 0;
    rm = new(N_IN, M, Q);
    rm.thx = 0;
    rm.thh = 0;
    rm.random_weights(64);
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < rm.image_bytes(l); i++)
        u_ddr.mem[((l == 0) ? BASE0 : (l == 1) ? BASE1 : BASE2) + i] = 8'(rm.image_byte(l, i));
    repeat (4) @(negedge clk);
    rst_n = 1;
    wr(4'h1, 0); wr(4'h2, 0);
    wr(4'h3, BASE0); wr(4'h4, BASE1); wr(4'h5, BASE2);
    wr(4'h0, 32'h3);   // new sequence, enabled
    for (int t = 0; t < STEPS; t++) begin
      int yh[Q];
      int fetch, scan_act, lo, hi;
      logic [31:0] nz, lat;
      for (int i = 0; i < 4; i++) x[i] = int'($urandom_range(2047)) - 1024;
      x[4] = (t % 2) ? 256 : 0;
      rm.step(x, y);
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
      @(negedge clk); reg_addr = 4'h6; #1 lat = reg_rdata;
      for (int i = 0; i < Q; i++)
        check(yh[i] == y[i], $sformatf("step %0d y[%0d] %0d vs %0d", t, i, yh[i], y[i]));
      check(int'(nz) == rm.nz, $sformatf("step %0d fired deltas %0d vs %0d", t, nz, rm.nz));
      fetch    = rm.nzl[0] * rm.beats[0] + rm.nzl[1] * rm.beats[1] + rm.nzl[2] * rm.beats[2];
      scan_act = (rm.ncols[0] + rm.ncols[1] + rm.ncols[2]) + (2 * M + Q);
      lo = fetch;
      hi = fetch + scan_act + 3 * DDR_LAT + 2 * rm.nz;
      check(int'(lat) >= lo && int'(lat) <= hi,
            $sformatf("step %0d latency %0d outside [%0d, %0d]", t, lat, lo, hi));
      check(lat < 500_000, $sformatf("step %0d latency %0d within 5 ms", t, lat));
      if (int'(lat) > worst) worst = int'(lat);
      $display("step %0d: fired %0d of %0d columns, %0d beats, latency %0d cycles (%0d%% of cycles move weights)",
               t, rm.nz, rm.ncols[0] + rm.ncols[1] + rm.ncols[2], fetch, lat, 100 * fetch / int'(lat));
    end
    check(worst > 10_000, "dense frames fetch most of the weights");
    $display("worst-case frame: %0d cycles = %0d us at 100 MHz, %0d%% of the 5 ms period",
             worst, worst / 100, worst / 5000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
