// tb_edgedrnn_core: the accelerator core at a reduced size (M = 16, small
// FIFO, two outstanding bursts, 30 % DRAM stalls) against the bit-exact
// reference model, over three threshold settings: zero thresholds (every
// non-zero change fires, i.e. dense GRU arithmetic), the paper's thresholds
// (4/256 and 128/256), and coarse ones (most deltas skipped). Each setting
// starts with a sequence reset. Outputs, fired-delta counts and the
// fetch-bound latency are checked frame by frame.
module tb_edgedrnn_core;
  import edgedrnn_pkg::*;
  import edgedrnn_ref_pkg::*;
  localparam int N_IN = 5, M = 16, Q = 2, STEPS = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic seq_reset = 0; act_t thx = 0, thh = 0;
  logic [31:0] w_base [NUM_LAYERS];
  logic x_valid = 0, x_ready; act_t x_data [N_IN];
  logic y_valid, y_ready = 0; act_t y_data [Q];
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [63:0] r_data;
  logic busy, fifo_full_stall;
  logic [31:0] latency, nz_deltas, steps;

  edgedrnn_core #(.N_IN(N_IN), .M(M), .Q(Q), .FIFO_DEPTH(4), .OUTSTANDING(2)) dut (.*);
  ddr_model #(.BYTES(32768), .LATENCY(12), .STALL_PCT(30)) u_ddr (.clk, .rst_n, .ar_valid, .ar_ready,
    .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last);

  int checks = 0, failures = 0, n_stall = 0;
  delta_gru_ref rm;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (fifo_full_stall) n_stall++;

  initial begin
    int x[] = new[N_IN];
    int y[] = new[Q];
    int thr_x[3] = '{0, 4, 64};
    int thr_h[3] = '{0, 128, 200};
    w_base = '{32'h0, 32'h2000, 32'h6000};
    rm = new(N_IN, M, Q);
    rm.random_weights(16);
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < rm.image_bytes(l); i++) u_ddr.mem[int'(w_base[l]) + i] = 8'(rm.image_byte(l, i));
    repeat (3) @(negedge clk); rst_n = 1;
    for (int set = 0; set < 3; set++) begin
      int nz_sum;
      nz_sum = 0;
      @(negedge clk); seq_reset = 1; thx = act_t'(thr_x[set]); thh = act_t'(thr_h[set]);
      @(negedge clk); seq_reset = 0;
      rm.reset_state(); rm.thx = thr_x[set]; rm.thh = thr_h[set];
      foreach (x[i]) x[i] = int'($urandom_range(400)) - 200;
      for (int t = 0; t < STEPS; t++) begin
        for (int i = 0; i < 4; i++) x[i] += int'($urandom_range(40)) - 20;
        x[4] = ((t / 7) % 2) ? 256 : 0;
        rm.step(x, y);
        @(negedge clk);
        x_valid = 1;
        foreach (x_data[i]) x_data[i] = act_t'(x[i]);
        #1;
        while (!x_ready) begin @(negedge clk); #1; end
        @(negedge clk); x_valid = 0;
        wait (y_valid);
        repeat ($urandom_range(3)) @(negedge clk);
        @(negedge clk);
        for (int i = 0; i < Q; i++)
          check(int'(y_data[i]) == y[i], $sformatf("set %0d step %0d y[%0d] %0d vs %0d", set, t, i, y_data[i], y[i]));
        y_ready = 1; @(negedge clk); y_ready = 0;
        check(int'(nz_deltas) == rm.nz, $sformatf("set %0d step %0d fired %0d vs %0d", set, t, nz_deltas, rm.nz));
        // lower bound: every fired delta needs its beats on the DRAM port
        check(int'(latency) >= rm.nz, "latency at least one cycle per fired delta");
        nz_sum += rm.nz;
      end
      $display("threshold set %0d: %0d fired deltas in %0d steps (of %0d columns per step)", set, nz_sum, STEPS,
               rm.ncols[0] + rm.ncols[1] + rm.ncols[2]);
    end
    check(n_stall > 0, "delta FIFO full stall occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
