// tb_edgedrnn_pl: end-to-end test of the programmable-logic top at its
// default size (5 inputs, 2 x 128-neuron DeltaGRU, 2 outputs).
//
// A CPU-side driver configures the registers, loads random weights into the
// DDR model in the accelerator's column-major layout, and streams slowly
// varying input frames (four error signals and a 0/1 phase flag) through the
// I/O manager. Every output pair is compared with the bit-exact reference
// model, and the latency register is checked against the 5 ms budget of the
// 200 Hz control loop (500,000 cycles at 100 MHz).
// Mechanisms that must each occur at least once: skipped deltas, the one-time
// bias delta after a sequence reset, a full delta FIFO stalling the scan,
// DRAM back-pressure, output back-pressure, a mid-run sequence reset, and
// frames refused while the accelerator is disabled.
module tb_edgedrnn_pl;
  import edgedrnn_pkg::*;
  import edgedrnn_ref_pkg::*;

  localparam int N_IN = 5, M = 128, Q = 2;
  localparam int STEPS = 24;
  localparam int BASE0 = 32'h0000_0000, BASE1 = 32'h0001_0000, BASE2 = 32'h0003_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;   // 100 MHz

  logic reg_we = 0; logic [3:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic s_valid = 0, s_ready; act_t s_data = 0;
  logic m_valid, m_ready = 0, m_last; act_t m_data;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [63:0] r_data;

  edgedrnn_pl dut (.*);

  ddr_model #(.LATENCY(20), .STALL_PCT(10)) u_ddr (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar_addr, .ar_len,
    .r_valid, .r_ready, .r_data, .r_last);

  int checks = 0, failures = 0;
  int n_skip = 0, n_bias = 0, n_fifo_stall = 0, n_ddr_stall = 0, n_out_bp = 0, n_seq_reset = 0, n_disabled = 0;
  delta_gru_ref rm;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask

  task automatic rd(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk); reg_addr = a; #1 d = reg_rdata;
  endtask

  // one frame in, one frame out, compared with the model
  task automatic run_frame(input int x[], input int t);
    int y_ref[] = new[Q];
    int y_hw[Q];
    logic [31:0] lat, nz;
    rm.step(x, y_ref);
    for (int i = 0; i < N_IN; i++) begin
      @(negedge clk); s_valid = 1; s_data = act_t'(x[i]);
      do @(posedge clk); while (!s_ready);
      @(negedge clk); s_valid = 0;
    end
    for (int i = 0; i < Q; i++) begin
      // hold m_ready low a while on some frames
      m_ready = 0;
      wait (m_valid);
      if (t % 3 == 0) begin
        repeat (3) @(negedge clk);
        if (m_valid) n_out_bp++;
      end
      @(negedge clk); m_ready = 1; y_hw[i] = m_data;
      check(m_last == (i == Q - 1), "m_last position");
      @(posedge clk); #1 m_ready = 0;
    end
    for (int i = 0; i < Q; i++)
      check(y_hw[i] == y_ref[i], $sformatf("step %0d y[%0d] hw=%0d ref=%0d", t, i, y_hw[i], y_ref[i]));
    rd(4'h6, lat);
    rd(4'h7, nz);
    check(nz == rm.nz, $sformatf("step %0d fired deltas hw=%0d ref=%0d", t, nz, rm.nz));
    check(lat > 0 && lat < 500000, $sformatf("step %0d latency %0d cycles within 5 ms", t, lat));
    if (nz < rm.ncols[0] + rm.ncols[1] + rm.ncols[2]) n_skip++;
    if (rm.refv[0][N_IN] == 256 && nz > 0 && t == 0) n_bias++;
    $display("step %0d: y = %0d %0d, fired deltas %0d, latency %0d cycles (%0.1f us at 100 MHz)",
             t, y_hw[0], y_hw[1], nz, lat, lat / 100.0);
  endtask

  always @(posedge clk) begin
    if (dut.u_core.fifo_full_stall) n_fifo_stall++;
    if (ar_valid && !ar_ready) n_ddr_stall++;
  end

  initial begin
    automatic int x[] = new[N_IN];
    logic [31:0] v;
    rm = new(N_IN, M, Q);
    rm.random_weights(32);
    for (int i = 0; i < rm.image_bytes(0); i++) u_ddr.mem[BASE0 + i] = 8'(rm.image_byte(0, i));
    for (int i = 0; i < rm.image_bytes(1); i++) u_ddr.mem[BASE1 + i] = 8'(rm.image_byte(1, i));
    for (int i = 0; i < rm.image_bytes(2); i++) u_ddr.mem[BASE2 + i] = 8'(rm.image_byte(2, i));
    repeat (4) @(negedge clk);
    rst_n = 1;
    rd(4'h1, v); check(v == 4, "THX reset value 2^2/2^8");
    rd(4'h2, v); check(v == 128, "THH reset value 2^7/2^8");
    wr(4'h3, BASE0); wr(4'h4, BASE1); wr(4'h5, BASE2);
    // disabled: words are refused
    @(negedge clk); s_valid = 1; s_data = 0;
    repeat (3) @(posedge clk);
    if (!s_ready) n_disabled++;
    check(!s_ready, "input refused while disabled");
    @(negedge clk); s_valid = 0;
    wr(4'h0, 32'h3);   // enable + new sequence
    foreach (x[i]) x[i] = int'($urandom_range(512)) - 256;
    for (int t = 0; t < STEPS; t++) begin
      if (t == STEPS / 2) begin
        // start a new sequence mid-run
        wr(4'h0, 32'h3);
        rm.reset_state();
        n_seq_reset++;
      end
      for (int i = 0; i < 4; i++) x[i] += int'($urandom_range(24)) - 12;
      if (t % 5 == 4) x[$urandom_range(3)] += 200;     // a step change now and then
      x[4] = ((t / 6) % 2) ? 256 : 0;                  // phase flag s
      run_frame(x, t);
    end
    rd(4'h8, v); check(v == STEPS, "STEPS counter");
    check(n_skip > 0, "skipped deltas occurred");
    check(n_bias > 0, "bias delta after sequence reset occurred");
    check(n_fifo_stall > 0, "delta FIFO full stall occurred");
    check(n_ddr_stall > 0, "DRAM back-pressure occurred");
    check(n_out_bp > 0, "output back-pressure occurred");
    check(n_seq_reset > 0, "mid-run sequence reset occurred");
    check(n_disabled > 0, "disabled input refused");
    $display("mechanisms: skip=%0d bias=%0d fifo_stall=%0d ddr_stall=%0d out_bp=%0d seq_reset=%0d disabled=%0d",
             n_skip, n_bias, n_fifo_stall, n_ddr_stall, n_out_bp, n_seq_reset, n_disabled);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
