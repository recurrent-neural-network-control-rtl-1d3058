// tb_ctrl_regs: reset values (the paper's thresholds 2^2/2^8 and 2^7/2^8),
// write/read-back of every writable register, read-only status registers,
// the one-cycle seq_reset pulse, and that unmapped writes change nothing.
module tb_ctrl_regs;
  import edgedrnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic reg_we = 0; logic [3:0] reg_addr = 0; logic [31:0] reg_wdata = 0, reg_rdata;
  logic seq_reset, enable, busy = 0;
  act_t thx, thh;
  logic [31:0] w_base [NUM_LAYERS];
  logic [31:0] latency = 32'd2090, nz_deltas = 32'd17, steps = 32'd5;

  ctrl_regs dut (.*);

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
    int pulses = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(thx == 4 && thh == 128, "reset thresholds");
    check(!enable && !seq_reset, "reset control");
    reg_addr = 4'h1; #1 check(reg_rdata == 4, "read THX");
    reg_addr = 4'h2; #1 check(reg_rdata == 128, "read THH");
    for (int n = 0; n < 50; n++) begin
      logic [31:0] v [6];
      foreach (v[i]) v[i] = $urandom;
      wr(4'h1, v[1]); wr(4'h2, v[2]); wr(4'h3, v[3]); wr(4'h4, v[4]); wr(4'h5, v[5]);
      wr(4'h9, 32'hffff_ffff); wr(4'h6, 0);
      check(thx == act_t'(v[1][15:0]) && thh == act_t'(v[2][15:0]), "thresholds written");
      check(w_base[0] == v[3] && w_base[1] == v[4] && w_base[2] == v[5], "weight bases written");
      reg_addr = 4'h3; #1 check(reg_rdata == v[3], "read WBASE0");
      reg_addr = 4'h5; #1 check(reg_rdata == v[5], "read WBASE2");
      reg_addr = 4'h6; #1 check(reg_rdata == latency, "read LATENCY");
      reg_addr = 4'h7; #1 check(reg_rdata == nz_deltas, "read NZDELTA");
      reg_addr = 4'h8; #1 check(reg_rdata == steps, "read STEPS");
      reg_addr = 4'hA; #1 check(reg_rdata == 0, "unmapped reads 0");
    end
    // seq_reset is a single-cycle pulse, enable is sticky
    fork
      wr(4'h0, 32'h3);
      repeat (6) @(posedge clk) if (seq_reset) pulses++;
    join
    check(pulses == 1, $sformatf("seq_reset pulse length %0d", pulses));
    check(enable, "enable set");
    busy = 1;
    reg_addr = 4'h0; #1 check(reg_rdata == 32'h6, "CTRL reads enable and busy");
    wr(4'h0, 32'h0);
    check(!enable && !seq_reset, "enable cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
