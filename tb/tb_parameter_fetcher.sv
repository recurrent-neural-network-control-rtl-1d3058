// tb_parameter_fetcher: random non-zero deltas are fed in; the DDR model
// (random latency stalls) holds a known byte pattern. Every beat handed to
// the MAC side must carry the bytes at layer_base + col*beats*8 + beat*8, the
// delta it belongs to, and its beat number, in request order; no beat may be
// lost or repeated, and more than one burst must be in flight at some point.
module tb_parameter_fetcher;
  import edgedrnn_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;

  logic [31:0] layer_base = 32'h100; logic [7:0] beats = 8'd6;
  logic d_valid = 0, d_ready; delta_item_t d_item = '0;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [63:0] r_data;
  logic w_valid, w_ready = 1; logic [63:0] w_data; delta_item_t w_item; logic [7:0] w_beat; logic idle;

  parameter_fetcher #(.OUTSTANDING(3)) dut (.*);
  ddr_model #(.BYTES(65536), .LATENCY(7), .STALL_PCT(20)) u_ddr (.clk, .rst_n, .ar_valid, .ar_ready,
    .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last);

  int checks = 0, failures = 0, max_inflight = 0, nbeats = 0;
  delta_item_t sent[$];
  int cur_beat = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [7:0] pat(int a); return 8'(a * 7 + (a >> 8) * 13); endfunction

  // consumer side with checks
  always @(posedge clk) if (rst_n) begin
    w_ready <= ($urandom_range(4) != 0);
    if (w_valid && w_ready) begin
      logic [63:0] exp;
      int a;
      a = int'(layer_base) + int'(sent[0].col) * int'(beats) * 8 + cur_beat * 8;
      for (int i = 0; i < 8; i++) exp[8*i +: 8] = pat(a + i);
      checks++;
      if (!(w_data == exp && w_item == sent[0] && int'(w_beat) == cur_beat)) begin
        failures++;
        $display("FAIL: beat col=%0d beat=%0d data %h exp %h", sent[0].col, cur_beat, w_data, exp);
      end
      nbeats++;
      if (cur_beat == int'(beats) - 1) begin
        cur_beat = 0; void'(sent.pop_front());
      end else cur_beat++;
    end
    if (u_ddr.q.size() > max_inflight) max_inflight = u_ddr.q.size();
  end

  initial begin
    int total = 0;
    for (int i = 0; i < 65536; i++) u_ddr.mem[i] = pat(i);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int phase = 0; phase < 2; phase++) begin
      if (phase == 1) begin layer_base = 32'h2000; beats = 8'd1; end
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        d_valid = 1;
        d_item  = '{col: 16'($urandom_range(200)), delta: act_t'($urandom)};
        #1;
        while (!d_ready) begin @(negedge clk); #1; end
        @(posedge clk);
        sent.push_back(d_item);
        total++;
        #1 d_valid = 0;
      end
      wait (idle && sent.size() == 0);
      repeat (3) @(negedge clk);
      check(idle && sent.size() == 0, "all bursts completed, fetcher idle");
    end
    check(nbeats == 300 * 6 + 300 * 1, $sformatf("beat count %0d", nbeats));
    check(max_inflight > 1, "several bursts in flight");
    $display("beats=%0d max in flight=%0d", nbeats, max_inflight);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
