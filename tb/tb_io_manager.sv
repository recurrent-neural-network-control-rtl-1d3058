// tb_io_manager: input words are grouped into frames of N_IN and handed to a
// mock accelerator with random x_ready; output frames from the mock are
// streamed back word by word under random m_ready. Checks frame contents and
// order, m_last, that nothing is accepted while disabled, and 'clear'.
module tb_io_manager;
  import edgedrnn_pkg::*;
  localparam int N_IN = 5, Q = 2;

  logic clk = 0, rst_n = 0, clear = 0, enable = 0;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready; act_t s_data = 0;
  logic x_valid, x_ready = 0; act_t x_data [N_IN];
  logic y_valid = 0, y_ready; act_t y_data [Q];
  logic m_valid, m_ready = 0, m_last; act_t m_data;

  io_manager #(.N_IN(N_IN), .Q(Q)) dut (.*);

  int checks = 0, failures = 0;
  int words_in[$], frames_out[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mock accelerator: takes a frame, answers with (sum, first word) after a delay
  int pend[$];
  always @(posedge clk) if (rst_n) begin
    x_ready <= ($urandom_range(3) == 0);
    if (x_valid && x_ready) begin
      int sum;
      sum = 0;
      for (int i = 0; i < N_IN; i++) begin
        checks++;
        if (int'(x_data[i]) != words_in[0]) begin failures++; $display("FAIL: frame word %0d", i); end
        sum += words_in[0];
        void'(words_in.pop_front());
      end
      pend.push_back(sum & 16'hffff);
      pend.push_back(int'(x_data[0]) & 16'hffff);
    end
    if (y_valid && y_ready) begin
      y_valid <= 1'b0;
      frames_out.push_back(int'(y_data[0]) & 16'hffff);
      frames_out.push_back(int'(y_data[1]) & 16'hffff);
    end
    if (!y_valid && pend.size() >= 2) begin
      y_valid   <= 1'b1;
      y_data[0] <= act_t'(pend.pop_front());
      y_data[1] <= act_t'(pend.pop_front());
    end
  end

  int got = 0;
  always @(posedge clk) if (rst_n) begin
    m_ready <= ($urandom_range(2) == 0);
    if (m_valid && m_ready) begin
      checks++;
      if ((int'(m_data) & 16'hffff) != frames_out[0] || m_last != (got % Q == Q - 1)) begin
        failures++; $display("FAIL: output word %0d", got);
      end
      void'(frames_out.pop_front());
      got++;
    end
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); s_valid = 1; #1;
    check(!s_ready, "refused while disabled");
    @(negedge clk); s_valid = 0; enable = 1;
    for (int n = 0; n < 200 * N_IN; n++) begin
      @(negedge clk);
      s_valid = 1; s_data = act_t'($urandom);
      #1;
      while (!s_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      words_in.push_back(int'(s_data));
      #1 s_valid = 0;
    end
    wait (got == 200 * Q);
    repeat (5) @(negedge clk);
    check(got == 200 * Q && !m_valid && !x_valid, "all frames returned");
    // clear drops a partial frame
    @(negedge clk); s_valid = 1; @(negedge clk); s_valid = 0; clear = 1; @(negedge clk); clear = 0;
    words_in.delete();
    for (int n = 0; n < N_IN - 1; n++) begin
      @(negedge clk); s_valid = 1; s_data = act_t'(n); @(posedge clk); words_in.push_back(n); #1 s_valid = 0;
    end
    repeat (3) @(negedge clk);
    check(!x_valid, "partial frame after clear is not offered");
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
