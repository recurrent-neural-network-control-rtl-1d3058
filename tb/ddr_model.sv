// ddr_model: behavioural model of the DDR memory behind an AXI4-style read
// port, for simulation only.
//
// A byte array (BYTES long, filled by the testbench through 'mem') answers
// burst reads: each AR request is queued, and LATENCY cycles after it is
// accepted its len+1 beats of BEAT_BYTES bytes (little-endian, lowest address
// in the low byte) are returned, one per cycle in order. With STALL_PCT > 0,
// ar_ready and r_valid are randomly withheld that percentage of cycles to
// exercise back-pressure. Counts accepted requests and beats.
module ddr_model #(
  parameter int unsigned BYTES      = 262144,
  parameter int unsigned BEAT_BYTES = 8,
  parameter int unsigned LATENCY    = 20,
  parameter int unsigned STALL_PCT  = 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ar_valid,
  output logic                    ar_ready,
  input  logic [31:0]             ar_addr,
  input  logic [7:0]              ar_len,
  output logic                    r_valid,
  input  logic                    r_ready,
  output logic [8*BEAT_BYTES-1:0] r_data,
  output logic                    r_last
);
  logic [7:0] mem [BYTES];
  int unsigned reqs, beats_sent;

  typedef struct { longint t; int unsigned addr; int unsigned len; } req_t;
  req_t q[$];
  longint cyc;
  int unsigned beat;
  logic stall_ar, stall_r;

  assign ar_ready = rst_n && !stall_ar;

  always_comb begin
    r_valid = 1'b0;
    r_data  = '0;
    r_last  = 1'b0;
    if (q.size() > 0 && cyc >= q[0].t && !stall_r) begin
      r_valid = 1'b1;
      for (int i = 0; i < BEAT_BYTES; i++)
        r_data[8*i +: 8] = mem[(q[0].addr + beat * BEAT_BYTES + i) % BYTES];
      r_last = (beat == q[0].len);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cyc <= 0; beat <= 0; reqs <= 0; beats_sent <= 0;
      q.delete();
      stall_ar <= 1'b0; stall_r <= 1'b0;
    end else begin
      cyc <= cyc + 1;
      stall_ar <= (STALL_PCT > 0) && ($urandom_range(99) < STALL_PCT);
      stall_r  <= (STALL_PCT > 0) && ($urandom_range(99) < STALL_PCT);
      if (r_valid && r_ready) begin
        beats_sent <= beats_sent + 1;
        if (r_last) begin
          beat <= 0;
          void'(q.pop_front());
        end else beat <= beat + 1;
      end
      if (ar_valid && ar_ready) begin
        q.push_back('{cyc + longint'(LATENCY), ar_addr, 32'(ar_len)});
        reqs <= reqs + 1;
      end
    end
  end
endmodule
