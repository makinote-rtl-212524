// axis_fifo_tb: self-checking test of axis_fifo.
//
// A reference queue in the testbench records every beat the FIFO accepts;
// every beat it emits must match the head of that queue (data, keep, last).
// Phases: (1) latency of one beat through the empty FIFO, expected 2 cycles;
// (2) fill with the output stalled: exactly DEPTH+1 beats must be accepted and
// s_tready must then stay low, with level = DEPTH+1; (3) drain; (4) random
// valid/ready on both sides for a few thousand beats; (5) full-rate streaming:
// with both sides always ready the FIFO must move one beat per cycle.
// Stimulus is applied on the falling clock edge, sampled on the rising one.
module axis_fifo_tb;
  localparam int unsigned DW    = 256;
  localparam int unsigned DEPTH = 16;
  localparam int unsigned KW    = DW / 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [DW-1:0] s_tdata, m_tdata;
  logic [KW-1:0] s_tkeep, m_tkeep;
  logic s_tlast, s_tvalid, s_tready, m_tlast, m_tvalid, m_tready;
  logic [$clog2(DEPTH)+1:0] level;

  axis_fifo #(.DATA_W(DW), .DEPTH(DEPTH)) dut (.*);

  typedef struct packed { logic last; logic [KW-1:0] keep; logic [DW-1:0] data; } beat_t;
  beat_t ref_q[$];
  int checks = 0, failures = 0;
  int unsigned seq = 0;
  int unsigned n_in = 0, n_out = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic beat_t make_beat(int unsigned n);
    beat_t b;
    for (int w = 0; w < DW / 32; w++) b.data[w*32 +: 32] = n * 32'h9E3779B9 + w;
    b.keep = {KW{1'b1}} >> (n % KW);
    b.last = (n % 5) == 4;
    return b;
  endfunction

  // scoreboard on the rising edge
  always @(posedge clk) if (rst_n) begin
    if (s_tvalid && s_tready) begin
      ref_q.push_back('{last: s_tlast, keep: s_tkeep, data: s_tdata});
      n_in++;
    end
    if (m_tvalid && m_tready) begin
      n_out++;
      if (ref_q.size() == 0) check(0, "output with nothing accepted");
      else begin
        beat_t e;
        e = ref_q.pop_front();
        check(m_tdata == e.data && m_tkeep == e.keep && m_tlast == e.last, "beat mismatch");
      end
    end
  end

  task automatic drive(bit v);
    beat_t b;
    b = make_beat(seq);
    s_tdata  = b.data;
    s_tkeep  = b.keep;
    s_tlast  = b.last;
    s_tvalid = v;
  endtask

  // advance one cycle; keep the offered beat if it was not taken
  task automatic step(bit next_valid);
    bit taken;
    @(posedge clk);
    taken = s_tvalid && s_tready;
    @(negedge clk);
    if (taken) seq++;
    if (taken || !s_tvalid) drive(next_valid);
  endtask

  // stop offering once the beat on the bus has been taken
  task automatic end_offer();
    while (s_tvalid) step(0);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    drive(0);
    m_tready = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(level == 0 && !m_tvalid && s_tready, "empty after reset");

    // (1) latency through the empty FIFO
    m_tready = 1'b1;
    drive(1);
    @(posedge clk);
    @(negedge clk); seq++; drive(0);
    cyc = 1;
    while (!m_tvalid && cyc < 10) begin @(negedge clk); cyc++; end
    check(cyc == 2, $sformatf("latency %0d, expected 2", cyc));
    @(negedge clk);

    // (2) fill with the output stalled
    m_tready = 1'b0;
    drive(1);
    for (int i = 0; i < 3 * DEPTH; i++) step(1);
    check(n_in - n_out == DEPTH + 1, $sformatf("held %0d beats, expected %0d", n_in - n_out, DEPTH + 1));
    check(level == DEPTH + 1, "level when full");
    check(!s_tready, "s_tready low when full");

    // (3) drain
    m_tready = 1'b1;
    end_offer();
    repeat (DEPTH + 4) @(negedge clk);
    check(level == 0 && ref_q.size() == 0, "drained");

    // (4) random traffic
    for (int i = 0; i < 4000; i++) begin
      m_tready = ($urandom % 4) != 0;
      step(($urandom % 3) != 0);
      check(32'(level) == ref_q.size(), "level tracks content");
    end
    m_tready = 1'b1;
    end_offer();
    repeat (DEPTH + 4) @(negedge clk);
    check(ref_q.size() == 0, "all random beats delivered");

    // (5) full rate: 200 beats in 200 + latency cycles
    begin
      int unsigned out0;
      out0 = n_out;
      drive(1);
      for (int i = 0; i < 200; i++) step(i < 199);
      repeat (2) @(negedge clk);
      check(n_out - out0 == 200, $sformatf("full rate moved %0d of 200 beats", n_out - out0));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
