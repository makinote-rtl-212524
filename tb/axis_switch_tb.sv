// axis_switch_tb: self-checking test of axis_switch (2 inputs, 2 outputs).
//
// Each input has a packet generator that marks every beat with its input
// number and a per-input sequence number. A checker on every output verifies
// that beats arrive from the input the testbench routed there, in sequence,
// with nothing lost or duplicated, and that the data, keep and last travel
// with them. Scenarios: routes after reset; pass-through latency (an output is
// valid in the same cycle as its input); crossing both paths after a commit;
// a commit requested while a packet is half sent, which must wait for its
// tlast and hold back new packets; a conflicting route set (both outputs
// naming one input), which must disable the higher output and flag the
// conflict; and the per-output packet counters. Control is written and read
// through the AXI4-Lite port with the register map of eth_shell_pkg.
module axis_switch_tb;
  import eth_shell_pkg::*;
  localparam int unsigned DW = 64;
  localparam int unsigned KW = DW / 8;
  localparam int unsigned AW = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [1:0][DW-1:0] s_tdata, m_tdata;
  logic [1:0][KW-1:0] s_tkeep, m_tkeep;
  logic [1:0] s_tlast, s_tvalid, s_tready, m_tlast, m_tvalid, m_tready;
  logic [AW-1:0] s_axil_awaddr, s_axil_araddr;
  logic s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [63:0] s_axil_wdata, s_axil_rdata;
  logic [7:0] s_axil_wstrb;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready;

  axis_switch #(.DATA_W(DW), .NUM_IN(2), .NUM_OUT(2), .AXIL_AW(AW), .AXIL_DW(64)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ------------------------------------------------------------ generators
  bit          gen_en   [2];
  int          pkt_len  [2];
  int unsigned gen_seq  [2];   // sequence number of the beat on the bus
  int unsigned gen_beat [2];   // beat index inside the current packet
  bit          hold_mid [2];   // stop offering in the middle of a packet

  function automatic logic [DW-1:0] tag(int s, int unsigned n);
    return {8'hA5, 8'(s), 16'(n * 7), 32'(n)};
  endfunction

  always @(negedge clk) begin
    for (int s = 0; s < 2; s++) begin
      if (!s_tvalid[s] || s_tready_q[s]) begin
        // previous beat (if any) was taken: present the next one
        if (s_tvalid[s]) begin
          gen_seq[s]++;
          gen_beat[s] = s_tlast[s] ? 0 : gen_beat[s] + 1;
        end
        s_tvalid[s] = (gen_en[s] || gen_beat[s] != 0) && !(hold_mid[s] && gen_beat[s] == 2) && ($urandom % 4 != 0);
        s_tdata[s]  = tag(s, gen_seq[s]);
        s_tkeep[s]  = KW'(gen_seq[s] * 13);
        s_tlast[s]  = (gen_beat[s] == pkt_len[s] - 1);
      end
    end
  end

  // s_tready sampled at the rising edge
  logic [1:0] s_tready_q;
  always @(posedge clk) s_tready_q <= s_tvalid & s_tready;

  // -------------------------------------------------------------- checkers
  int          exp_src  [2];   // input each output should carry, -1: none
  int unsigned next_seq [2];   // next sequence number expected from input
  int unsigned beats_out[2], pkts_out[2];
  bit          same_cycle_seen;
  int          commit_exp[2];  // routes the pending commit will install
  bit          was_pending;

  // the expected routes change when the switch applies a commit
  always @(negedge clk) begin
    if (was_pending && !dut.pending) exp_src = commit_exp;
    was_pending = dut.pending;
  end

  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < 2; m++) begin
      if (m_tvalid[m] && m_tready[m]) begin
        int src;
        int unsigned n;
        src = int'(m_tdata[m][55:48]);
        n   = m_tdata[m][31:0];
        check(src == exp_src[m], $sformatf("out%0d carried input %0d, expected %0d", m, src, exp_src[m]));
        if (src < 2) begin
          check(n == next_seq[src], $sformatf("out%0d seq %0d expected %0d", m, n, next_seq[src]));
          check(m_tdata[m] == tag(src, n) && m_tkeep[m] == KW'(n * 13), "payload/keep intact");
          next_seq[src] = n + 1;
        end
        beats_out[m]++;
        if (m_tlast[m]) pkts_out[m]++;
      end
      if (m_tvalid[m] && exp_src[m] >= 0 && exp_src[m] < 2 && s_tvalid[exp_src[m]])
        same_cycle_seen = 1;
      if (exp_src[m] < 0) check(!m_tvalid[m], $sformatf("disabled out%0d valid", m));
    end
  end

  // -------------------------------------------------------------- AXI-Lite
  task automatic axil_write(logic [AW-1:0] a, logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = {32'h0, d};
    s_axil_wstrb = 8'hFF; s_axil_wvalid = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 1;
    while (!s_axil_bvalid) @(negedge clk);
    check(s_axil_bresp == RESP_OKAY, "write OKAY");
    @(posedge clk); @(negedge clk);
    s_axil_bready = 0;
  endtask

  task automatic axil_read(logic [AW-1:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk);
    s_axil_arvalid = 0; s_axil_rready = 1;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata[31:0];
    check(s_axil_rresp == RESP_OKAY, "read OKAY");
    @(posedge clk); @(negedge clk);
    s_axil_rready = 0;
  endtask

  localparam logic [31:0] DIS = 32'h8000_0000;
  function automatic logic [AW-1:0] r(logic [15:0] base, int m);
    return AW'(base + 16'(m * 8));
  endfunction

  task automatic quiesce();
    gen_en[0] = 0; gen_en[1] = 0;
    repeat (60) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    s_tvalid = '0; s_tdata = '0; s_tkeep = '0; s_tlast = '0; m_tready = '1;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0;
    s_axil_arvalid = 0; s_axil_rready = 0; s_axil_awaddr = '0; s_axil_araddr = '0;
    s_axil_wdata = '0; s_axil_wstrb = '0;
    for (int s = 0; s < 2; s++) begin
      gen_en[s] = 0; pkt_len[s] = 3 + s * 2; gen_seq[s] = 0; gen_beat[s] = 0;
      hold_mid[s] = 0; next_seq[s] = 0; beats_out[s] = 0; pkts_out[s] = 0;
    end
    exp_src[0] = 0; exp_src[1] = -1;
    same_cycle_seen = 0; was_pending = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // routes after reset
    axil_read(r(SW_REG_ACTIVE, 0), d); check(d == 32'd0, "reset route out0 <- in0");
    axil_read(r(SW_REG_ACTIVE, 1), d); check(d == DIS,   "reset route out1 disabled");
    axil_read(SW_REG_CTRL, d);         check(d == 0,     "no commit pending");

    // normal path: input 0 to output 0, input 1 held
    gen_en[0] = 1; gen_en[1] = 1;
    repeat (300) @(negedge clk) m_tready = 2'($urandom);
    check(beats_out[0] > 50, "out0 carried traffic");
    check(next_seq[1] == 0 && beats_out[1] == 0, "input 1 held while unrouted");
    check(same_cycle_seen, "output valid in the cycle its input is valid");
    m_tready = '1;
    gen_en[1] = 0;
    quiesce();
    gen_en[1] = 0;
    // input 1 may still hold an untaken beat; it keeps it for later

    // cross: out0 <- in1, out1 <- in0
    axil_write(r(SW_REG_ROUTE, 0), 32'd1);
    axil_write(r(SW_REG_ROUTE, 1), 32'd0);
    axil_read(r(SW_REG_ACTIVE, 0), d); check(d == 32'd0, "staged route not active before commit");
    axil_read(r(SW_REG_ROUTE, 0), d);  check(d == 32'd1, "staged route reads back");
    commit_exp[0] = 1; commit_exp[1] = 0;
    axil_write(SW_REG_CTRL, 32'd1);
    axil_read(SW_REG_CTRL, d);         check(d == 0, "commit applied when idle");
    axil_read(r(SW_REG_ACTIVE, 0), d); check(d == 32'd1, "active out0 <- in1");
    axil_read(r(SW_REG_ACTIVE, 1), d); check(d == 32'd0, "active out1 <- in0");
    gen_en[0] = 1; gen_en[1] = 1;
    repeat (400) @(negedge clk) m_tready = 2'($urandom);
    m_tready = '1;
    quiesce();
    check(beats_out[1] > 50 && next_seq[1] > 50, "crossed paths carried traffic");

    // commit while input 1 is inside a packet
    begin
      int unsigned before0;
      hold_mid[1] = 1; gen_en[1] = 1;
      repeat (40) @(negedge clk);               // input 1 stops at beat 2 of a packet
      check(dut.in_pkt[1], "input 1 is inside a packet");
      axil_write(r(SW_REG_ROUTE, 0), 32'd0);     // back to normal
      axil_write(r(SW_REG_ROUTE, 1), DIS);
      commit_exp[0] = 0; commit_exp[1] = -1;
      axil_write(SW_REG_CTRL, 32'd1);
      before0 = next_seq[0];
      gen_en[0] = 1;                             // input 0 wants to start packets
      repeat (30) @(negedge clk);
      axil_read(SW_REG_CTRL, d); check(d[0], "commit waits for tlast");
      check(next_seq[0] == before0, "no new packet starts while commit pending");
      hold_mid[1] = 0;                           // let input 1 finish its packet
      gen_en[1] = 0;
      wait (!dut.in_pkt[1]);
      repeat (3) @(negedge clk);
      axil_read(SW_REG_CTRL, d); check(d == 0, "commit applied after tlast");
      repeat (200) @(negedge clk);
      check(next_seq[0] > before0 + 20, "input 0 flows after commit");
      quiesce();
    end

    // conflicting routes: both outputs name input 0
    axil_write(r(SW_REG_ROUTE, 1), 32'd0);
    commit_exp[0] = 0; commit_exp[1] = -1;
    axil_write(SW_REG_CTRL, 32'd1);
    axil_read(SW_REG_CTRL, d);         check(d == 32'd2, "conflict flagged");
    axil_read(r(SW_REG_ACTIVE, 1), d); check(d == DIS, "higher output disabled on conflict");
    axil_read(r(SW_REG_ACTIVE, 0), d); check(d == 32'd0, "lower output keeps its input");
    gen_en[0] = 1;
    repeat (100) @(negedge clk);
    quiesce();

    // packet counters
    axil_read(r(SW_REG_PKTS, 0), d); check(d == pkts_out[0], $sformatf("out0 packets %0d vs %0d", d, pkts_out[0]));
    axil_read(r(SW_REG_PKTS, 1), d); check(d == pkts_out[1], $sformatf("out1 packets %0d vs %0d", d, pkts_out[1]));
    check(pkts_out[0] > 20 && pkts_out[1] > 10, "both outputs sent packets");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
