// axil_interconnect_tb: self-checking test of axil_interconnect (4 slaves).
//
// Each slave is modelled by a small register store in the testbench that
// answers after a random delay, takes address and data in random order and
// records which offsets it was written at. Random writes and reads go to all
// four windows and to addresses outside the map. Checks: a write lands only
// in the slave its address selects, at the offset within the window, with its
// data and byte strobes; a read returns that slave's data and response code
// (slave 2 answers SLVERR to show the response is passed through); an
// unmapped address gets DECERR and reaches no slave.
module axil_interconnect_tb;
  import eth_shell_pkg::*;
  localparam int unsigned NS = 4, AW = 32, DW = 64, WS = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [AW-1:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic [DW-1:0] s_wdata, s_rdata;
  logic [DW/8-1:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [NS-1:0][WS-1:0] m_awaddr, m_araddr;
  logic [NS-1:0] m_awvalid, m_awready, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [NS-1:0][DW-1:0] m_wdata, m_rdata;
  logic [NS-1:0][DW/8-1:0] m_wstrb;
  logic [NS-1:0][1:0] m_bresp, m_rresp;
  logic [NS-1:0] m_arvalid, m_arready, m_rvalid, m_rready;

  axil_interconnect #(.NUM_SLV(NS), .AW(AW), .DW(DW), .WIN_SHIFT(WS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ------------------------------------------------------------ slave models
  logic [DW-1:0] store [NS][logic [WS-1:0]];
  int unsigned   writes_seen [NS];
  logic [WS-1:0] aw_q [NS];
  bit            aw_have [NS], w_have [NS];
  logic [DW-1:0] w_q [NS];
  logic [DW/8-1:0] ws_q [NS];
  logic [WS-1:0] ar_q [NS];
  bit            ar_have [NS];

  function automatic logic [1:0] slave_resp(int i);
    return (i == 2) ? RESP_SLVERR : RESP_OKAY;
  endfunction

  always @(negedge clk) begin
    for (int i = 0; i < NS; i++) begin
      m_awready[i] = !aw_have[i] && ($urandom % 3 == 0);
      m_wready[i]  = !w_have[i]  && ($urandom % 3 == 0);
      m_arready[i] = !ar_have[i] && ($urandom % 3 == 0);
      if (!m_bvalid[i] && aw_have[i] && w_have[i] && ($urandom % 2 == 0)) begin
        logic [DW-1:0] old;
        old = store[i].exists(aw_q[i]) ? store[i][aw_q[i]] : '0;
        for (int b = 0; b < DW / 8; b++)
          if (ws_q[i][b]) old[b*8 +: 8] = w_q[i][b*8 +: 8];
        store[i][aw_q[i]] = old;
        writes_seen[i]++;
        aw_have[i] = 0; w_have[i] = 0;
        m_bvalid[i] = 1; m_bresp[i] = slave_resp(i);
      end
      if (!m_rvalid[i] && ar_have[i] && ($urandom % 2 == 0)) begin
        m_rdata[i]  = store[i].exists(ar_q[i]) ? store[i][ar_q[i]] : '0;
        m_rresp[i]  = slave_resp(i);
        m_rvalid[i] = 1; ar_have[i] = 0;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NS; i++) begin
      if (m_awvalid[i] && m_awready[i]) begin aw_q[i] <= m_awaddr[i]; aw_have[i] <= 1; end
      if (m_wvalid[i] && m_wready[i]) begin w_q[i] <= m_wdata[i]; ws_q[i] <= m_wstrb[i]; w_have[i] <= 1; end
      if (m_arvalid[i] && m_arready[i]) begin ar_q[i] <= m_araddr[i]; ar_have[i] <= 1; end
      if (m_bvalid[i] && m_bready[i]) m_bvalid[i] <= 0;
      if (m_rvalid[i] && m_rready[i]) m_rvalid[i] <= 0;
    end
  end

  // ------------------------------------------------------------ master side
  task automatic do_write(logic [AW-1:0] a, logic [DW-1:0] d, logic [DW/8-1:0] st,
                          output logic [1:0] resp);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wstrb = st; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    resp = s_bresp;
    @(posedge clk); @(negedge clk);
    s_bready = 0;
  endtask

  task automatic do_read(logic [AW-1:0] a, output logic [DW-1:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0; s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata; resp = s_rresp;
    @(posedge clk); @(negedge clk);
    s_rready = 0;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference of what each slave should hold
  logic [DW-1:0] ref_mem [NS][logic [WS-1:0]];

  initial begin
    logic [1:0] resp;
    logic [DW-1:0] d;
    int unsigned ref_writes [NS];
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = '0; s_araddr = '0; s_wdata = '0; s_wstrb = '0;
    for (int i = 0; i < NS; i++) begin
      m_bvalid[i] = 0; m_rvalid[i] = 0; m_bresp[i] = '0; m_rresp[i] = '0; m_rdata[i] = '0;
      aw_have[i] = 0; w_have[i] = 0; ar_have[i] = 0; writes_seen[i] = 0; ref_writes[i] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int t = 0; t < 600; t++) begin
      int sl;
      logic [WS-1:0] off;
      logic [AW-1:0] a;
      bit unmapped;
      sl  = int'($urandom % NS);
      off = WS'($urandom % 16) << 3;
      unmapped = ($urandom % 8 == 0);
      a = (AW'(sl) << WS) | AW'(off);
      if (unmapped) a = a | (AW'(1 + $urandom % 255) << (WS + 2));
      if ($urandom % 2) begin
        logic [DW-1:0] wd;
        logic [DW/8-1:0] st;
        wd = {$urandom, $urandom};
        st = 8'($urandom) | 8'h01;
        do_write(a, wd, st, resp);
        if (unmapped) check(resp == RESP_DECERR, "unmapped write gets DECERR");
        else begin
          logic [DW-1:0] old;
          check(resp == slave_resp(sl), $sformatf("write resp from slave %0d", sl));
          old = ref_mem[sl].exists(off) ? ref_mem[sl][off] : '0;
          for (int b = 0; b < DW / 8; b++) if (st[b]) old[b*8 +: 8] = wd[b*8 +: 8];
          ref_mem[sl][off] = old;
          ref_writes[sl]++;
        end
      end else begin
        do_read(a, d, resp);
        if (unmapped) check(resp == RESP_DECERR && d == '0, "unmapped read gets DECERR");
        else begin
          check(resp == slave_resp(sl), $sformatf("read resp from slave %0d", sl));
          check(d == (ref_mem[sl].exists(off) ? ref_mem[sl][off] : '0),
                $sformatf("read data slave %0d offset %0h", sl, off));
        end
      end
    end
    for (int i = 0; i < NS; i++)
      check(writes_seen[i] == ref_writes[i] && ref_writes[i] > 20,
            $sformatf("slave %0d took %0d writes, expected %0d", i, writes_seen[i], ref_writes[i]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
