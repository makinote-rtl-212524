// axis_switch: AXI4-Stream switch routed by software over AXI4-Lite.
//
// The Ethernet subsystem has two of them, the Rx and the Tx switch. Together
// with the two loopback FIFOs between them they let software choose, per
// output, where its stream comes from: the normal MAC <-> DMA paths, an
// Ethernet loopback (received frames sent straight back out) or a DMA loopback
// (DMA transmit data returned to DMA receive, bypassing the Ethernet core).
// That switches exist, sit where they do and are controlled over AXI-Lite is
// from the shell's block diagram; the routing rules and registers below are
// this design's own.
//
// Routing: each output m has a route word (source input, disable bit). Writes
// go to a staged copy; writing 1 to CTRL bit0 requests a commit. While a commit
// is pending the switch lets packets already started run to their tlast but
// starts no new packet; once no input is inside a packet the staged routes
// become active in one step. An input may feed at most one output: if two
// outputs name the same input, the lower-numbered output keeps it, the other
// is disabled and CTRL bit1 reports the conflict. An input not selected by any
// output is held (tready low). After reset output 0 takes input 0 and every
// other output is disabled, which is the normal (non-loopback) path.
//
// Datapath: combinational, no added latency; tready of an input is the tready
// of the output that selects it. Per-output packet counters are readable for
// diagnostics. Register map: see eth_shell_pkg. AXI4-Lite slave: one write and
// one read at a time, each answered one cycle after the request is accepted.
// Every register is 32 bits wide and sits in the low half of a 64-bit word, so
// only wdata[31:0] and wstrb[3:0] are used (a write needs all four strobes);
// the upper half reads as zero.
module axis_switch #(
  parameter int unsigned DATA_W  = 256,
  parameter int unsigned NUM_IN  = 2,
  parameter int unsigned NUM_OUT = 2,
  parameter int unsigned AXIL_AW = 16,
  parameter int unsigned AXIL_DW = 64,
  localparam int unsigned KEEP_W = DATA_W / 8,
  localparam int unsigned SEL_W  = (NUM_IN > 1) ? $clog2(NUM_IN) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // stream inputs
  input  logic [NUM_IN-1:0][DATA_W-1:0]   s_tdata,
  input  logic [NUM_IN-1:0][KEEP_W-1:0]   s_tkeep,
  input  logic [NUM_IN-1:0]               s_tlast,
  input  logic [NUM_IN-1:0]               s_tvalid,
  output logic [NUM_IN-1:0]               s_tready,
  // stream outputs
  output logic [NUM_OUT-1:0][DATA_W-1:0]  m_tdata,
  output logic [NUM_OUT-1:0][KEEP_W-1:0]  m_tkeep,
  output logic [NUM_OUT-1:0]              m_tlast,
  output logic [NUM_OUT-1:0]              m_tvalid,
  input  logic [NUM_OUT-1:0]              m_tready,
  // AXI4-Lite control slave
  input  logic [AXIL_AW-1:0]              s_axil_awaddr,
  input  logic                            s_axil_awvalid,
  output logic                            s_axil_awready,
  input  logic [AXIL_DW-1:0]              s_axil_wdata,
  input  logic [AXIL_DW/8-1:0]            s_axil_wstrb,
  input  logic                            s_axil_wvalid,
  output logic                            s_axil_wready,
  output logic [1:0]                      s_axil_bresp,
  output logic                            s_axil_bvalid,
  input  logic                            s_axil_bready,
  input  logic [AXIL_AW-1:0]              s_axil_araddr,
  input  logic                            s_axil_arvalid,
  output logic                            s_axil_arready,
  output logic [AXIL_DW-1:0]              s_axil_rdata,
  output logic [1:0]                      s_axil_rresp,
  output logic                            s_axil_rvalid,
  input  logic                            s_axil_rready
);
  import eth_shell_pkg::*;

  typedef struct packed {
    logic             dis;
    logic [SEL_W-1:0] src;
  } route_t;

  route_t [NUM_OUT-1:0] staged, active;
  logic                 pending, conflict;
  logic [NUM_IN-1:0]    in_pkt;          // input is between first beat and tlast
  logic [NUM_OUT-1:0][31:0] pkts;

  // ---------------------------------------------------------------- datapath
  logic [NUM_IN-1:0] s_hs;
  always_comb begin
    s_tready = '0;
    for (int m = 0; m < NUM_OUT; m++) begin
      m_tdata[m]  = s_tdata[active[m].src];
      m_tkeep[m]  = s_tkeep[active[m].src];
      m_tlast[m]  = s_tlast[active[m].src];
      // A pending commit holds back the start of new packets.
      m_tvalid[m] = !active[m].dis && s_tvalid[active[m].src] &&
                    (in_pkt[active[m].src] || !pending);
      if (!active[m].dis && (in_pkt[active[m].src] || !pending))
        s_tready[active[m].src] = m_tready[m];
    end
    s_hs = s_tvalid & s_tready;
  end

  // Routes resolved from the staged copy at commit time.
  route_t [NUM_OUT-1:0] resolved;
  logic                 resolve_conflict;
  always_comb begin
    logic [NUM_IN-1:0] taken;
    taken            = '0;
    resolve_conflict = 1'b0;
    for (int m = 0; m < NUM_OUT; m++) begin
      resolved[m] = staged[m];
      if (!staged[m].dis) begin
        if (32'(staged[m].src) >= NUM_IN || taken[staged[m].src]) begin
          resolved[m].dis  = 1'b1;
          resolve_conflict = 1'b1;
        end else begin
          taken[staged[m].src] = 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------- AXI4-Lite side
  localparam int unsigned REG_SHIFT = $clog2(AXIL_DW / 8);
  logic wr_go, rd_go;
  logic [AXIL_AW-1:0] waddr;
  logic [31:0]        wword;         // write data for the addressed 32-bit register
  logic               wlow_en;       // the low byte lanes carry the route/ctrl bits

  assign s_axil_awready = wr_go;
  assign s_axil_wready  = wr_go;
  assign wr_go  = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign rd_go  = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_go;
  assign waddr  = s_axil_awaddr;
  assign wword  = s_axil_wdata[31:0];
  assign wlow_en = &s_axil_wstrb[3:0];

  function automatic logic [31:0] route_word(route_t r);
    logic [31:0] w;
    w = '0;
    w[SW_ROUTE_DIS] = r.dis;
    w[SEL_W-1:0]    = r.src;
    return w;
  endfunction

  function automatic logic [AXIL_AW-1:0] reg_addr(logic [15:0] base, int unsigned idx);
    return AXIL_AW'(base) + AXIL_AW'(idx << REG_SHIFT);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int m = 0; m < NUM_OUT; m++) begin
        staged[m] <= '{dis: (m != 0), src: '0};
        active[m] <= '{dis: (m != 0), src: '0};
        pkts[m]   <= '0;
      end
      pending       <= 1'b0;
      conflict      <= 1'b0;
      in_pkt        <= '0;
      s_axil_bvalid <= 1'b0;
      s_axil_bresp  <= RESP_OKAY;
      s_axil_rvalid <= 1'b0;
      s_axil_rresp  <= RESP_OKAY;
      s_axil_rdata  <= '0;
    end else begin
      // packet tracking per input
      for (int s = 0; s < NUM_IN; s++)
        if (s_hs[s]) in_pkt[s] <= !s_tlast[s];
      for (int m = 0; m < NUM_OUT; m++)
        if (m_tvalid[m] && m_tready[m] && m_tlast[m]) pkts[m] <= pkts[m] + 1;

      // commit once every input is between packets
      if (pending && in_pkt == '0) begin
        active   <= resolved;
        conflict <= resolve_conflict;
        pending  <= 1'b0;
      end

      // register writes
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr_go) begin
        s_axil_bvalid <= 1'b1;
        s_axil_bresp  <= RESP_OKAY;
        if (wlow_en) begin
          if (waddr == AXIL_AW'(SW_REG_CTRL) && wword[0]) pending <= 1'b1;
          for (int m = 0; m < NUM_OUT; m++)
            if (waddr == reg_addr(SW_REG_ROUTE, m)) begin
              staged[m].dis <= wword[SW_ROUTE_DIS];
              staged[m].src <= wword[SEL_W-1:0];
            end
        end
      end

      // register reads
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (rd_go) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rresp  <= RESP_OKAY;
        s_axil_rdata  <= '0;
        if (s_axil_araddr == AXIL_AW'(SW_REG_CTRL))
          s_axil_rdata <= AXIL_DW'({conflict, pending});
        for (int m = 0; m < NUM_OUT; m++) begin
          if (s_axil_araddr == reg_addr(SW_REG_ROUTE, m))
            s_axil_rdata <= AXIL_DW'(route_word(staged[m]));
          if (s_axil_araddr == reg_addr(SW_REG_ACTIVE, m))
            s_axil_rdata <= AXIL_DW'(route_word(active[m]));
          if (s_axil_araddr == reg_addr(SW_REG_PKTS, m))
            s_axil_rdata <= AXIL_DW'(pkts[m]);
        end
      end
    end
  end

  // An input feeds at most one output.
  always_comb begin
    for (int s = 0; s < NUM_IN; s++) begin
      int users;
      users = 0;
      for (int m = 0; m < NUM_OUT; m++)
        if (!active[m].dis && 32'(active[m].src) == s) users++;
      a_one_user : assert (!rst_n || users <= 1);
    end
  end

  // AXI4-Stream rule on every input: a waiting beat stays.
  for (genvar s = 0; s < NUM_IN; s++) begin : g_in_chk
    a_hold : assert property (@(posedge clk) disable iff (!rst_n)
      s_tvalid[s] && !s_tready[s] |=> s_tvalid[s]);
  end

  initial begin
    assert (NUM_OUT <= SW_MAX_PORTS && NUM_IN <= 256)
      else $fatal(1, "axis_switch: register map has room for %0d outputs", SW_MAX_PORTS);
  end

endmodule
