// eth_subsystem_tb: end-to-end test of the Ethernet subsystem at its default
// sizes (256-bit streams, 512-beat FIFOs, 64-bit AXI4-Lite).
//
// The testbench plays the Ethernet MAC (it sources the receive stream and
// sinks the transmit stream), the DMA engine (it sources MM2S and sinks S2MM)
// and the control registers of both cores behind the MAC and DMA windows.
// Every beat carries its source and a sequence number; the sinks check that
// each beat comes from the source the current mode connects to them, in order,
// with nothing lost. Modes are switched through the switch registers, the way
// a driver would:
//   normal          MAC Rx -> DMA S2MM and DMA MM2S -> MAC Tx
//   Ethernet loop   MAC Rx -> MAC Tx (the DMA engine sees nothing)
//   DMA loop        DMA MM2S -> DMA S2MM (the MAC sees nothing)
// It also measures the latency of a single beat on each path (2 cycles per
// FIFO crossed, the switches add none), fills the Rx and Tx FIFOs against a
// stalled sink until the source is back-pressured, switches mode while a
// packet is half sent (the commit must wait), reaches the MAC and DMA control
// windows and an unmapped address. Each of these mechanisms is counted and a
// mechanism that never happened counts as a failure.
module eth_subsystem_tb;
  import eth_shell_pkg::*;
  localparam int unsigned DW = 256, KW = DW / 8, DEPTH = 512;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  // ---------------------------------------------------------- DUT signals
  logic [DW-1:0] mac_rx_tdata, mac_tx_tdata, dma_mm2s_tdata, dma_s2mm_tdata;
  logic [KW-1:0] mac_rx_tkeep, mac_tx_tkeep, dma_mm2s_tkeep, dma_s2mm_tkeep;
  logic mac_rx_tlast, mac_rx_tvalid, mac_rx_tready;
  logic mac_tx_tlast, mac_tx_tvalid, mac_tx_tready;
  logic dma_mm2s_tlast, dma_mm2s_tvalid, dma_mm2s_tready;
  logic dma_s2mm_tlast, dma_s2mm_tvalid, dma_s2mm_tready;
  logic [31:0] s_axil_awaddr, s_axil_araddr;
  logic s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [63:0] s_axil_wdata, s_axil_rdata;
  logic [7:0] s_axil_wstrb;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready;
  logic [1:0][15:0] ext_axil_awaddr, ext_axil_araddr;
  logic [1:0] ext_axil_awvalid, ext_axil_awready, ext_axil_wvalid, ext_axil_wready;
  logic [1:0][63:0] ext_axil_wdata, ext_axil_rdata;
  logic [1:0][7:0] ext_axil_wstrb;
  logic [1:0][1:0] ext_axil_bresp, ext_axil_rresp;
  logic [1:0] ext_axil_bvalid, ext_axil_bready, ext_axil_arvalid, ext_axil_arready;
  logic [1:0] ext_axil_rvalid, ext_axil_rready;
  logic [10:0] rx_fifo_level, tx_fifo_level, eth_lb_fifo_level, dma_lb_fifo_level;

  eth_subsystem dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------------------------------------------------- sources
  // source 0 = MAC receive, source 1 = DMA MM2S
  bit          gen_en [2];
  bit          hold_mid [2];
  bit          single [2];       // send exactly one single-beat packet
  int unsigned gen_seq [2], gen_beat [2], sent [2], cur_len [2];
  int          busy_pct;         // chance of offering a beat, percent
  logic [1:0]  src_valid, src_ready, src_last, taken_q;
  logic [1:0][DW-1:0] src_data;
  logic [1:0][KW-1:0] src_keep;

  function automatic logic [DW-1:0] tag(int s, int unsigned n);
    logic [DW-1:0] d;
    for (int w = 0; w < DW / 32; w++) d[w*32 +: 32] = n * 32'h01000193 + 32'(w) + 32'(s << 28);
    d[DW-1 -: 8] = 8'(s);
    d[DW-9 -: 32] = n;
    return d;
  endfunction
  function automatic int unsigned pkt_len(int unsigned n);
    return 1 + (n / 7) % 6;
  endfunction

  assign {mac_rx_tvalid, mac_rx_tdata, mac_rx_tkeep, mac_rx_tlast} =
         {src_valid[0], src_data[0], src_keep[0], src_last[0]};
  assign {dma_mm2s_tvalid, dma_mm2s_tdata, dma_mm2s_tkeep, dma_mm2s_tlast} =
         {src_valid[1], src_data[1], src_keep[1], src_last[1]};
  assign src_ready = {dma_mm2s_tready, mac_rx_tready};

  always @(posedge clk) taken_q <= src_valid & src_ready;

  always @(negedge clk) begin
    for (int s = 0; s < 2; s++) begin
      if (!src_valid[s] || taken_q[s]) begin
        if (src_valid[s]) begin
          sent[s]++;
          gen_beat[s] = src_last[s] ? 0 : gen_beat[s] + 1;
          gen_seq[s]++;
          if (single[s]) begin single[s] = 0; gen_en[s] = 0; end
        end
        src_valid[s] = (gen_en[s] || gen_beat[s] != 0) &&
                       !(hold_mid[s] && gen_beat[s] == 2) &&
                       (single[s] || int'($urandom % 100) < busy_pct);
        if (gen_beat[s] == 0) cur_len[s] = pkt_len(gen_seq[s]);
        src_data[s]  = tag(s, gen_seq[s]);
        src_keep[s]  = KW'({$urandom, $urandom});
        src_last[s]  = single[s] || (gen_beat[s] == cur_len[s] - 1);
      end
    end
  end

  // ---------------------------------------------------------- sinks
  // sink 0 = DMA S2MM, sink 1 = MAC transmit
  int          exp_src [2];      // -1: the sink must see nothing
  int unsigned next_seq [2], rcvd [2];
  int          sink_ready_pct [2];
  logic [1:0]  snk_valid, snk_ready, snk_last;
  logic [1:0][DW-1:0] snk_data;
  assign snk_valid = {mac_tx_tvalid, dma_s2mm_tvalid};
  assign snk_data  = {mac_tx_tdata, dma_s2mm_tdata};
  assign snk_last  = {mac_tx_tlast, dma_s2mm_tlast};
  assign {mac_tx_tready, dma_s2mm_tready} = snk_ready;

  always @(negedge clk)
    for (int k = 0; k < 2; k++) snk_ready[k] = int'($urandom % 100) < sink_ready_pct[k];

  // keep is checked on a beat-by-beat shadow of what each source sent
  logic [KW-1:0] keep_log [2][$];
  bit            last_log [2][$];
  always @(posedge clk) if (rst_n)
    for (int s = 0; s < 2; s++) if (src_valid[s] && src_ready[s]) begin
      keep_log[s].push_back(src_keep[s]);
      last_log[s].push_back(src_last[s]);
    end

  // mechanisms seen
  int unsigned n_rx_path, n_tx_path, n_eth_lb, n_dma_lb, n_rx_bp, n_tx_bp;
  int unsigned n_deferred_commit, n_mac_ctrl, n_dma_ctrl, n_decerr;

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 2; k++) if (snk_valid[k] && snk_ready[k]) begin
      int s;
      int unsigned n;
      s = int'(snk_data[k][DW-1 -: 8]);
      n = snk_data[k][DW-9 -: 32];
      check(s == exp_src[k], $sformatf("sink %0d got source %0d, expected %0d", k, s, exp_src[k]));
      if (s < 2) begin
        logic [KW-1:0] kp;
        check(n == next_seq[s], $sformatf("sink %0d seq %0d expected %0d", k, n, next_seq[s]));
        check(snk_data[k] == tag(s, n), "payload intact");
        kp = keep_log[s].size() ? keep_log[s].pop_front() : '0;
        check((k == 0 ? dma_s2mm_tkeep : mac_tx_tkeep) == kp, "keep intact");
        check(last_log[s].size() > 0 && snk_last[k] == last_log[s].pop_front(), "packet boundary intact");
        next_seq[s] = n + 1;
        rcvd[s]++;
        if (k == 0 && s == 0) n_rx_path++;
        if (k == 1 && s == 1) n_tx_path++;
        if (k == 1 && s == 0) n_eth_lb++;
        if (k == 0 && s == 1) n_dma_lb++;
      end
    end
    if (mac_rx_tvalid && !mac_rx_tready) n_rx_bp++;
    if (dma_mm2s_tvalid && !dma_mm2s_tready) n_tx_bp++;
  end

  // ---------------------------------------------------------- MAC / DMA control models
  logic [63:0] ext_regs [2][logic [15:0]];
  always @(negedge clk)
    for (int e = 0; e < 2; e++) begin
      ext_axil_awready[e] = 1'b1;
      ext_axil_wready[e]  = 1'b1;
      ext_axil_arready[e] = 1'b1;
    end
  logic [1:0][15:0] ext_aw_q;
  always @(posedge clk) if (!rst_n) begin
    ext_axil_bvalid <= '0; ext_axil_rvalid <= '0;
    ext_axil_bresp <= '0; ext_axil_rresp <= '0; ext_axil_rdata <= '0;
  end else begin
    for (int e = 0; e < 2; e++) begin
      // the interconnect presents address and data together to these models
      if (ext_axil_awvalid[e] && ext_axil_wvalid[e]) begin
        ext_regs[e][ext_axil_awaddr[e]] = ext_axil_wdata[e];
        ext_axil_bvalid[e] <= 1'b1;
        if (e == 0) n_mac_ctrl++; else n_dma_ctrl++;
      end
      if (ext_axil_bvalid[e] && ext_axil_bready[e]) ext_axil_bvalid[e] <= 1'b0;
      if (ext_axil_arvalid[e]) begin
        ext_axil_rdata[e]  <= ext_regs[e].exists(ext_axil_araddr[e]) ?
                              ext_regs[e][ext_axil_araddr[e]] : 64'(e + 1);
        ext_axil_rvalid[e] <= 1'b1;
      end
      if (ext_axil_rvalid[e] && ext_axil_rready[e]) ext_axil_rvalid[e] <= 1'b0;
    end
  end

  // ---------------------------------------------------------- AXI-Lite master
  task automatic axil_write(logic [31:0] a, logic [63:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wstrb = '1; s_axil_wvalid = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 1;
    while (!s_axil_bvalid) @(negedge clk);
    resp = s_axil_bresp;
    @(posedge clk); @(negedge clk);
    s_axil_bready = 0;
  endtask
  task automatic axil_read(logic [31:0] a, output logic [63:0] d, output logic [1:0] resp);
    @(negedge clk);
    s_axil_araddr = a; s_axil_arvalid = 1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk);
    s_axil_arvalid = 0; s_axil_rready = 1;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata; resp = s_axil_rresp;
    @(posedge clk); @(negedge clk);
    s_axil_rready = 0;
  endtask

  function automatic logic [31:0] sw_addr(int unsigned win, logic [15:0] reg_base, int idx);
    return (32'(win) << WIN_SHIFT) | 32'(reg_base) | 32'(idx * 8);
  endfunction

  localparam logic [63:0] DIS = 64'h8000_0000;

  // route both switches and commit; returns whether the commit was deferred
  task automatic set_routes(logic [63:0] rx0, logic [63:0] rx1, logic [63:0] tx0, logic [63:0] tx1);
    logic [1:0] resp;
    logic [63:0] d;
    axil_write(sw_addr(WIN_RXSW, SW_REG_ROUTE, 0), rx0, resp); check(resp == RESP_OKAY, "rx route");
    axil_write(sw_addr(WIN_RXSW, SW_REG_ROUTE, 1), rx1, resp); check(resp == RESP_OKAY, "rx route");
    axil_write(sw_addr(WIN_TXSW, SW_REG_ROUTE, 0), tx0, resp); check(resp == RESP_OKAY, "tx route");
    axil_write(sw_addr(WIN_TXSW, SW_REG_ROUTE, 1), tx1, resp); check(resp == RESP_OKAY, "tx route");
    axil_write(sw_addr(WIN_RXSW, SW_REG_CTRL, 0), 64'd1, resp);
    axil_write(sw_addr(WIN_TXSW, SW_REG_CTRL, 0), 64'd1, resp);
    axil_read(sw_addr(WIN_RXSW, SW_REG_ACTIVE, 0), d, resp); check(d == rx0, "rx out0 active");
    axil_read(sw_addr(WIN_TXSW, SW_REG_ACTIVE, 1), d, resp); check(d == tx1, "tx out1 active");
  endtask

  // run traffic for a while, then stop the sources and wait for everything to arrive
  task automatic run_traffic(int cycles);
    repeat (cycles) @(negedge clk);
    gen_en[0] = 0; gen_en[1] = 0;
    repeat (3000) begin
      @(negedge clk);
      if (src_valid == '0 && gen_beat[0] == 0 && gen_beat[1] == 0 &&
          rx_fifo_level == 0 && tx_fifo_level == 0 &&
          eth_lb_fifo_level == 0 && dma_lb_fifo_level == 0) break;
    end
    repeat (4) @(negedge clk);
  endtask

  // clock edges from the edge that takes a single beat from source s to the
  // first edge at which sink k shows it valid
  task automatic latency(int s, int k, int expected, string name);
    int cyc;
    @(negedge clk);
    single[s] = 1; gen_en[s] = 1;
    do @(posedge clk); while (!(src_valid[s] && src_ready[s]));
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!snk_valid[k] && cyc < 50);
    check(cyc == expected, $sformatf("%s latency %0d cycles, expected %0d", name, cyc, expected));
    repeat (10) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] resp;
    logic [63:0] d;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    s_axil_awaddr = '0; s_axil_araddr = '0; s_axil_wdata = '0; s_axil_wstrb = '0;
    src_valid = '0; src_data = '0; src_keep = '0; src_last = '0; snk_ready = '0;
    busy_pct = 80;
    for (int i = 0; i < 2; i++) begin
      gen_en[i] = 0; hold_mid[i] = 0; single[i] = 0; gen_seq[i] = 0; gen_beat[i] = 0; sent[i] = 0;
      next_seq[i] = 0; rcvd[i] = 0; sink_ready_pct[i] = 100;
    end
    {n_rx_path, n_tx_path, n_eth_lb, n_dma_lb, n_rx_bp, n_tx_bp} = '0;
    {n_deferred_commit, n_mac_ctrl, n_dma_ctrl, n_decerr} = '0;
    exp_src[0] = 0; exp_src[1] = 1;               // normal mode after reset
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---- normal mode: latencies, then traffic with random stalls
    latency(0, 0, 2, "MAC Rx -> DMA S2MM");
    latency(1, 1, 2, "DMA MM2S -> MAC Tx");
    sink_ready_pct[0] = 70; sink_ready_pct[1] = 70;
    gen_en[0] = 1; gen_en[1] = 1;
    run_traffic(3000);
    check(rcvd[0] == sent[0] && rcvd[1] == sent[1], "normal mode delivered everything");

    // ---- back-pressure: stall both sinks until the FIFOs are full
    sink_ready_pct[0] = 0; sink_ready_pct[1] = 0; busy_pct = 100;
    gen_en[0] = 1; gen_en[1] = 1;
    repeat (DEPTH + 100) @(negedge clk);
    check(rx_fifo_level == DEPTH + 1 && !mac_rx_tready, "Rx FIFO full holds off the MAC");
    check(tx_fifo_level == DEPTH + 1 && !dma_mm2s_tready, "Tx FIFO full holds off the DMA");
    sink_ready_pct[0] = 100; sink_ready_pct[1] = 100; busy_pct = 80;
    run_traffic(200);
    check(rcvd[0] == sent[0] && rcvd[1] == sent[1], "nothing lost under back-pressure");

    // ---- Ethernet loopback: MAC Rx comes back on MAC Tx
    exp_src[0] = -1; exp_src[1] = 0;
    set_routes(DIS, 64'd0, 64'd1, DIS);
    latency(0, 1, 6, "Ethernet loopback");
    sink_ready_pct[1] = 60;
    gen_en[0] = 1; gen_en[1] = 1;                 // DMA traffic must stay held
    run_traffic(3000);
    gen_en[1] = 0;
    check(rcvd[0] == sent[0], "Ethernet loopback delivered everything");
    check(rcvd[1] == sent[1], "DMA source held, not dropped, in Ethernet loopback");

    // ---- DMA loopback, entered while a received packet is half through the
    // Rx switch: the switch must finish that packet before it re-routes
    hold_mid[0] = 1; gen_en[0] = 1;
    sink_ready_pct[1] = 100;
    repeat (40) @(negedge clk);                   // MAC source stops inside a packet
    begin
      logic [1:0] r2;
      axil_write(sw_addr(WIN_RXSW, SW_REG_ROUTE, 0), 64'd1, r2);
      axil_write(sw_addr(WIN_RXSW, SW_REG_ROUTE, 1), DIS, r2);
      axil_write(sw_addr(WIN_RXSW, SW_REG_CTRL, 0), 64'd1, r2);
      repeat (20) @(negedge clk);
      axil_read(sw_addr(WIN_RXSW, SW_REG_CTRL, 0), d, r2);
      if (d[0]) n_deferred_commit++;
      check(d[0] == 1'b1, "mode switch waits for the packet in flight");
      hold_mid[0] = 0; gen_en[0] = 0;             // finish the packet
      repeat (60) @(negedge clk);
      axil_read(sw_addr(WIN_RXSW, SW_REG_CTRL, 0), d, r2);
      check(d[0] == 1'b0, "mode switch done after tlast");
    end
    // the DMA source still holds the beat it offered during the Ethernet
    // loopback; it flows as soon as the routes are in place
    exp_src[0] = 1; exp_src[1] = -1;
    set_routes(64'd1, DIS, DIS, 64'd0);
    latency(1, 0, 2, "DMA loopback");
    sink_ready_pct[0] = 60;
    gen_en[1] = 1;
    run_traffic(3000);
    check(rcvd[1] == sent[1], "DMA loopback delivered everything");

    // ---- back to normal
    exp_src[0] = 0; exp_src[1] = 1;
    set_routes(64'd0, DIS, 64'd0, DIS);
    sink_ready_pct[0] = 80; sink_ready_pct[1] = 80;
    gen_en[0] = 1; gen_en[1] = 1;
    run_traffic(1000);
    check(rcvd[0] == sent[0] && rcvd[1] == sent[1], "normal mode again");

    // ---- control windows of the MAC and DMA cores, and an unmapped address
    axil_write(32'h0000_0010, 64'hDEAD_BEEF_0000_0001, resp); check(resp == RESP_OKAY, "MAC write");
    axil_write(32'h0001_0020, 64'hCAFE_F00D_0000_0002, resp); check(resp == RESP_OKAY, "DMA write");
    axil_read(32'h0000_0010, d, resp); check(d == 64'hDEAD_BEEF_0000_0001, "MAC register read back");
    axil_read(32'h0001_0020, d, resp); check(d == 64'hCAFE_F00D_0000_0002, "DMA register read back");
    check(ext_regs[0].exists(16'h0010) && !ext_regs[1].exists(16'h0010), "MAC write stayed in MAC window");
    axil_read(32'h0004_0000, d, resp);
    if (resp == RESP_DECERR) n_decerr++;
    check(resp == RESP_DECERR, "unmapped address DECERR");

    // ---- switch packet counters
    axil_read(sw_addr(WIN_TXSW, SW_REG_PKTS, 1), d, resp);
    check(d > 0, "Tx switch counted DMA loopback packets");

    // ---- every mechanism happened
    check(n_rx_path > 0, "receive path used");
    check(n_tx_path > 0, "transmit path used");
    check(n_eth_lb > 0,  "Ethernet loopback used");
    check(n_dma_lb > 0,  "DMA loopback used");
    check(n_rx_bp > 0,   "Rx back-pressure happened");
    check(n_tx_bp > 0,   "Tx back-pressure happened");
    check(n_deferred_commit > 0, "deferred route commit happened");
    check(n_mac_ctrl > 0 && n_dma_ctrl > 0, "MAC and DMA control reached");
    check(n_decerr > 0,  "decode error happened");
    $display("mechanisms: rx=%0d tx=%0d eth_lb=%0d dma_lb=%0d rx_bp=%0d tx_bp=%0d deferred=%0d mac_ctrl=%0d dma_ctrl=%0d decerr=%0d",
             n_rx_path, n_tx_path, n_eth_lb, n_dma_lb, n_rx_bp, n_tx_bp,
             n_deferred_commit, n_mac_ctrl, n_dma_ctrl, n_decerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
