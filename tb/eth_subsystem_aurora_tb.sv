// eth_subsystem_aurora_tb: test of eth_subsystem built in its Aurora layout
// (AURORA_LAYOUT = 1: no Tx FIFO, no loopback FIFOs).
//
// Checks: the receive path still has its Rx FIFO (2-cycle latency, DEPTH+1
// beats of buffering); the transmit path has none (the link core sees a DMA
// beat in the same cycle, with data and tready passing straight through);
// a loopback route in either switch carries nothing, so the source it would
// drain is held rather than losing data; after returning to the normal routes
// all held data arrives in order.
module eth_subsystem_aurora_tb;
  import eth_shell_pkg::*;
  localparam int unsigned DW = 256, KW = DW / 8, DEPTH = 512;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

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
  logic [1:0] ext_axil_awvalid, ext_axil_wvalid, ext_axil_bready, ext_axil_arvalid, ext_axil_rready;
  logic [1:0][63:0] ext_axil_wdata;
  logic [1:0][7:0] ext_axil_wstrb;
  logic [10:0] rx_fifo_level, tx_fifo_level, eth_lb_fifo_level, dma_lb_fifo_level;
  // MAC and DMA control are not used here
  logic [1:0] ext_axil_awready = '0, ext_axil_wready = '0, ext_axil_bvalid = '0;
  logic [1:0] ext_axil_arready = '0, ext_axil_rvalid = '0;
  logic [1:0][1:0] ext_axil_bresp = '0, ext_axil_rresp = '0;
  logic [1:0][63:0] ext_axil_rdata = '0;

  eth_subsystem #(.AURORA_LAYOUT(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [DW-1:0] tag(int s, int unsigned n);
    return {8'(s), 32'(n), {(DW - 72) / 32{n ^ 32'h5A5A_0000}}, 32'(n * 3)};
  endfunction

  // ---- sources: 0 = link receive (mac_rx), 1 = DMA MM2S; one beat per packet
  bit          en [2];
  int unsigned seq [2], sent [2];
  logic [1:0]  taken_q;
  always @(posedge clk) taken_q <= {dma_mm2s_tvalid && dma_mm2s_tready, mac_rx_tvalid && mac_rx_tready};
  always @(negedge clk) begin
    if (taken_q[0]) begin seq[0]++; sent[0]++; end
    if (taken_q[1]) begin seq[1]++; sent[1]++; end
    if (!mac_rx_tvalid || taken_q[0]) mac_rx_tvalid = en[0];
    if (!dma_mm2s_tvalid || taken_q[1]) dma_mm2s_tvalid = en[1];
    mac_rx_tdata = tag(0, seq[0]); mac_rx_tkeep = '1; mac_rx_tlast = 1;
    dma_mm2s_tdata = tag(1, seq[1]); dma_mm2s_tkeep = '1; dma_mm2s_tlast = 1;
    dma_s2mm_tready = ($urandom % 4) != 0;
    mac_tx_tready   = ($urandom % 4) != 0;
  end

  // ---- sinks
  bit          tx_routed;      // Tx switch out0 currently takes the DMA stream
  int unsigned nxt [2];
  int unsigned same_cycle_tx;
  always @(posedge clk) if (rst_n) begin
    if (dma_s2mm_tvalid && dma_s2mm_tready) begin
      check(dma_s2mm_tdata == tag(0, nxt[0]), "S2MM carries receive data in order");
      nxt[0]++;
    end
    if (mac_tx_tvalid && mac_tx_tready) begin
      check(mac_tx_tdata == tag(1, nxt[1]), "link transmit carries DMA data in order");
      nxt[1]++;
    end
    // no Tx FIFO: valid, data and ready pass straight through
    if (dma_mm2s_tvalid) begin
      check(mac_tx_tvalid || !tx_routed, "transmit valid passes through");
      if (tx_routed && mac_tx_tvalid && mac_tx_tdata == dma_mm2s_tdata) same_cycle_tx++;
    end
    check(tx_fifo_level == 0 && eth_lb_fifo_level == 0 && dma_lb_fifo_level == 0,
          "no Tx or loopback FIFO");
  end

  // ---- AXI-Lite
  task automatic axil_write(logic [31:0] a, logic [63:0] d);
    @(negedge clk);
    s_axil_awaddr = a; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wstrb = '1; s_axil_wvalid = 1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 1;
    while (!s_axil_bvalid) @(negedge clk);
    check(s_axil_bresp == RESP_OKAY, "write OKAY");
    @(posedge clk); @(negedge clk);
    s_axil_bready = 0;
  endtask
  function automatic logic [31:0] sw(int unsigned win, logic [15:0] base, int idx);
    return (32'(win) << WIN_SHIFT) | 32'(base) | 32'(idx * 8);
  endfunction
  localparam logic [63:0] DIS = 64'h8000_0000;
  task automatic routes(logic [63:0] rx0, logic [63:0] rx1, logic [63:0] tx0, logic [63:0] tx1);
    axil_write(sw(WIN_RXSW, SW_REG_ROUTE, 0), rx0);
    axil_write(sw(WIN_RXSW, SW_REG_ROUTE, 1), rx1);
    axil_write(sw(WIN_TXSW, SW_REG_ROUTE, 0), tx0);
    axil_write(sw(WIN_TXSW, SW_REG_ROUTE, 1), tx1);
    axil_write(sw(WIN_RXSW, SW_REG_CTRL, 0), 64'd1);
    axil_write(sw(WIN_TXSW, SW_REG_CTRL, 0), 64'd1);
    repeat (4) @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    s_axil_awaddr = '0; s_axil_araddr = '0; s_axil_wdata = '0; s_axil_wstrb = '0;
    mac_rx_tvalid = 0; dma_mm2s_tvalid = 0;
    for (int i = 0; i < 2; i++) begin en[i] = 0; seq[i] = 0; sent[i] = 0; nxt[i] = 0; end
    same_cycle_tx = 0; tx_routed = 1;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // receive latency through the Rx FIFO
    en[0] = 1;
    do @(posedge clk); while (!(mac_rx_tvalid && mac_rx_tready));
    @(negedge clk); en[0] = 0;
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!dma_s2mm_tvalid && cyc < 20);
    check(cyc == 2, $sformatf("receive latency %0d, expected 2", cyc));
    repeat (10) @(negedge clk);

    // normal traffic both ways
    en[0] = 1; en[1] = 1;
    repeat (2000) @(negedge clk);
    check(same_cycle_tx > 100, "transmit beats reach the link in the same cycle");

    // loopback routes: they lead nowhere in this layout, so both sources stall
    en[0] = 0; en[1] = 0;
    repeat (20) @(negedge clk);
    routes(DIS, 64'd0, DIS, 64'd0);
    tx_routed = 0;
    en[0] = 1; en[1] = 1;
    repeat (DEPTH + 200) @(negedge clk);
    check(!dma_mm2s_tready && dma_mm2s_tvalid, "DMA held when routed into the missing loopback FIFO");
    check(!mac_rx_tready && rx_fifo_level == DEPTH + 1, "receive held once the Rx FIFO is full");
    check(!dma_s2mm_tvalid && !mac_tx_tvalid, "nothing comes out of a loopback route");

    // back to normal: everything held arrives
    en[0] = 0; en[1] = 0;
    routes(64'd0, DIS, 64'd0, DIS);
    tx_routed = 1;
    repeat (2000) @(negedge clk);
    check(nxt[0] == sent[0] && nxt[1] == sent[1] && sent[0] > DEPTH,
          $sformatf("all data delivered (%0d/%0d, %0d/%0d)", nxt[0], sent[0], nxt[1], sent[1]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
