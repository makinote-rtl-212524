// eth_subsystem: stream datapath and control fabric of the FPGA shell's
// Ethernet subsystem, the logic that sits between the 100G/10G Ethernet
// PHY/MAC core and the AXI DMA engine that moves frames to and from HBM.
//
// Receive path:  MAC Rx stream -> Rx FIFO -> Rx switch -> DMA S2MM stream.
// Transmit path: DMA MM2S stream -> Tx switch -> Tx FIFO -> MAC Tx stream.
// Between the two switches sit two loopback FIFOs:
//   Ethernet loopback FIFO: Rx switch out1 -> Tx switch in1. Frames that
//     arrive from the network are sent straight back out; the DMA engine is
//     not involved.
//   DMA loopback FIFO: Tx switch out1 -> Rx switch in1. Data the DMA engine
//     transmits comes back as received data without passing the Ethernet core,
//     which tests the DMA, its driver and the memory path on their own.
// Software picks the mode by routing the two switches (see axis_switch and
// eth_shell_pkg); after reset both run the normal paths. One AXI4-Lite port
// reaches, through an AXI interconnect, the control registers of the MAC, the
// DMA engine and both switches; the MAC and DMA windows leave the module as
// AXI4-Lite master ports because those two cores are vendor IP outside it.
//
// The blocks and their connections follow the shell's Ethernet block diagram.
// AURORA_LAYOUT = 1 gives the variant the shell uses around its Aurora
// 64B/66B link core, where the Tx FIFO and both loopback FIFOs are left out:
// the Tx switch then drives the core directly and the switch loop ports are
// tied off. Stream width, FIFO depths and the control address map are this
// design's choices. Everything runs on one clock with a synchronous,
// active-low reset; the MAC and DMA streams are assumed to be in this clock
// domain (any clock crossing is left to the vendor cores).
//
// Latency through an empty FIFO is two cycles and the switches add none, so
// MAC Rx to DMA S2MM takes two cycles and DMA MM2S to MAC Tx two cycles; each
// loopback turn adds another two.
module eth_subsystem #(
  parameter int unsigned DATA_W         = 256,
  parameter int unsigned RX_FIFO_DEPTH  = 512,
  parameter int unsigned TX_FIFO_DEPTH  = 512,
  parameter int unsigned LB_FIFO_DEPTH  = 512,
  parameter int unsigned AXIL_AW        = 32,
  parameter int unsigned AXIL_DW        = 64,
  parameter bit          AURORA_LAYOUT  = 1'b0,
  localparam int unsigned KEEP_W = DATA_W / 8,
  localparam int unsigned WIN_W  = eth_shell_pkg::WIN_SHIFT
) (
  input  logic                 clk,
  input  logic                 rst_n,

  // Ethernet MAC receive stream (into the subsystem)
  input  logic [DATA_W-1:0]    mac_rx_tdata,
  input  logic [KEEP_W-1:0]    mac_rx_tkeep,
  input  logic                 mac_rx_tlast,
  input  logic                 mac_rx_tvalid,
  output logic                 mac_rx_tready,
  // Ethernet MAC transmit stream (out of the subsystem)
  output logic [DATA_W-1:0]    mac_tx_tdata,
  output logic [KEEP_W-1:0]    mac_tx_tkeep,
  output logic                 mac_tx_tlast,
  output logic                 mac_tx_tvalid,
  input  logic                 mac_tx_tready,
  // DMA engine MM2S stream (data to transmit)
  input  logic [DATA_W-1:0]    dma_mm2s_tdata,
  input  logic [KEEP_W-1:0]    dma_mm2s_tkeep,
  input  logic                 dma_mm2s_tlast,
  input  logic                 dma_mm2s_tvalid,
  output logic                 dma_mm2s_tready,
  // DMA engine S2MM stream (received data)
  output logic [DATA_W-1:0]    dma_s2mm_tdata,
  output logic [KEEP_W-1:0]    dma_s2mm_tkeep,
  output logic                 dma_s2mm_tlast,
  output logic                 dma_s2mm_tvalid,
  input  logic                 dma_s2mm_tready,

  // AXI4-Lite control port from the shell
  input  logic [AXIL_AW-1:0]   s_axil_awaddr,
  input  logic                 s_axil_awvalid,
  output logic                 s_axil_awready,
  input  logic [AXIL_DW-1:0]   s_axil_wdata,
  input  logic [AXIL_DW/8-1:0] s_axil_wstrb,
  input  logic                 s_axil_wvalid,
  output logic                 s_axil_wready,
  output logic [1:0]           s_axil_bresp,
  output logic                 s_axil_bvalid,
  input  logic                 s_axil_bready,
  input  logic [AXIL_AW-1:0]   s_axil_araddr,
  input  logic                 s_axil_arvalid,
  output logic                 s_axil_arready,
  output logic [AXIL_DW-1:0]   s_axil_rdata,
  output logic [1:0]           s_axil_rresp,
  output logic                 s_axil_rvalid,
  input  logic                 s_axil_rready,

  // AXI4-Lite control of the MAC core (window 0) and the DMA engine
  // (window 1); index 0 = MAC, 1 = DMA
  output logic [1:0][WIN_W-1:0]    ext_axil_awaddr,
  output logic [1:0]               ext_axil_awvalid,
  input  logic [1:0]               ext_axil_awready,
  output logic [1:0][AXIL_DW-1:0]  ext_axil_wdata,
  output logic [1:0][AXIL_DW/8-1:0] ext_axil_wstrb,
  output logic [1:0]               ext_axil_wvalid,
  input  logic [1:0]               ext_axil_wready,
  input  logic [1:0][1:0]          ext_axil_bresp,
  input  logic [1:0]               ext_axil_bvalid,
  output logic [1:0]               ext_axil_bready,
  output logic [1:0][WIN_W-1:0]    ext_axil_araddr,
  output logic [1:0]               ext_axil_arvalid,
  input  logic [1:0]               ext_axil_arready,
  input  logic [1:0][AXIL_DW-1:0]  ext_axil_rdata,
  input  logic [1:0][1:0]          ext_axil_rresp,
  input  logic [1:0]               ext_axil_rvalid,
  output logic [1:0]               ext_axil_rready,

  // FIFO occupancy in beats, for diagnostics
  output logic [$clog2(RX_FIFO_DEPTH)+1:0] rx_fifo_level,
  output logic [$clog2(TX_FIFO_DEPTH)+1:0] tx_fifo_level,
  output logic [$clog2(LB_FIFO_DEPTH)+1:0] eth_lb_fifo_level,
  output logic [$clog2(LB_FIFO_DEPTH)+1:0] dma_lb_fifo_level
);
  import eth_shell_pkg::*;

  // ------------------------------------------------------- control fabric
  localparam int unsigned NW = NUM_WINDOWS;
  logic [NW-1:0][WIN_W-1:0]      c_awaddr, c_araddr;
  logic [NW-1:0]                 c_awvalid, c_awready, c_wvalid, c_wready;
  logic [NW-1:0][AXIL_DW-1:0]    c_wdata, c_rdata;
  logic [NW-1:0][AXIL_DW/8-1:0]  c_wstrb;
  logic [NW-1:0][1:0]            c_bresp, c_rresp;
  logic [NW-1:0]                 c_bvalid, c_bready, c_arvalid, c_arready;
  logic [NW-1:0]                 c_rvalid, c_rready;

  axil_interconnect #(
    .NUM_SLV(NW), .AW(AXIL_AW), .DW(AXIL_DW), .WIN_SHIFT(WIN_SHIFT)
  ) u_axil_ic (
    .clk, .rst_n,
    .s_awaddr (s_axil_awaddr),  .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata  (s_axil_wdata),   .s_wstrb  (s_axil_wstrb),
    .s_wvalid (s_axil_wvalid),  .s_wready (s_axil_wready),
    .s_bresp  (s_axil_bresp),   .s_bvalid (s_axil_bvalid),  .s_bready (s_axil_bready),
    .s_araddr (s_axil_araddr),  .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata  (s_axil_rdata),   .s_rresp  (s_axil_rresp),
    .s_rvalid (s_axil_rvalid),  .s_rready (s_axil_rready),
    .m_awaddr (c_awaddr),  .m_awvalid(c_awvalid), .m_awready(c_awready),
    .m_wdata  (c_wdata),   .m_wstrb  (c_wstrb),
    .m_wvalid (c_wvalid),  .m_wready (c_wready),
    .m_bresp  (c_bresp),   .m_bvalid (c_bvalid),  .m_bready (c_bready),
    .m_araddr (c_araddr),  .m_arvalid(c_arvalid), .m_arready(c_arready),
    .m_rdata  (c_rdata),   .m_rresp  (c_rresp),
    .m_rvalid (c_rvalid),  .m_rready (c_rready)
  );

  // MAC and DMA windows leave the module.
  for (genvar e = 0; e < 2; e++) begin : g_ext
    localparam int unsigned W = (e == 0) ? WIN_MAC : WIN_DMA;
    assign ext_axil_awaddr[e]  = c_awaddr[W];
    assign ext_axil_awvalid[e] = c_awvalid[W];
    assign c_awready[W]        = ext_axil_awready[e];
    assign ext_axil_wdata[e]   = c_wdata[W];
    assign ext_axil_wstrb[e]   = c_wstrb[W];
    assign ext_axil_wvalid[e]  = c_wvalid[W];
    assign c_wready[W]         = ext_axil_wready[e];
    assign c_bresp[W]          = ext_axil_bresp[e];
    assign c_bvalid[W]         = ext_axil_bvalid[e];
    assign ext_axil_bready[e]  = c_bready[W];
    assign ext_axil_araddr[e]  = c_araddr[W];
    assign ext_axil_arvalid[e] = c_arvalid[W];
    assign c_arready[W]        = ext_axil_arready[e];
    assign c_rdata[W]          = ext_axil_rdata[e];
    assign c_rresp[W]          = ext_axil_rresp[e];
    assign c_rvalid[W]         = ext_axil_rvalid[e];
    assign ext_axil_rready[e]  = c_rready[W];
  end

  // ------------------------------------------------------------ streams
  // Switch ports: [SW_PORT_MAIN] normal path, [SW_PORT_LOOP] loopback FIFOs.
  logic [1:0][DATA_W-1:0] rxsw_s_tdata, rxsw_m_tdata, txsw_s_tdata, txsw_m_tdata;
  logic [1:0][KEEP_W-1:0] rxsw_s_tkeep, rxsw_m_tkeep, txsw_s_tkeep, txsw_m_tkeep;
  logic [1:0] rxsw_s_tlast, rxsw_s_tvalid, rxsw_s_tready;
  logic [1:0] rxsw_m_tlast, rxsw_m_tvalid, rxsw_m_tready;
  logic [1:0] txsw_s_tlast, txsw_s_tvalid, txsw_s_tready;
  logic [1:0] txsw_m_tlast, txsw_m_tvalid, txsw_m_tready;

  // Rx FIFO: MAC -> Rx switch in0
  axis_fifo #(.DATA_W(DATA_W), .DEPTH(RX_FIFO_DEPTH)) u_rx_fifo (
    .clk, .rst_n,
    .s_tdata(mac_rx_tdata), .s_tkeep(mac_rx_tkeep), .s_tlast(mac_rx_tlast),
    .s_tvalid(mac_rx_tvalid), .s_tready(mac_rx_tready),
    .m_tdata(rxsw_s_tdata[SW_PORT_MAIN]), .m_tkeep(rxsw_s_tkeep[SW_PORT_MAIN]),
    .m_tlast(rxsw_s_tlast[SW_PORT_MAIN]), .m_tvalid(rxsw_s_tvalid[SW_PORT_MAIN]),
    .m_tready(rxsw_s_tready[SW_PORT_MAIN]),
    .level(rx_fifo_level)
  );

  axis_switch #(.DATA_W(DATA_W), .NUM_IN(2), .NUM_OUT(2),
                .AXIL_AW(WIN_W), .AXIL_DW(AXIL_DW)) u_rx_switch (
    .clk, .rst_n,
    .s_tdata(rxsw_s_tdata), .s_tkeep(rxsw_s_tkeep), .s_tlast(rxsw_s_tlast),
    .s_tvalid(rxsw_s_tvalid), .s_tready(rxsw_s_tready),
    .m_tdata(rxsw_m_tdata), .m_tkeep(rxsw_m_tkeep), .m_tlast(rxsw_m_tlast),
    .m_tvalid(rxsw_m_tvalid), .m_tready(rxsw_m_tready),
    .s_axil_awaddr(c_awaddr[WIN_RXSW]), .s_axil_awvalid(c_awvalid[WIN_RXSW]),
    .s_axil_awready(c_awready[WIN_RXSW]),
    .s_axil_wdata(c_wdata[WIN_RXSW]), .s_axil_wstrb(c_wstrb[WIN_RXSW]),
    .s_axil_wvalid(c_wvalid[WIN_RXSW]), .s_axil_wready(c_wready[WIN_RXSW]),
    .s_axil_bresp(c_bresp[WIN_RXSW]), .s_axil_bvalid(c_bvalid[WIN_RXSW]),
    .s_axil_bready(c_bready[WIN_RXSW]),
    .s_axil_araddr(c_araddr[WIN_RXSW]), .s_axil_arvalid(c_arvalid[WIN_RXSW]),
    .s_axil_arready(c_arready[WIN_RXSW]),
    .s_axil_rdata(c_rdata[WIN_RXSW]), .s_axil_rresp(c_rresp[WIN_RXSW]),
    .s_axil_rvalid(c_rvalid[WIN_RXSW]), .s_axil_rready(c_rready[WIN_RXSW])
  );

  // Rx switch out0 -> DMA S2MM
  assign dma_s2mm_tdata               = rxsw_m_tdata[SW_PORT_MAIN];
  assign dma_s2mm_tkeep               = rxsw_m_tkeep[SW_PORT_MAIN];
  assign dma_s2mm_tlast               = rxsw_m_tlast[SW_PORT_MAIN];
  assign dma_s2mm_tvalid              = rxsw_m_tvalid[SW_PORT_MAIN];
  assign rxsw_m_tready[SW_PORT_MAIN]  = dma_s2mm_tready;

  // DMA MM2S -> Tx switch in0
  assign txsw_s_tdata[SW_PORT_MAIN]   = dma_mm2s_tdata;
  assign txsw_s_tkeep[SW_PORT_MAIN]   = dma_mm2s_tkeep;
  assign txsw_s_tlast[SW_PORT_MAIN]   = dma_mm2s_tlast;
  assign txsw_s_tvalid[SW_PORT_MAIN]  = dma_mm2s_tvalid;
  assign dma_mm2s_tready              = txsw_s_tready[SW_PORT_MAIN];

  axis_switch #(.DATA_W(DATA_W), .NUM_IN(2), .NUM_OUT(2),
                .AXIL_AW(WIN_W), .AXIL_DW(AXIL_DW)) u_tx_switch (
    .clk, .rst_n,
    .s_tdata(txsw_s_tdata), .s_tkeep(txsw_s_tkeep), .s_tlast(txsw_s_tlast),
    .s_tvalid(txsw_s_tvalid), .s_tready(txsw_s_tready),
    .m_tdata(txsw_m_tdata), .m_tkeep(txsw_m_tkeep), .m_tlast(txsw_m_tlast),
    .m_tvalid(txsw_m_tvalid), .m_tready(txsw_m_tready),
    .s_axil_awaddr(c_awaddr[WIN_TXSW]), .s_axil_awvalid(c_awvalid[WIN_TXSW]),
    .s_axil_awready(c_awready[WIN_TXSW]),
    .s_axil_wdata(c_wdata[WIN_TXSW]), .s_axil_wstrb(c_wstrb[WIN_TXSW]),
    .s_axil_wvalid(c_wvalid[WIN_TXSW]), .s_axil_wready(c_wready[WIN_TXSW]),
    .s_axil_bresp(c_bresp[WIN_TXSW]), .s_axil_bvalid(c_bvalid[WIN_TXSW]),
    .s_axil_bready(c_bready[WIN_TXSW]),
    .s_axil_araddr(c_araddr[WIN_TXSW]), .s_axil_arvalid(c_arvalid[WIN_TXSW]),
    .s_axil_arready(c_arready[WIN_TXSW]),
    .s_axil_rdata(c_rdata[WIN_TXSW]), .s_axil_rresp(c_rresp[WIN_TXSW]),
    .s_axil_rvalid(c_rvalid[WIN_TXSW]), .s_axil_rready(c_rready[WIN_TXSW])
  );

  if (!AURORA_LAYOUT) begin : g_eth
    // Tx FIFO: Tx switch out0 -> MAC
    axis_fifo #(.DATA_W(DATA_W), .DEPTH(TX_FIFO_DEPTH)) u_tx_fifo (
      .clk, .rst_n,
      .s_tdata(txsw_m_tdata[SW_PORT_MAIN]), .s_tkeep(txsw_m_tkeep[SW_PORT_MAIN]),
      .s_tlast(txsw_m_tlast[SW_PORT_MAIN]), .s_tvalid(txsw_m_tvalid[SW_PORT_MAIN]),
      .s_tready(txsw_m_tready[SW_PORT_MAIN]),
      .m_tdata(mac_tx_tdata), .m_tkeep(mac_tx_tkeep), .m_tlast(mac_tx_tlast),
      .m_tvalid(mac_tx_tvalid), .m_tready(mac_tx_tready),
      .level(tx_fifo_level)
    );

    // Ethernet loopback FIFO: Rx switch out1 -> Tx switch in1
    axis_fifo #(.DATA_W(DATA_W), .DEPTH(LB_FIFO_DEPTH)) u_eth_lb_fifo (
      .clk, .rst_n,
      .s_tdata(rxsw_m_tdata[SW_PORT_LOOP]), .s_tkeep(rxsw_m_tkeep[SW_PORT_LOOP]),
      .s_tlast(rxsw_m_tlast[SW_PORT_LOOP]), .s_tvalid(rxsw_m_tvalid[SW_PORT_LOOP]),
      .s_tready(rxsw_m_tready[SW_PORT_LOOP]),
      .m_tdata(txsw_s_tdata[SW_PORT_LOOP]), .m_tkeep(txsw_s_tkeep[SW_PORT_LOOP]),
      .m_tlast(txsw_s_tlast[SW_PORT_LOOP]), .m_tvalid(txsw_s_tvalid[SW_PORT_LOOP]),
      .m_tready(txsw_s_tready[SW_PORT_LOOP]),
      .level(eth_lb_fifo_level)
    );

    // DMA loopback FIFO: Tx switch out1 -> Rx switch in1
    axis_fifo #(.DATA_W(DATA_W), .DEPTH(LB_FIFO_DEPTH)) u_dma_lb_fifo (
      .clk, .rst_n,
      .s_tdata(txsw_m_tdata[SW_PORT_LOOP]), .s_tkeep(txsw_m_tkeep[SW_PORT_LOOP]),
      .s_tlast(txsw_m_tlast[SW_PORT_LOOP]), .s_tvalid(txsw_m_tvalid[SW_PORT_LOOP]),
      .s_tready(txsw_m_tready[SW_PORT_LOOP]),
      .m_tdata(rxsw_s_tdata[SW_PORT_LOOP]), .m_tkeep(rxsw_s_tkeep[SW_PORT_LOOP]),
      .m_tlast(rxsw_s_tlast[SW_PORT_LOOP]), .m_tvalid(rxsw_s_tvalid[SW_PORT_LOOP]),
      .m_tready(rxsw_s_tready[SW_PORT_LOOP]),
      .level(dma_lb_fifo_level)
    );
  end else begin : g_aurora
    // No Tx FIFO and no loopback FIFOs: Tx switch out0 drives the link core,
    // the loop ports carry nothing and accept nothing.
    assign mac_tx_tdata                = txsw_m_tdata[SW_PORT_MAIN];
    assign mac_tx_tkeep                = txsw_m_tkeep[SW_PORT_MAIN];
    assign mac_tx_tlast                = txsw_m_tlast[SW_PORT_MAIN];
    assign mac_tx_tvalid               = txsw_m_tvalid[SW_PORT_MAIN];
    assign txsw_m_tready[SW_PORT_MAIN] = mac_tx_tready;
    assign tx_fifo_level               = '0;

    assign rxsw_m_tready[SW_PORT_LOOP] = 1'b0;
    assign txsw_m_tready[SW_PORT_LOOP] = 1'b0;
    assign rxsw_s_tdata[SW_PORT_LOOP]  = '0;
    assign rxsw_s_tkeep[SW_PORT_LOOP]  = '0;
    assign rxsw_s_tlast[SW_PORT_LOOP]  = 1'b0;
    assign rxsw_s_tvalid[SW_PORT_LOOP] = 1'b0;
    assign txsw_s_tdata[SW_PORT_LOOP]  = '0;
    assign txsw_s_tkeep[SW_PORT_LOOP]  = '0;
    assign txsw_s_tlast[SW_PORT_LOOP]  = 1'b0;
    assign txsw_s_tvalid[SW_PORT_LOOP] = 1'b0;
    assign eth_lb_fifo_level           = '0;
    assign dma_lb_fifo_level           = '0;
  end

endmodule
