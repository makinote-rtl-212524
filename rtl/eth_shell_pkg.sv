// eth_shell_pkg: constants and types shared by the Ethernet subsystem of the
// FPGA shell.
//
// It fixes three things the rest of the RTL agrees on: the AXI response codes,
// the control address map seen on the subsystem's AXI4-Lite port (one 64 KiB
// window per controlled unit), and the register layout of the AXI-Stream
// switches. The unit list (MAC, DMA engine, Rx switch, Tx switch behind one
// AXI interconnect) follows the shell's Ethernet block diagram; the window size,
// the window order and the register offsets are this design's own choices.
package eth_shell_pkg;

  // AXI response codes (AMBA AXI).
  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } axi_resp_e;

  // Control windows on the subsystem's AXI4-Lite port, selected by
  // address bits [WIN_SHIFT+1:WIN_SHIFT]. Addresses with any bit set above
  // those two are answered with DECERR by the interconnect.
  localparam int unsigned WIN_SHIFT   = 16;     // 64 KiB per window
  localparam int unsigned NUM_WINDOWS = 4;
  localparam int unsigned WIN_MAC     = 0;      // Ethernet PHY/MAC core
  localparam int unsigned WIN_DMA     = 1;      // AXI DMA engine
  localparam int unsigned WIN_RXSW    = 2;      // Rx AXI-Stream switch
  localparam int unsigned WIN_TXSW    = 3;      // Tx AXI-Stream switch

  // AXI-Stream switch registers, one per 8-byte word of a 64-bit AXI4-Lite bus.
  //   CTRL  (write) bit0: commit the staged routes
  //         (read)  bit0: commit pending, bit1: last commit had a conflict
  //   ROUTE (m) bit31: output m disabled, bits[7:0]: input feeding output m
  //         (read returns the staged value, written routes act after commit)
  //   ACTIVE(m) read-only: the route output m uses now, same layout as ROUTE
  //   PKTS  (m) read-only: packets (tlast beats) sent on output m, 32 bits
  localparam logic [15:0] SW_REG_CTRL   = 16'h0000;
  localparam logic [15:0] SW_REG_ROUTE  = 16'h0040;
  localparam logic [15:0] SW_REG_ACTIVE = 16'h0080;
  localparam logic [15:0] SW_REG_PKTS   = 16'h00C0;
  localparam int unsigned SW_MAX_PORTS  = 8;     // room in each register bank
  localparam int unsigned SW_ROUTE_DIS  = 31;    // disable bit of a route word

  // Port numbering of the two switches in the Ethernet subsystem.
  // Rx switch: in0 = Rx FIFO (from MAC),   in1 = DMA loopback FIFO
  //            out0 = DMA S2MM stream,     out1 = Ethernet loopback FIFO
  // Tx switch: in0 = DMA MM2S stream,      in1 = Ethernet loopback FIFO
  //            out0 = Tx FIFO (to MAC),    out1 = DMA loopback FIFO
  localparam int unsigned SW_PORT_MAIN = 0;
  localparam int unsigned SW_PORT_LOOP = 1;

endpackage
