// axil_interconnect: one AXI4-Lite master port fanned out to NUM_SLV control
// slaves by address.
//
// In the Ethernet subsystem it carries the shell's single AXI4-Lite control
// port to the Ethernet MAC, the AXI DMA engine and the Rx and Tx stream
// switches. The shell's block diagram shows this interconnect and its four
// control links; the address map and the way it is built are this design's.
//
// Address decoding: bits [WIN_SHIFT+SEL_W-1:WIN_SHIFT] pick the slave, each
// slave owns a 2**WIN_SHIFT byte window and receives the offset inside it.
// An address with any bit set above the window field is not forwarded and is
// answered with DECERR. Writes and reads are handled by two independent
// engines, each with one transaction in flight: a write is taken when address
// and data are both valid, forwarded (address and data channels may complete
// in either order at the slave), and its response returned; a read likewise.
// Every path is registered, so a transaction costs a few cycles of latency
// and no combinational path runs from a slave to the master port.
module axil_interconnect #(
  parameter int unsigned NUM_SLV   = 4,
  parameter int unsigned AW        = 32,
  parameter int unsigned DW        = 64,
  parameter int unsigned WIN_SHIFT = 16,
  localparam int unsigned SEL_W    = (NUM_SLV > 1) ? $clog2(NUM_SLV) : 1,
  localparam int unsigned SW       = DW / 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // from the shell
  input  logic [AW-1:0]                 s_awaddr,
  input  logic                          s_awvalid,
  output logic                          s_awready,
  input  logic [DW-1:0]                 s_wdata,
  input  logic [SW-1:0]                 s_wstrb,
  input  logic                          s_wvalid,
  output logic                          s_wready,
  output logic [1:0]                    s_bresp,
  output logic                          s_bvalid,
  input  logic                          s_bready,
  input  logic [AW-1:0]                 s_araddr,
  input  logic                          s_arvalid,
  output logic                          s_arready,
  output logic [DW-1:0]                 s_rdata,
  output logic [1:0]                    s_rresp,
  output logic                          s_rvalid,
  input  logic                          s_rready,
  // to the control slaves
  output logic [NUM_SLV-1:0][WIN_SHIFT-1:0] m_awaddr,
  output logic [NUM_SLV-1:0]            m_awvalid,
  input  logic [NUM_SLV-1:0]            m_awready,
  output logic [NUM_SLV-1:0][DW-1:0]    m_wdata,
  output logic [NUM_SLV-1:0][SW-1:0]    m_wstrb,
  output logic [NUM_SLV-1:0]            m_wvalid,
  input  logic [NUM_SLV-1:0]            m_wready,
  input  logic [NUM_SLV-1:0][1:0]       m_bresp,
  input  logic [NUM_SLV-1:0]            m_bvalid,
  output logic [NUM_SLV-1:0]            m_bready,
  output logic [NUM_SLV-1:0][WIN_SHIFT-1:0] m_araddr,
  output logic [NUM_SLV-1:0]            m_arvalid,
  input  logic [NUM_SLV-1:0]            m_arready,
  input  logic [NUM_SLV-1:0][DW-1:0]    m_rdata,
  input  logic [NUM_SLV-1:0][1:0]       m_rresp,
  input  logic [NUM_SLV-1:0]            m_rvalid,
  output logic [NUM_SLV-1:0]            m_rready
);
  import eth_shell_pkg::*;

  typedef enum logic [1:0] {ST_IDLE, ST_FWD, ST_WAIT, ST_RESP} state_e;

  // true when the address lies in one of the NUM_SLV windows
  function automatic logic in_map(logic [AW-1:0] a);
    return (a >> WIN_SHIFT) < AW'(NUM_SLV);
  endfunction

  // ------------------------------------------------------------------ write
  state_e               w_st;
  logic [SEL_W-1:0]     w_sel;
  logic [WIN_SHIFT-1:0] w_off;
  logic [DW-1:0]        w_data;
  logic [SW-1:0]        w_strb;
  logic                 aw_done, w_done;
  logic                 w_take;

  assign w_take    = (w_st == ST_IDLE) && s_awvalid && s_wvalid;
  assign s_awready = w_take;
  assign s_wready  = w_take;
  assign s_bvalid  = (w_st == ST_RESP);

  always_comb begin
    for (int i = 0; i < NUM_SLV; i++) begin
      m_awaddr[i]  = w_off;
      m_wdata[i]   = w_data;
      m_wstrb[i]   = w_strb;
      m_awvalid[i] = (w_st == ST_FWD) && (w_sel == SEL_W'(i)) && !aw_done;
      m_wvalid[i]  = (w_st == ST_FWD) && (w_sel == SEL_W'(i)) && !w_done;
      m_bready[i]  = (w_st == ST_WAIT) && (w_sel == SEL_W'(i));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_st    <= ST_IDLE;
      w_sel   <= '0;
      w_off   <= '0;
      w_data  <= '0;
      w_strb  <= '0;
      aw_done <= 1'b0;
      w_done  <= 1'b0;
      s_bresp <= RESP_OKAY;
    end else begin
      unique case (w_st)
        ST_IDLE: if (w_take) begin
          w_sel   <= SEL_W'(s_awaddr >> WIN_SHIFT);
          w_off   <= s_awaddr[WIN_SHIFT-1:0];
          w_data  <= s_wdata;
          w_strb  <= s_wstrb;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          if (in_map(s_awaddr)) w_st <= ST_FWD;
          else begin
            s_bresp <= RESP_DECERR;
            w_st    <= ST_RESP;
          end
        end
        ST_FWD: begin
          if (m_awvalid[w_sel] && m_awready[w_sel]) aw_done <= 1'b1;
          if (m_wvalid[w_sel]  && m_wready[w_sel])  w_done  <= 1'b1;
          if ((aw_done || m_awready[w_sel]) && (w_done || m_wready[w_sel]))
            w_st <= ST_WAIT;
        end
        ST_WAIT: if (m_bvalid[w_sel]) begin
          s_bresp <= m_bresp[w_sel];
          w_st    <= ST_RESP;
        end
        ST_RESP: if (s_bready) w_st <= ST_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------- read
  state_e               r_st;
  logic [SEL_W-1:0]     r_sel;
  logic [WIN_SHIFT-1:0] r_off;

  assign s_arready = (r_st == ST_IDLE);
  assign s_rvalid  = (r_st == ST_RESP);

  always_comb begin
    for (int i = 0; i < NUM_SLV; i++) begin
      m_araddr[i]  = r_off;
      m_arvalid[i] = (r_st == ST_FWD)  && (r_sel == SEL_W'(i));
      m_rready[i]  = (r_st == ST_WAIT) && (r_sel == SEL_W'(i));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_st    <= ST_IDLE;
      r_sel   <= '0;
      r_off   <= '0;
      s_rdata <= '0;
      s_rresp <= RESP_OKAY;
    end else begin
      unique case (r_st)
        ST_IDLE: if (s_arvalid) begin
          r_sel <= SEL_W'(s_araddr >> WIN_SHIFT);
          r_off <= s_araddr[WIN_SHIFT-1:0];
          if (in_map(s_araddr)) r_st <= ST_FWD;
          else begin
            s_rdata <= '0;
            s_rresp <= RESP_DECERR;
            r_st    <= ST_RESP;
          end
        end
        ST_FWD:  if (m_arready[r_sel]) r_st <= ST_WAIT;
        ST_WAIT: if (m_rvalid[r_sel]) begin
          s_rdata <= m_rdata[r_sel];
          s_rresp <= m_rresp[r_sel];
          r_st    <= ST_RESP;
        end
        ST_RESP: if (s_rready) r_st <= ST_IDLE;
      endcase
    end
  end

  // AXI rules on the master port: requests stay until taken.
  a_aw_hold : assert property (@(posedge clk) disable iff (!rst_n)
    s_awvalid && !s_awready |=> s_awvalid && $stable(s_awaddr));
  a_ar_hold : assert property (@(posedge clk) disable iff (!rst_n)
    s_arvalid && !s_arready |=> s_arvalid && $stable(s_araddr));
  // Responses stay until taken.
  a_b_hold : assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp));

endmodule
