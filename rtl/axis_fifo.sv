// axis_fifo: single-clock AXI4-Stream FIFO (tdata, tkeep, tlast).
//
// Used four times in the Ethernet subsystem: as the Rx FIFO behind the MAC,
// the Tx FIFO in front of it, and the Ethernet and DMA loopback FIFOs that
// connect the Rx and Tx stream switches so that data can be turned around
// without the DMA engine or without the Ethernet core. The shell's block
// diagram gives these FIFOs and their places; their depth, width and inner
// structure are this design's own choices.
//
// Structure: a DEPTH-entry memory with a synchronous read port (maps onto
// block RAM) followed by one output register, so the FIFO is first-word
// fall-through: a beat accepted on the slave side in cycle t is offered on
// the master side in cycle t+2 when the FIFO was empty. Throughput is one beat
// per cycle in and out at the same time. s_tready is low only when all DEPTH
// memory entries are used; the output register holds one extra beat.
// `level` counts the beats held, memory and output register together.
// Reset is synchronous and active low and empties the FIFO.
module axis_fifo #(
  parameter int unsigned DATA_W = 256,
  parameter int unsigned DEPTH  = 512,
  localparam int unsigned KEEP_W = DATA_W / 8,
  localparam int unsigned PTR_W  = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // slave (write) side
  input  logic [DATA_W-1:0] s_tdata,
  input  logic [KEEP_W-1:0] s_tkeep,
  input  logic              s_tlast,
  input  logic              s_tvalid,
  output logic              s_tready,
  // master (read) side
  output logic [DATA_W-1:0] m_tdata,
  output logic [KEEP_W-1:0] m_tkeep,
  output logic              m_tlast,
  output logic              m_tvalid,
  input  logic              m_tready,
  // occupancy in beats, 0 .. DEPTH+1
  output logic [PTR_W+1:0]  level
);

  typedef struct packed {
    logic              last;
    logic [KEEP_W-1:0] keep;
    logic [DATA_W-1:0] data;
  } beat_t;

  beat_t            mem [DEPTH];
  logic [PTR_W-1:0] wr_ptr, rd_ptr;
  logic [PTR_W:0]   mem_count;
  beat_t            out_q;
  logic             out_valid;

  logic push, pop, load;

  assign s_tready = (mem_count != (PTR_W+1)'(DEPTH));
  assign push     = s_tvalid && s_tready;
  // Refill the output register when it is empty or being emptied.
  assign load     = (mem_count != '0) && (!out_valid || m_tready);
  assign pop      = out_valid && m_tready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= '{last: s_tlast, keep: s_tkeep, data: s_tdata};
    if (load) out_q <= mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      mem_count <= '0;
      out_valid <= 1'b0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == PTR_W'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (load) rd_ptr <= (rd_ptr == PTR_W'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      mem_count <= mem_count + (PTR_W+1)'(push) - (PTR_W+1)'(load);
      if (load)     out_valid <= 1'b1;
      else if (pop) out_valid <= 1'b0;
    end
  end

  assign m_tdata  = out_q.data;
  assign m_tkeep  = out_q.keep;
  assign m_tlast  = out_q.last;
  assign m_tvalid = out_valid;
  assign level    = (PTR_W+2)'(mem_count) + (PTR_W+2)'(out_valid);

  // AXI4-Stream rule on the slave side: a beat offered and not taken stays.
  a_s_hold : assert property (@(posedge clk) disable iff (!rst_n)
    s_tvalid && !s_tready |=> s_tvalid && $stable(s_tdata) && $stable(s_tlast));
  // The output beat is stable while it waits.
  a_m_hold : assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));

endmodule
