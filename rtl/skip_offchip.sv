// skip_offchip: keeps one U-Net skip connection in off-chip memory instead of
// on chip. The encoder's feature map is written to external memory through
// the connection's own AXI4 port and read back, in the same order, for the
// decoder of that level. Small on-chip FIFOs on both sides decouple the fast
// streaming fabric from the slower memory.
//
// How it works: the feature map of NPIX pixels (one pixel = one AXI beat of
// CH*8 bits) is stored contiguously from `base`. The writer waits until the
// input FIFO holds BURST pixels, issues one incrementing burst address and
// then sends the BURST beats. The reader issues a read burst only for data
// whose write response has arrived (so it never overtakes the writer) and
// only when the output FIFO has room for the whole burst, so read data is
// always accepted. When the last burst of a frame has been read back, the
// counters restart and the next frame may begin; pixels of the next frame
// wait in the input FIFO until then.
// What follows the paper: one AXI interface per skip connection, used for
// both writing and reading, with on-chip buffers in front of the memory.
// This design's choices: one outstanding burst per direction, burst length,
// FIFO depths, the contiguous layout and the frame hand-over.
// Interface: valid/ready pixel stream in and out; AXI4 master (AW/W/B/AR/R),
// data width CH*8 bits, which must be a power of two of at least 8.
// The AXI length/size/burst-type outputs and the strobes are constants.
module skip_offchip
  import unet_pkg::*;
#(
  parameter int unsigned CH        = 4,
  parameter int unsigned NPIX      = 256 * 256,
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned BURST     = 16,
  parameter int unsigned IN_DEPTH  = 2 * BURST,
  parameter int unsigned OUT_DEPTH = 2 * BURST
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ADDR_W-1:0]   base,
  // feature-map stream from the encoder
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [CH*8-1:0]     in_data,
  // feature-map stream to the decoder
  output logic                out_valid,
  input  logic                out_ready,
  output logic [CH*8-1:0]     out_data,
  // AXI4 master
  output logic                m_awvalid,
  input  logic                m_awready,
  output logic [ADDR_W-1:0]   m_awaddr,
  output logic [7:0]          m_awlen,
  output logic [2:0]          m_awsize,
  output logic [1:0]          m_awburst,
  output logic                m_wvalid,
  input  logic                m_wready,
  output logic [CH*8-1:0]     m_wdata,
  output logic [CH-1:0]       m_wstrb,
  output logic                m_wlast,
  input  logic                m_bvalid,
  output logic                m_bready,
  input  logic [1:0]          m_bresp,
  output logic                m_arvalid,
  input  logic                m_arready,
  output logic [ADDR_W-1:0]   m_araddr,
  output logic [7:0]          m_arlen,
  output logic [2:0]          m_arsize,
  output logic [1:0]          m_arburst,
  input  logic                m_rvalid,
  output logic                m_rready,
  input  logic [CH*8-1:0]     m_rdata,
  input  logic [1:0]          m_rresp,
  input  logic                m_rlast
);
  localparam int unsigned DW    = CH * 8;
  localparam int unsigned NB    = NPIX / BURST;
  localparam int unsigned BW    = $clog2(NB + 1);
  localparam int unsigned KW    = $clog2(BURST + 1);
  localparam int unsigned BYTES = DW / 8;

  initial begin
    assert (NPIX % BURST == 0) else $error("skip_offchip: BURST must divide NPIX");
    assert ((BYTES & (BYTES - 1)) == 0) else $error("skip_offchip: CH must be a power of two");
    assert (OUT_DEPTH >= BURST && IN_DEPTH >= BURST) else $error("skip_offchip: FIFOs below one burst");
  end

  // ---------------- write side ----------------
  logic                      ib_valid, ib_ready;
  logic [DW-1:0]             ib_data;
  logic [$clog2(IN_DEPTH+1)-1:0] ib_level;

  stream_fifo #(.W(DW), .DEPTH(IN_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(ib_valid), .out_ready(ib_ready), .out_data(ib_data),
    .level(ib_level)
  );

  logic [BW-1:0] wr_issued, wr_acked, rd_issued, rd_done;
  logic          w_active;
  logic [KW-1:0] w_beat;

  assign m_awvalid = !w_active && (wr_issued < BW'(NB))
                   && (int'(ib_level) >= int'(BURST));
  assign m_awaddr  = base + ADDR_W'(wr_issued) * ADDR_W'(BURST * BYTES);
  assign m_awlen   = 8'(BURST - 1);
  assign m_awsize  = 3'($clog2(BYTES));
  assign m_awburst = AXI_BURST_INCR;

  assign m_wvalid  = w_active && ib_valid;
  assign m_wdata   = ib_data;
  assign m_wstrb   = '1;
  assign m_wlast   = (w_beat == KW'(BURST - 1));
  assign ib_ready  = w_active && m_wready;
  assign m_bready  = 1'b1;

  // ---------------- read side ----------------
  logic                           ob_ready;
  logic [$clog2(OUT_DEPTH+1)-1:0] ob_level;
  logic                           r_active;

  assign m_arvalid = !r_active && (rd_issued < wr_acked)
                   && (int'(OUT_DEPTH) - int'(ob_level) >= int'(BURST));
  assign m_araddr  = base + ADDR_W'(rd_issued) * ADDR_W'(BURST * BYTES);
  assign m_arlen   = 8'(BURST - 1);
  assign m_arsize  = 3'($clog2(BYTES));
  assign m_arburst = AXI_BURST_INCR;
  assign m_rready  = ob_ready;

  stream_fifo #(.W(DW), .DEPTH(OUT_DEPTH)) u_out_buf (
    .clk, .rst_n,
    .in_valid(m_rvalid), .in_ready(ob_ready), .in_data(m_rdata),
    .out_valid, .out_ready, .out_data,
    .level(ob_level)
  );

  wire frame_end = m_rvalid && m_rready && m_rlast && (rd_done == BW'(NB - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_issued <= '0; wr_acked <= '0; rd_issued <= '0; rd_done <= '0;
      w_active <= 1'b0; w_beat <= '0; r_active <= 1'b0;
    end else begin
      if (m_awvalid && m_awready) begin
        wr_issued <= wr_issued + 1'b1;
        w_active  <= 1'b1;
      end
      if (m_wvalid && m_wready) begin
        if (m_wlast) begin
          w_beat   <= '0;
          w_active <= 1'b0;
        end else begin
          w_beat <= w_beat + 1'b1;
        end
      end
      if (m_bvalid && m_bready) wr_acked <= wr_acked + 1'b1;
      if (m_arvalid && m_arready) begin
        rd_issued <= rd_issued + 1'b1;
        r_active  <= 1'b1;
      end
      if (m_rvalid && m_rready && m_rlast) begin
        rd_done  <= rd_done + 1'b1;
        r_active <= 1'b0;
      end
      if (frame_end) begin
        wr_issued <= '0; wr_acked <= '0; rd_issued <= '0; rd_done <= '0;
      end
    end
  end

  // The output FIFO always has room for read data (space is reserved).
  assert property (@(posedge clk) disable iff (!rst_n) m_rvalid |-> m_rready);
  assert property (@(posedge clk) disable iff (!rst_n)
                   (m_bvalid |-> m_bresp == AXI_RESP_OKAY) and (m_rvalid |-> m_rresp == AXI_RESP_OKAY));

endmodule
