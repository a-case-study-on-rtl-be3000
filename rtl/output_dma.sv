// output_dma: writes the result stream of the accelerator (NCLS int8 class
// scores per pixel) to off-chip memory over an AXI4 memory-mapped write port,
// the "Output DMA" at the tail of the accelerator.
//
// How it works: after a start pulse it writes NPIX/BURST incrementing bursts
// of BURST 32-bit words from dst_base. For each burst it first issues the
// address, then forwards BURST stream beats as write data (in_ready =
// wready during the burst) and goes on to the next address without waiting
// for the response; responses are counted and `done` pulses once the last
// one has arrived. Each word holds one pixel: class c score in byte c, upper
// bytes zero. Pixel packing and burst length are this design's choices.
// Timing: one pixel per cycle when memory keeps up, plus one cycle per burst
// for the address.
// The AXI length/size/burst-type outputs, the strobes and the upper 16 data
// bits are constants; the write data is the score stream wired through.
module output_dma
  import unet_pkg::*;
#(
  parameter int unsigned NPIX   = 256 * 256,
  parameter int unsigned NCLS   = 2,
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned BURST  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] dst_base,
  output logic              busy,
  output logic              done,
  // AXI4 write address channel
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [ADDR_W-1:0] m_awaddr,
  output logic [7:0]        m_awlen,
  output logic [2:0]        m_awsize,
  output logic [1:0]        m_awburst,
  // AXI4 write data channel
  output logic              m_wvalid,
  input  logic              m_wready,
  output logic [31:0]       m_wdata,
  output logic [3:0]        m_wstrb,
  output logic              m_wlast,
  // AXI4 write response channel
  input  logic              m_bvalid,
  output logic              m_bready,
  input  logic [1:0]        m_bresp,
  // result stream
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [NCLS*8-1:0] in_data
);
  localparam int unsigned NB = NPIX / BURST;
  localparam int unsigned BW = $clog2(NB + 1);
  localparam int unsigned KW = $clog2(BURST + 1);

  initial begin
    assert (NPIX % BURST == 0) else $error("output_dma: BURST must divide NPIX");
    assert (NCLS <= 4) else $error("output_dma: at most 4 scores per 32-bit word");
  end

  logic [BW-1:0] issued, responded;
  logic          w_active;
  logic [KW-1:0] beat;

  assign m_awvalid = busy && !w_active && (issued < BW'(NB));
  assign m_awaddr  = dst_base + ADDR_W'(issued) * ADDR_W'(BURST * 4);
  assign m_awlen   = 8'(BURST - 1);
  assign m_awsize  = 3'd2;
  assign m_awburst = AXI_BURST_INCR;

  assign m_wvalid = w_active && in_valid;
  assign m_wdata  = 32'(in_data);
  assign m_wstrb  = 4'hF;
  assign m_wlast  = (beat == KW'(BURST - 1));
  assign in_ready = w_active && m_wready;
  assign m_bready = busy;

  wire w_fire = m_wvalid && m_wready;
  wire b_fire = m_bvalid && m_bready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; w_active <= 1'b0;
      issued <= '0; responded <= '0; beat <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; issued <= '0; responded <= '0; beat <= '0; w_active <= 1'b0;
        end
      end else begin
        if (m_awvalid && m_awready) begin
          issued   <= issued + 1'b1;
          w_active <= 1'b1;
        end
        if (w_fire) begin
          if (m_wlast) begin
            beat     <= '0;
            w_active <= 1'b0;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        if (b_fire) begin
          responded <= responded + 1'b1;
          if (responded == BW'(NB - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   m_wvalid && !m_wready |=> m_wvalid && $stable(m_wdata));
  assert property (@(posedge clk) disable iff (!rst_n)
                   b_fire |-> m_bresp == AXI_RESP_OKAY);

endmodule
