// input_dma: reads one input image from off-chip memory over an AXI4
// memory-mapped read port and emits it as a raster-order pixel stream, the
// "Input DMA" at the head of the accelerator.
//
// How it works: after a start pulse it issues NPIX/BURST incrementing read
// bursts of BURST 32-bit words, starting at src_base, with at most
// MAX_OUTSTANDING bursts in flight. Each word holds one pixel: channel c
// (c < CH) in byte c, the upper bytes ignored. Read data is passed straight
// to the output stream (rready = out_ready), so the network applies
// back-pressure directly to the memory. `done` pulses for one cycle after
// the last beat has been passed on.
// The pixel packing, burst length and outstanding limit are this design's
// choices; the paper names the block and its AXI memory-mapped port only.
// Timing: one pixel per cycle when memory and network keep up.
// Bytes above CH*8 of each read word are padding and deliberately unused.
// The AXI length/size/burst-type outputs are constants and the stream data is
// the read data wired straight through; both are intended.
module input_dma
  import unet_pkg::*;
#(
  parameter int unsigned NPIX            = 256 * 256,
  parameter int unsigned CH              = 3,
  parameter int unsigned ADDR_W          = 32,
  parameter int unsigned BURST           = 16,
  parameter int unsigned MAX_OUTSTANDING = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] src_base,
  output logic              busy,
  output logic              done,
  // AXI4 read address channel
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [ADDR_W-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  output logic [2:0]        m_arsize,
  output logic [1:0]        m_arburst,
  // AXI4 read data channel
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [31:0]       m_rdata,
  input  logic [1:0]        m_rresp,
  input  logic              m_rlast,
  // pixel stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [CH*8-1:0]   out_data
);
  localparam int unsigned NB  = NPIX / BURST;
  localparam int unsigned BW  = $clog2(NB + 1);
  localparam int unsigned OW  = $clog2(MAX_OUTSTANDING + 1);

  initial begin
    assert (NPIX % BURST == 0) else $error("input_dma: BURST must divide NPIX");
    assert (CH <= 4) else $error("input_dma: at most 4 channels per 32-bit word");
  end

  logic [BW-1:0] issued, finished;
  logic [OW-1:0] outstanding;

  assign m_arvalid = busy && (issued < BW'(NB)) && (outstanding < OW'(MAX_OUTSTANDING));
  assign m_araddr  = src_base + ADDR_W'(issued) * ADDR_W'(BURST * 4);
  assign m_arlen   = 8'(BURST - 1);
  assign m_arsize  = 3'd2;
  assign m_arburst = AXI_BURST_INCR;

  assign out_valid = busy && m_rvalid;
  assign out_data  = m_rdata[CH*8-1:0];
  assign m_rready  = busy && out_ready;

  wire ar_fire   = m_arvalid && m_arready;
  wire last_fire = m_rvalid && m_rready && m_rlast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      issued <= '0; finished <= '0; outstanding <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; issued <= '0; finished <= '0; outstanding <= '0;
        end
      end else begin
        if (ar_fire) issued <= issued + 1'b1;
        outstanding <= outstanding + OW'(ar_fire) - OW'(last_fire);
        if (last_fire) begin
          finished <= finished + 1'b1;
          if (finished == BW'(NB - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr));
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_rvalid && m_rready |-> m_rresp == AXI_RESP_OKAY);

endmodule
