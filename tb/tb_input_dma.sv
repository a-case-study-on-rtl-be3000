// tb_input_dma: self-checking test of input_dma against the behavioural AXI
// memory with random wait states. Two images are placed in memory (one pixel
// per 32-bit word); after each start pulse the DMA must deliver every pixel,
// channel bytes 0..2 of its word, in address order under random
// back-pressure, issue only BURST-long INCR bursts, and pulse `done` once.
module tb_input_dma;
  import unet_pkg::*;
  localparam int NPIX = 96, CH = 3, BURST = 16;
  localparam logic [31:0] BASE0 = 32'h0000_1000, BASE1 = 32'h0002_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [31:0] src_base;
  logic arvalid, arready, rvalid, rready, rlast;
  logic [31:0] araddr, rdata;
  logic [7:0] arlen;
  logic [2:0] arsize;
  logic [1:0] arburst, rresp;
  logic out_valid, out_ready;
  logic [CH*8-1:0] out_data;

  input_dma #(.NPIX(NPIX), .CH(CH), .BURST(BURST)) dut (
    .clk, .rst_n, .start, .src_base, .busy, .done,
    .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr), .m_arlen(arlen),
    .m_arsize(arsize), .m_arburst(arburst),
    .m_rvalid(rvalid), .m_rready(rready), .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast),
    .out_valid, .out_ready, .out_data);

  // The write side of the memory model is unused here.
  logic awready, wready, bvalid;
  logic [1:0] bresp;
  axi_mem_model #(.DW(32)) u_mem (
    .clk, .rst_n, .awvalid(1'b0), .awready, .awaddr(32'h0), .awlen(8'h0),
    .wvalid(1'b0), .wready, .wdata(32'h0), .wlast(1'b0), .bvalid, .bready(1'b0), .bresp,
    .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rresp, .rlast);

  logic [31:0] img [2][NPIX];
  int checks = 0, failures = 0, out_idx = 0, frame = 0, dones = 0;
  logic go_ = 0;

  assign out_ready = go_;

  always @(posedge clk) begin
    go_ <= $urandom_range(0, 2) != 0;
    if (done) dones++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== img[frame][out_idx][CH*8-1:0]) begin
        failures++;
        if (failures < 5) $display("pixel %0d got %h exp %h", out_idx, out_data, img[frame][out_idx][CH*8-1:0]);
      end
      out_idx++;
    end
    if (rst_n && arvalid) begin
      checks++;
      if (arlen != 8'(BURST - 1) || arsize != 3'd2 || arburst != AXI_BURST_INCR) failures++;
    end
  end

  initial begin
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < NPIX; i++) begin
        img[f][i] = $urandom;
        u_mem.write_word(longint'(f == 0 ? BASE0 : BASE1) + 4 * i, img[f][i]);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      @(negedge clk);
      src_base = (f == 0) ? BASE0 : BASE1;
      start = 1;
      @(negedge clk);
      start = 0;
      wait (done);
      @(negedge clk);
      checks++;
      if (out_idx != NPIX || busy) begin
        failures++;
        $display("frame %0d: %0d pixels, busy %0d", f, out_idx, busy);
      end
      out_idx = 0;
      frame++;
    end
    repeat (2) @(posedge clk);
    checks++;
    if (dones != 2) begin failures++; $display("done pulses: %0d", dones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
