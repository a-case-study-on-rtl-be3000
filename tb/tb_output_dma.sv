// tb_output_dma: self-checking test of output_dma against the behavioural
// AXI memory with random wait states. Two frames of random class-score pairs
// are streamed in with random gaps after start pulses; afterwards each word
// in memory must hold its pixel's scores in bytes 0..1 and zeros above, the
// bursts must be BURST-long INCR bursts, and `done` must pulse once per frame
// after the last write response.
module tb_output_dma;
  import unet_pkg::*;
  localparam int NPIX = 96, NCLS = 2, BURST = 16;
  localparam logic [31:0] BASE0 = 32'h0000_8000, BASE1 = 32'h0003_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [31:0] dst_base;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [31:0] awaddr, wdata;
  logic [7:0] awlen;
  logic [2:0] awsize;
  logic [1:0] awburst, bresp;
  logic [3:0] wstrb;
  logic in_valid, in_ready;
  logic [NCLS*8-1:0] in_data;

  output_dma #(.NPIX(NPIX), .NCLS(NCLS), .BURST(BURST)) dut (
    .clk, .rst_n, .start, .dst_base, .busy, .done,
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_awsize(awsize), .m_awburst(awburst),
    .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast),
    .m_bvalid(bvalid), .m_bready(bready), .m_bresp(bresp),
    .in_valid, .in_ready, .in_data);

  logic arready, rvalid, rlast;
  logic [31:0] rdata;
  logic [1:0] rresp;
  axi_mem_model #(.DW(32)) u_mem (
    .clk, .rst_n, .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast,
    .bvalid, .bready, .bresp, .arvalid(1'b0), .arready, .araddr(32'h0), .arlen(8'h0),
    .rvalid, .rready(1'b0), .rdata, .rresp, .rlast);

  logic [NCLS*8-1:0] px [2][NPIX];
  int checks = 0, failures = 0, in_idx = 0, frame = 0, dones = 0;
  logic gi = 0;

  always_comb begin
    in_valid = gi && busy && in_idx < NPIX;
    in_data  = px[frame][in_idx % NPIX];
  end

  always @(posedge clk) begin
    if (!(in_valid && !in_ready)) gi <= $urandom_range(0, 2) != 0;
    if (done) dones++;
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if (rst_n && awvalid) begin
      checks++;
      if (awlen != 8'(BURST - 1) || awsize != 3'd2 || awburst != AXI_BURST_INCR) failures++;
    end
    if (rst_n && wvalid) begin
      checks++;
      if (wstrb != 4'hF) failures++;
    end
  end

  initial begin
    for (int f = 0; f < 2; f++) for (int i = 0; i < NPIX; i++) px[f][i] = 16'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      @(negedge clk);
      dst_base = (f == 0) ? BASE0 : BASE1;
      in_idx = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      wait (done);
      @(negedge clk);
      checks++;
      if (busy) failures++;
      for (int i = 0; i < NPIX; i++) begin
        checks++;
        if (u_mem.read_word(longint'(dst_base) + 4 * i) !== {16'h0, px[f][i]}) begin
          failures++;
          if (failures < 5) $display("word %0d got %h exp %h", i,
                                     u_mem.read_word(longint'(dst_base) + 4 * i), px[f][i]);
        end
      end
      frame++;
    end
    repeat (2) @(posedge clk);
    checks++;
    if (dones != 2) failures++;
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
