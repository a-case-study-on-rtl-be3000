// tb_skip_offchip: self-checking test of skip_offchip against the
// behavioural AXI memory (random wait states on every channel). Three frames
// of random pixels are pushed in with random gaps while the consumer takes
// them at random; the output must repeat the input exactly and in order, the
// memory must hold the last frame at the base address afterwards, and every
// pixel must have been written to and read from memory once.
module tb_skip_offchip;
  import unet_pkg::*;
  localparam int CH = 4, NPIX = 64, BURST = 8, FRAMES = 3, DW = CH * 8;
  localparam logic [31:0] BASE = 32'h0004_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [DW-1:0] in_data, out_data;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic arvalid, arready, rvalid, rready, rlast;
  logic [31:0] awaddr, araddr;
  logic [7:0] awlen, arlen;
  logic [2:0] awsize, arsize;
  logic [1:0] awburst, arburst, bresp, rresp;
  logic [DW-1:0] wdata, rdata;
  logic [CH-1:0] wstrb;

  skip_offchip #(.CH(CH), .NPIX(NPIX), .BURST(BURST)) dut (
    .clk, .rst_n, .base(BASE),
    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data,
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_awsize(awsize), .m_awburst(awburst),
    .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast),
    .m_bvalid(bvalid), .m_bready(bready), .m_bresp(bresp),
    .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr), .m_arlen(arlen),
    .m_arsize(arsize), .m_arburst(arburst),
    .m_rvalid(rvalid), .m_rready(rready), .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast));

  axi_mem_model #(.DW(DW)) u_mem (
    .clk, .rst_n, .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast,
    .bvalid, .bready, .bresp, .arvalid, .arready, .araddr, .arlen,
    .rvalid, .rready, .rdata, .rresp, .rlast);

  logic [DW-1:0] px [FRAMES*NPIX];
  int checks = 0, failures = 0, in_idx = 0, out_idx = 0;
  logic gi = 0, go_ = 0;

  always_comb begin
    in_valid  = rst_n && gi && in_idx < FRAMES * NPIX;
    in_data   = px[in_idx % (FRAMES * NPIX)];
    out_ready = go_;
  end

  always @(posedge clk) begin
    if (!(in_valid && !in_ready)) gi <= $urandom_range(0, 3) != 0;
    go_ <= $urandom_range(0, 2) != 0;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== px[out_idx]) begin
        failures++;
        if (failures < 5) $display("pixel %0d got %h exp %h", out_idx, out_data, px[out_idx]);
      end
      out_idx++;
    end
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if (rst_n && awvalid) begin
      checks++;
      if (awsize != 3'd2 || awburst != AXI_BURST_INCR || awlen != 8'(BURST - 1)) failures++;
    end
  end

  initial begin
    for (int i = 0; i < FRAMES * NPIX; i++) px[i] = DW'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (out_idx == FRAMES * NPIX);
    repeat (5) @(posedge clk);
    for (int i = 0; i < NPIX; i++) begin
      checks++;
      if (u_mem.read_word(longint'(BASE) + i * (DW / 8)) !== px[(FRAMES - 1) * NPIX + i]) failures++;
    end
    checks += 2;
    if (u_mem.writes != FRAMES * NPIX) failures++;
    if (u_mem.reads != FRAMES * NPIX) failures++;
    $display("memory writes %0d reads %0d", u_mem.writes, u_mem.reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
