// tb_unet_full: one complete frame through the accelerator in its default
// configuration (C = 4, 256 x 256 pixels, three input channels, two classes,
// skip connections on chip), with no parameter overridden. Weights and
// constants come from the reference model (unet_ref_pkg) through the
// configuration bus, the image from a behavioural AXI memory with random
// wait states; every one of the 2 x 65536 class scores written back is
// compared with the reference. The frame time is printed and checked against
// H*W*C/PE cycles (the full-resolution convolutions) with a margin for
// pipeline fill and memory waits.
module tb_unet_full;
  import unet_pkg::*;
  import unet_ref_pkg::*;

  localparam int C = 4, H = 256, W = 256, IN_CH = 3, NCLS = 2, PE = 1;
  localparam int NPIX = H * W, SKIP_DW = (C << (LEVELS - 1)) * 8;
  localparam logic [31:0] SRC = 32'h0010_0000, DST = 32'h0020_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic start = 0, busy, done;
  logic [31:0] skip_base [LEVELS];
  int checks = 0, failures = 0;

  logic arvalid, arready, rvalid, rready, rlast, awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [31:0] araddr, rdata, awaddr, wdata;
  logic [7:0] arlen, awlen;
  logic [2:0] arsize, awsize;
  logic [1:0] arburst, rresp, awburst, bresp;
  logic [3:0] wstrb;
  // Skip-connection ports: unused with on-chip skips, inputs held idle.
  logic              sk_awvalid [LEVELS], sk_wvalid [LEVELS], sk_wlast [LEVELS], sk_bready [LEVELS];
  logic              sk_arvalid [LEVELS], sk_rready [LEVELS];
  logic              sk_awready [LEVELS], sk_wready [LEVELS], sk_bvalid [LEVELS];
  logic              sk_arready [LEVELS], sk_rvalid [LEVELS], sk_rlast [LEVELS];
  logic [31:0]       sk_awaddr [LEVELS], sk_araddr [LEVELS];
  logic [7:0]        sk_awlen [LEVELS], sk_arlen [LEVELS];
  logic [2:0]        sk_awsize [LEVELS], sk_arsize [LEVELS];
  logic [1:0]        sk_awburst [LEVELS], sk_arburst [LEVELS], sk_bresp [LEVELS], sk_rresp [LEVELS];
  logic [SKIP_DW-1:0] sk_wdata [LEVELS], sk_rdata [LEVELS];
  logic [SKIP_DW/8-1:0] sk_wstrb [LEVELS];

  always_comb
    for (int l = 0; l < LEVELS; l++) begin
      sk_awready[l] = 1'b0; sk_wready[l] = 1'b0; sk_bvalid[l] = 1'b0; sk_bresp[l] = '0;
      sk_arready[l] = 1'b0; sk_rvalid[l] = 1'b0; sk_rlast[l] = 1'b0; sk_rresp[l] = '0;
      sk_rdata[l] = '0;
    end

  unet_top u_top (
    .clk, .rst_n, .cfg, .start, .src_base(SRC), .dst_base(DST), .skip_base, .busy, .done,
    .in_arvalid(arvalid), .in_arready(arready), .in_araddr(araddr), .in_arlen(arlen),
    .in_arsize(arsize), .in_arburst(arburst), .in_rvalid(rvalid), .in_rready(rready),
    .in_rdata(rdata), .in_rresp(rresp), .in_rlast(rlast),
    .out_awvalid(awvalid), .out_awready(awready), .out_awaddr(awaddr), .out_awlen(awlen),
    .out_awsize(awsize), .out_awburst(awburst), .out_wvalid(wvalid), .out_wready(wready),
    .out_wdata(wdata), .out_wstrb(wstrb), .out_wlast(wlast), .out_bvalid(bvalid),
    .out_bready(bready), .out_bresp(bresp),
    .sk_awvalid, .sk_awready, .sk_awaddr, .sk_awlen, .sk_awsize, .sk_awburst,
    .sk_wvalid, .sk_wready, .sk_wdata, .sk_wstrb, .sk_wlast, .sk_bvalid, .sk_bready, .sk_bresp,
    .sk_arvalid, .sk_arready, .sk_araddr, .sk_arlen, .sk_arsize, .sk_arburst,
    .sk_rvalid, .sk_rready, .sk_rdata, .sk_rresp, .sk_rlast);

  axi_mem_model #(.DW(32)) u_mem (
    .clk, .rst_n, .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast,
    .bvalid, .bready, .bresp, .arvalid, .arready, .araddr, .arlen,
    .rvalid, .rready, .rdata, .rresp, .rlast);

  unet_ref ref_model;
  iq_t img, scores;
  longint t_start, t_done;

  task automatic cfg_write(int layer, int addr, int data);
    @(negedge clk);
    cfg.we = 1'b1; cfg.layer = CFG_LAYER_W'(layer); cfg.addr = CFG_ADDR_W'(addr); cfg.wdata = data;
  endtask

  initial begin
    cfg = '0;
    for (int l = 0; l < LEVELS; l++) skip_base[l] = '0;
    ref_model = new(C, H, W, IN_CH, NCLS, LEVELS);
    ref_model.make_all();
    img = {};
    for (int p = 0; p < NPIX; p++) begin
      logic [31:0] word;
      word = '0;
      for (int c = 0; c < IN_CH; c++) begin
        int v;
        v = int'($urandom_range(0, 127));
        img.push_back(v);
        word[c*8 +: 8] = 8'(v);
      end
      u_mem.write_word(longint'(SRC) + 4 * p, word);
    end
    scores = ref_model.run(img);
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ref_model.wts[id]) begin
      for (int i = 0; i < ref_model.wts[id].size(); i++) cfg_write(id, i, ref_model.wts[id][i]);
      for (int c = 0; c < ref_model.mult[id].size(); c++) begin
        cfg_write(id, (1 << (CFG_ADDR_W - 1)) + c, ref_model.mult[id][c]);
        cfg_write(id, (1 << (CFG_ADDR_W - 1)) + ref_model.mult[id].size() + c, ref_model.offs[id][c]);
      end
      cfg_write(id, (1 << (CFG_ADDR_W - 1)) + 2 * ref_model.mult[id].size(), ref_model.shift[id]);
    end
    @(negedge clk);
    cfg = '0;
    start = 1;
    t_start = $time;
    @(negedge clk);
    start = 0;
    wait (done);
    t_done = $time;
    @(negedge clk);
    begin
      int errs;
      errs = 0;
      for (int p = 0; p < NPIX; p++) begin
        logic [31:0] word;
        word = u_mem.read_word(longint'(DST) + 4 * p);
        for (int k = 0; k < NCLS; k++) begin
          checks++;
          if (int'($signed(word[k*8 +: 8])) != scores[p * NCLS + k]) begin
            failures++;
            errs++;
            if (errs < 4) $display("pixel %0d class %0d: got %0d exp %0d", p, k,
                                   $signed(word[k*8 +: 8]), scores[p * NCLS + k]);
          end
        end
      end
    end
    $display("frame: %0d cycles (H*W*C/PE = %0d)", (t_done - t_start) / 10, NPIX * C / PE);
    checks++;
    if ((t_done - t_start) / 10 > longint'(2 * NPIX * C / PE)) begin
      failures++;
      $display("frame time above bound");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
