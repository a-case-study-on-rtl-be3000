// axi_mem_model: behavioural model of an external memory behind an AXI4
// slave port, for testbenches only (it stands in for the board's DRAM). It
// accepts INCR bursts, one beat = DW bits at a DW/8-aligned address, and
// inserts random wait states on every channel when STALL is set. Write
// addresses are queued and data beats are applied to the oldest one; the
// write response follows the last beat. Read addresses are queued and served
// in order. Backdoor functions give the testbench direct access.
module axi_mem_model #(
  parameter int unsigned DW     = 32,
  parameter int unsigned ADDR_W = 32,
  parameter bit          STALL  = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              awvalid,
  output logic              awready,
  input  logic [ADDR_W-1:0] awaddr,
  input  logic [7:0]        awlen,
  input  logic              wvalid,
  output logic              wready,
  input  logic [DW-1:0]     wdata,
  input  logic              wlast,
  output logic              bvalid,
  input  logic              bready,
  output logic [1:0]        bresp,
  input  logic              arvalid,
  output logic              arready,
  input  logic [ADDR_W-1:0] araddr,
  input  logic [7:0]        arlen,
  output logic              rvalid,
  input  logic              rready,
  output logic [DW-1:0]     rdata,
  output logic [1:0]        rresp,
  output logic              rlast
);
  localparam int unsigned BYTES = DW / 8;

  logic [DW-1:0] mem [longint];
  longint aw_q [$];
  int     awlen_q [$];
  longint ar_q [$];
  int     arlen_q [$];
  int     wbeat = 0, rbeat = 0, pending_b = 0;
  int     writes = 0, reads = 0, stalls = 0;

  function automatic void write_word(longint byte_addr, logic [DW-1:0] d);
    mem[byte_addr / BYTES] = d;
  endfunction

  function automatic logic [DW-1:0] read_word(longint byte_addr);
    if (mem.exists(byte_addr / BYTES)) return mem[byte_addr / BYTES];
    return '0;
  endfunction

  assign bresp = 2'b00;
  assign rresp = 2'b00;

  always @(posedge clk) begin
    if (!rst_n) begin
      awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0;
      arready <= 1'b0; rvalid <= 1'b0; rdata <= '0; rlast <= 1'b0;
    end else begin
      // address channels
      if (awvalid && awready) begin
        aw_q.push_back(longint'(awaddr));
        awlen_q.push_back(int'(awlen));
      end
      if (arvalid && arready) begin
        ar_q.push_back(longint'(araddr));
        arlen_q.push_back(int'(arlen));
      end
      // write data
      if (wvalid && wready) begin
        if (aw_q.size() == 0) $error("axi_mem_model: write data without address");
        else begin
          mem[(aw_q[0] + longint'(wbeat) * BYTES) / BYTES] = wdata;
          writes++;
          if (wlast != (wbeat == awlen_q[0])) $error("axi_mem_model: wlast misplaced");
          if (wbeat == awlen_q[0]) begin
            void'(aw_q.pop_front());
            void'(awlen_q.pop_front());
            wbeat = 0;
            pending_b++;
          end else begin
            wbeat++;
          end
        end
      end
      if (bvalid && bready) begin
        bvalid <= 1'b0;
        pending_b--;
      end else if (!bvalid && pending_b > 0 && (!STALL || $urandom_range(0, 2) == 0)) begin
        bvalid <= 1'b1;
      end
      // read data
      if (rvalid && rready) begin
        rvalid <= 1'b0;
        reads++;
        if (rlast) begin
          void'(ar_q.pop_front());
          void'(arlen_q.pop_front());
          rbeat = 0;
        end else begin
          rbeat++;
        end
      end
      if ((!rvalid || rready) && ar_q.size() > 0 && (!STALL || $urandom_range(0, 3) != 0)) begin
        rvalid <= 1'b1;
        rdata  <= read_word(ar_q[0] + longint'(rbeat) * BYTES);
        rlast  <= (rbeat == arlen_q[0]);
      end else if (STALL && rvalid == 1'b0) begin
        stalls++;
      end
      awready <= !STALL || ($urandom_range(0, 3) != 0);
      wready  <= !STALL || ($urandom_range(0, 4) != 0);
      arready <= !STALL || ($urandom_range(0, 3) != 0);
    end
  end

endmodule
