// axi_mem_model: behavioural DRAM with an AXI4 slave port, for testbenches.
//
// WORDS 64-bit words, addressed by byte address (bits [2:0] ignored, the
// word index wraps at WORDS). One read burst and one write burst at a time.
// ARREADY, RVALID, AWREADY and WREADY are withheld at random (1 cycle in
// STALL_IN) to exercise the masters' handshakes; stall counters are exposed.
// The testbench reads and writes `mem` directly to set up and check data.
module axi_mem_model #(
  parameter int unsigned ADDR_W   = 40,
  parameter int unsigned WORDS    = 16384,
  parameter int unsigned STALL_IN = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] araddr,
  input  logic [7:0]        arlen,
  input  logic [2:0]        arsize,
  input  logic [1:0]        arburst,
  input  logic              arvalid,
  output logic              arready,
  output logic [63:0]       rdata,
  output logic [1:0]        rresp,
  output logic              rlast,
  output logic              rvalid,
  input  logic              rready,
  input  logic [ADDR_W-1:0] awaddr,
  input  logic [7:0]        awlen,
  input  logic [2:0]        awsize,
  input  logic [1:0]        awburst,
  input  logic              awvalid,
  output logic              awready,
  input  logic [63:0]       wdata,
  input  logic [7:0]        wstrb,
  input  logic              wlast,
  input  logic              wvalid,
  output logic              wready,
  output logic [1:0]        bresp,
  output logic              bvalid,
  input  logic              bready
);

  logic [63:0] mem [WORDS];
  int rd_stalls = 0, wr_stalls = 0, rd_bursts = 0, wr_bursts = 0, errors = 0;

  // read side
  logic        r_busy = 1'b0;
  logic [31:0] r_idx;
  int          r_left;

  always @(posedge clk) begin
    if (!rst_n) begin
      r_busy  <= 1'b0;
      arready <= 1'b0;
      rvalid  <= 1'b0;
      rlast   <= 1'b0;
    end else begin
      arready <= !r_busy && ($urandom % STALL_IN != 0);
      if (arvalid && arready && !r_busy) begin
        if (arsize != 3'd3 || arburst != 2'b01) errors++;
        if ((araddr[11:0] + ((32'(arlen) + 1) << 3)) > 32'h1000) errors++;  // 4 KB rule
        r_busy  <= 1'b1;
        r_idx   <= 32'(araddr >> 3);
        r_left  <= int'(arlen) + 1;
        arready <= 1'b0;
        rd_bursts++;
      end
      if (r_busy) begin
        if (rvalid && rready) begin
          r_idx  <= r_idx + 1;
          r_left <= r_left - 1;
          if (r_left == 1) begin
            r_busy <= 1'b0;
            rvalid <= 1'b0;
          end
        end
        if (!(rvalid && rready && r_left == 1)) begin
          if (!rvalid || rready) begin
            logic go;
            logic [31:0] ni;
            go = ($urandom % STALL_IN != 0);
            ni = (rvalid && rready) ? r_idx + 1 : r_idx;
            if (!go) rd_stalls++;
            rvalid <= go;
            rdata  <= mem[ni % WORDS];
            rlast  <= ((rvalid && rready) ? r_left - 1 : r_left) == 1;
          end
        end
      end
    end
  end
  assign rresp = 2'b00;

  // write side
  logic        w_busy = 1'b0;
  logic [31:0] w_idx;
  int          w_left;

  always @(posedge clk) begin
    if (!rst_n) begin
      w_busy  <= 1'b0;
      awready <= 1'b0;
      wready  <= 1'b0;
      bvalid  <= 1'b0;
    end else begin
      awready <= !w_busy && !bvalid && ($urandom % STALL_IN != 0);
      if (awvalid && awready && !w_busy) begin
        if (awsize != 3'd3 || awburst != 2'b01) errors++;
        if ((awaddr[11:0] + ((32'(awlen) + 1) << 3)) > 32'h1000) errors++;
        w_busy  <= 1'b1;
        w_idx   <= 32'(awaddr >> 3);
        w_left  <= int'(awlen) + 1;
        awready <= 1'b0;
        wr_bursts++;
      end
      if (w_busy) begin
        wready <= ($urandom % STALL_IN != 0);
        if (!wready) wr_stalls++;
        if (wvalid && wready) begin
          if (wstrb != 8'hFF) errors++;
          if (wlast != (w_left == 1)) errors++;
          mem[w_idx % WORDS] <= wdata;
          w_idx  <= w_idx + 1;
          w_left <= w_left - 1;
          if (w_left == 1) begin
            w_busy <= 1'b0;
            wready <= 1'b0;
            bvalid <= 1'b1;
          end
        end
      end
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end
  assign bresp = 2'b00;

endmodule
