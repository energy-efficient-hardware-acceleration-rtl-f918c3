// axi_dma_read: AXI4 read master feeding a lane (the "AXI DMA READ" block).
//
// On start it reads `words` 64-bit words from DRAM starting at byte address
// `addr` and passes them on as a valid/ready stream. The transfer is split
// into INCR bursts of at most MAX_BURST beats that never cross a 4 KB
// boundary. One burst is outstanding at a time; the R channel is passed
// straight through to the stream (RREADY = m_ready), so data moves one word
// per cycle while DRAM and lane keep up.
//
// Interface: start/addr/words (start is accepted only when !busy), AXI4 AR and
// R channels (64-bit data, 8-byte beats), m_* stream, busy.
// Timing: the first AR is issued the cycle after start.
//
// The paper only names this block and places it between the NoC and the lane;
// the burst size, the single outstanding burst and the address width are this
// design's choices.
module axi_dma_read #(
  parameter int unsigned ADDR_W    = 40,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] addr,
  input  logic [19:0]       words,
  output logic              busy,
  // AXI4 read address channel
  output logic [ADDR_W-1:0] araddr,
  output logic [7:0]        arlen,
  output logic [2:0]        arsize,
  output logic [1:0]        arburst,
  output logic              arvalid,
  input  logic              arready,
  // AXI4 read data channel
  input  logic [63:0]       rdata,
  input  logic [1:0]        rresp,
  input  logic              rlast,
  input  logic              rvalid,
  output logic              rready,
  // stream out
  output logic [63:0]       m_data,
  output logic              m_valid,
  input  logic              m_ready
);

  typedef enum logic [1:0] {R_IDLE, R_AR, R_DATA} rstate_e;
  rstate_e           state;
  logic [ADDR_W-1:0] cur;
  logic [19:0]       left;
  logic [8:0]        beats;      // beats of the current burst

  // beats of the next burst: limited by MAX_BURST, what is left and 4 KB
  logic [19:0] to_4k, nb;
  always_comb begin
    to_4k = (20'd4096 - 20'(cur[11:0])) >> 3;
    nb    = left;
    if (nb > 20'(MAX_BURST)) nb = 20'(MAX_BURST);
    if (nb > to_4k)          nb = to_4k;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= R_IDLE;
      cur   <= '0;
      left  <= '0;
      beats <= '0;
    end else begin
      unique case (state)
        R_IDLE: if (start) begin
          cur  <= {addr[ADDR_W-1:3], 3'b000};
          left <= words;
          if (words != '0) state <= R_AR;
        end
        R_AR: begin
          beats <= 9'(nb);
          if (arready) state <= R_DATA;
        end
        R_DATA: if (rvalid && rready && rlast) begin
          cur  <= cur + ADDR_W'({beats, 3'b000});
          left <= left - 20'(beats);
          state <= (left == 20'(beats)) ? R_IDLE : R_AR;
        end
        default: state <= R_IDLE;
      endcase
    end
  end

  assign busy    = (state != R_IDLE);
  assign araddr  = cur;
  assign arlen   = 8'(nb - 1'b1);
  assign arsize  = 3'd3;      // 8 bytes per beat
  assign arburst = 2'b01;     // INCR
  assign arvalid = (state == R_AR);
  assign rready  = (state == R_DATA) && m_ready;
  assign m_valid = (state == R_DATA) && rvalid;
  assign m_data  = rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      // nothing to check in reset
    end else begin
      if (start)
        assert (addr[2:0] == '0) else $error("axi_dma_read: address not 8-byte aligned");
      if (rvalid && rready)
        assert (rresp == 2'b00) else $error("axi_dma_read: error response");
      if (arvalid)
        assert (nb != '0) else $error("axi_dma_read: empty burst");
    end
  end

endmodule
