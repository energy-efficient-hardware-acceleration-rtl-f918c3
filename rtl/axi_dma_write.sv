// axi_dma_write: AXI4 write master draining a lane (the "AXI DMA WRITE" block).
//
// After start it writes the words of its input stream to consecutive 64-bit
// DRAM locations from byte address `addr` on. Words are gathered into a
// MAX_BURST-entry buffer; a burst is sent when the buffer is full, when the
// stream marks its last word, or when the next word would cross a 4 KB
// boundary. Each burst is AW, then its W beats (WLAST on the final one), then
// the B response; only then is the next word accepted.
//
// Interface: start/addr (accepted when no burst is being gathered or sent), s_* stream with s_last,
// AXI4 AW, W and B channels (64-bit data, all byte strobes set),
// words_written (words acknowledged by B since start), busy.
//
// The paper only names this block and places it between the lane and the
// NoC; buffering, burst size and the address width are this design's choices.
module axi_dma_write #(
  parameter int unsigned ADDR_W    = 40,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] addr,
  output logic              busy,
  output logic [19:0]       words_written,
  // stream in
  input  logic [63:0]       s_data,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic              s_last,
  // AXI4 write address channel
  output logic [ADDR_W-1:0] awaddr,
  output logic [7:0]        awlen,
  output logic [2:0]        awsize,
  output logic [1:0]        awburst,
  output logic              awvalid,
  input  logic              awready,
  // AXI4 write data channel
  output logic [63:0]       wdata,
  output logic [7:0]        wstrb,
  output logic              wlast,
  output logic              wvalid,
  input  logic              wready,
  // AXI4 write response channel
  input  logic [1:0]        bresp,
  input  logic              bvalid,
  output logic              bready
);

  localparam int unsigned CW = $clog2(MAX_BURST + 1);
  localparam int unsigned IW = $clog2(MAX_BURST);

  typedef enum logic [2:0] {W_IDLE, W_FILL, W_AW, W_DATA, W_RESP} wstate_e;
  wstate_e           state;
  logic [ADDR_W-1:0] cur;
  logic [63:0]       buf_q [MAX_BURST];
  logic [CW-1:0]     cnt;    // words in the buffer
  logic [CW-1:0]     sent;   // beats sent in this burst
  logic [CW-1:0]     limit;  // words that fit before MAX_BURST or 4 KB

  always_comb begin
    logic [12:0] to_4k;
    to_4k = (13'd4096 - {1'b0, cur[11:0]}) >> 3;
    limit = (to_4k < 13'(MAX_BURST)) ? CW'(to_4k) : CW'(MAX_BURST);
  end

  assign s_ready = (state == W_FILL) && (cnt < limit) && !(start && cnt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= W_IDLE;
      cur           <= '0;
      cnt           <= '0;
      sent          <= '0;
      words_written <= '0;
    end else begin
      unique case (state)
        W_IDLE: if (start) begin
          cur           <= {addr[ADDR_W-1:3], 3'b000};
          cnt           <= '0;
          words_written <= '0;
          state         <= W_FILL;
        end
        W_FILL: begin
          if (start && cnt == '0) begin
            // re-arm at a new destination between buffers
            cur           <= {addr[ADDR_W-1:3], 3'b000};
            words_written <= '0;
          end else if (s_valid && s_ready) begin
            cnt <= cnt + 1'b1;
            if (s_last || cnt + 1'b1 == limit) state <= W_AW;
          end
        end
        W_AW: if (awready) begin
          sent  <= '0;
          state <= W_DATA;
        end
        W_DATA: if (wready) begin
          sent <= sent + 1'b1;
          if (sent + 1'b1 == cnt) state <= W_RESP;
        end
        W_RESP: if (bvalid) begin
          cur           <= cur + ADDR_W'({cnt, 3'b000});
          words_written <= words_written + 20'(cnt);
          cnt           <= '0;
          state         <= W_FILL;
        end
        default: state <= W_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == W_FILL && s_valid && s_ready) buf_q[cnt[IW-1:0]] <= s_data;
  end

  assign busy    = (state != W_IDLE) && (state != W_FILL || cnt != '0);
  assign awaddr  = cur;
  assign awlen   = 8'(cnt - 1'b1);
  assign awsize  = 3'd3;
  assign awburst = 2'b01;
  assign awvalid = (state == W_AW);
  assign wdata   = buf_q[sent[IW-1:0]];
  assign wstrb   = 8'hFF;
  assign wvalid  = (state == W_DATA);
  assign wlast   = (state == W_DATA) && (sent + 1'b1 == cnt);
  assign bready  = (state == W_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      // nothing to check in reset
    end else begin
      if (start)
        assert (addr[2:0] == '0) else $error("axi_dma_write: address not 8-byte aligned");
      if (bvalid && bready)
        assert (bresp == 2'b00) else $error("axi_dma_write: error response");
    end
  end

endmodule
