// lmm: Local Memory Module, the on-chip memory paired with each PE.
//
// A WORDS x DATA_W array (default 32 KB = 4096 words of 64 bits) with two
// synchronous ports. Port A belongs to the PE on the execution path (operand
// reads during EXEC, accumulator stores at its end). Port B belongs to the
// memory path: DMA writes during LOAD and DMA reads during DRAIN.
//
// Timing: a read presented on a rising edge (x_en=1, x_we=0) returns its word
// on x_rdata after that edge, for one cycle at least (x_rdata holds until the
// next read on the same port). Writes take effect on the edge. The two ports
// must not write one address in the same cycle (not checked; the controller
// never lets PE stores and DMA loads overlap).
//
// Following the paper: 32 KB per LMM, one LMM per PE, an execution-path and a
// memory-path connection. This design's choice: two ports and 64-bit words.
// In silicon this would be an SRAM macro.
module lmm #(
  parameter int unsigned BYTES  = 32768,
  parameter int unsigned DATA_W = 64,
  localparam int unsigned WORDS = BYTES / (DATA_W / 8),
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic              clk,
  // port A: PE
  input  logic              a_en,
  input  logic              a_we,
  input  logic [AW-1:0]     a_addr,
  input  logic [DATA_W-1:0] a_wdata,
  output logic [DATA_W-1:0] a_rdata,
  // port B: DMA
  input  logic              b_en,
  input  logic              b_we,
  input  logic [AW-1:0]     b_addr,
  input  logic [DATA_W-1:0] b_wdata,
  output logic [DATA_W-1:0] b_rdata
);

  logic [DATA_W-1:0] mem [WORDS];

  // One process for both ports, so that the array has a single writer.
  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      else      b_rdata     <= mem[b_addr];
    end
  end

endmodule
