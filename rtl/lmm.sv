// lmm: a PE's local memory module, double-buffered. It holds two banks of
// DEPTH 64-bit words (default 4096 words = 32 KB per bank). At any time one
// bank belongs to the PE and the other to the DMA channel: the PE reads its
// operands from its bank through two ports (one per address generator, the
// second can also store a result) while the DMA channel loads the next data
// block into, or drains results from, the other bank. A swap pulse exchanges
// the roles, so transfers overlap with computation. Reads are synchronous:
// data appears the cycle after the address (single-cycle local reads).
// The double buffering, the single-cycle read and the 32 KB size follow the
// paper; taking 32 KB as the size of each bank (the capacity a kernel sees),
// the port set and the swap command are this design's choices.
// Standing lint warning: rst_n is also used, synchronously, to gate the
// assertions; the logic itself resets asynchronously.
module lmm
  import imax_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,       // exchange PE bank and DMA bank
  output logic          pe_bank,    // bank currently owned by the PE
  // PE port 1 (AG1): read
  input  logic          p1_re,
  input  logic [AW-1:0] p1_addr,
  output word_t         p1_rdata,
  // PE port 2 (AG2): read or write
  input  logic          p2_re,
  input  logic          p2_we,
  input  logic [AW-1:0] p2_addr,
  input  word_t         p2_wdata,
  output word_t         p2_rdata,
  // DMA port
  input  logic          d_re,
  input  logic          d_we,
  input  logic [AW-1:0] d_addr,
  input  word_t         d_wdata,
  output word_t         d_rdata
);
  localparam int unsigned IW = $clog2(DEPTH);

  word_t mem0 [DEPTH];
  word_t mem1 [DEPTH];

  logic [IW-1:0] a1, a2, ad;
  assign a1 = p1_addr[IW-1:0];
  assign a2 = p2_addr[IW-1:0];
  assign ad = d_addr[IW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pe_bank <= 1'b0;
    else if (swap) pe_bank <= ~pe_bank;
  end

  // bank 0
  always_ff @(posedge clk) begin
    if (!pe_bank) begin
      if (p2_we) mem0[a2] <= p2_wdata;
    end else begin
      if (d_we) mem0[ad] <= d_wdata;
    end
  end

  // bank 1
  always_ff @(posedge clk) begin
    if (pe_bank) begin
      if (p2_we) mem1[a2] <= p2_wdata;
    end else begin
      if (d_we) mem1[ad] <= d_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (p1_re) p1_rdata <= pe_bank ? mem1[a1] : mem0[a1];
    if (p2_re) p2_rdata <= pe_bank ? mem1[a2] : mem0[a2];
    if (d_re)  d_rdata  <= pe_bank ? mem0[ad] : mem1[ad];
  end

  // addresses beyond DEPTH are not decoded
  always_ff @(posedge clk)
    if (rst_n) begin
      assert (!(p1_re || p2_re || p2_we) || ((32'(p1_addr) < DEPTH || !p1_re)
              && (32'(p2_addr) < DEPTH || !(p2_re || p2_we))))
        else $error("lmm: PE address out of range");
      assert (!(d_re || d_we) || 32'(d_addr) < DEPTH)
        else $error("lmm: DMA address out of range");
    end

endmodule
