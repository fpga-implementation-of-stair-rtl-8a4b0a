// sg_memory: the (S-G) memory. U = 8 words, each holding one row of S-G as
// 8 complex 26-bit elements (208 bits), so that one read feeds all eight
// complex multipliers at once, as the paper describes.
//
// Simple dual-port RAM: one synchronous write port and one synchronous read
// port; rdata shows the word at raddr one cycle after the read (block-RAM
// style). A read and a write of the same address in one cycle return the old
// word. The word organisation follows the paper; the port style and read
// latency are this design's choice.
module sg_memory
  import smd_pkg::*;
(
  input  logic             clk,
  input  logic             we,
  input  logic [IDX_W-1:0] waddr,
  input  sg_word_t         wdata,
  input  logic [IDX_W-1:0] raddr,
  output sg_word_t         rdata
);

  sg_word_t mem [U];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
