// sg_loader: gathers the S-G matrix, which arrives one complex element per
// write, into full rows of U = 8 elements and writes each row as one
// 26 x 8 = 208-bit word into the S-G memory.
//
// The host presents chip select, write enable, a 6-bit element address
// {row, column} and a 26-bit element (13-bit real, 13-bit imaginary). Elements
// of a row are held in a register array; the write of the last column
// (column U-1) completes the row. One cycle later the loader drives
// mem_we/mem_addr/mem_wdata for exactly one cycle with the assembled word
// (the register array contents plus the last element).
// Row order is free, but the columns of a row must be written before its
// last column; a row whose earlier columns were not written carries the
// stale register contents (no checking is done, as the paper describes
// none). Collecting rows in registers follows the paper; the
// last-column trigger and the one-cycle write delay are this design's choice.
module sg_loader
  import smd_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cs,
  input  logic                  we,
  input  logic [2*IDX_W-1:0]    addr,     // {row, column}
  input  cg_t                   wdata,
  output logic                  mem_we,
  output logic [IDX_W-1:0]      mem_addr,
  output sg_word_t              mem_wdata
);

  cg_t              row_buf [U-1];   // columns 0..U-2 of the row being assembled
  logic [IDX_W-1:0] row, col;
  logic             wr;

  assign row = addr[2*IDX_W-1:IDX_W];
  assign col = addr[IDX_W-1:0];
  assign wr  = cs & we;

  always_ff @(posedge clk) begin
    if (wr && col != IDX_W'(U - 1)) row_buf[col] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_we    <= 1'b0;
      mem_addr  <= '0;
      mem_wdata <= '0;
    end else begin
      mem_we <= wr && col == IDX_W'(U - 1);
      if (wr && col == IDX_W'(U - 1)) begin
        mem_addr <= row;
        for (int c = 0; c < U - 1; c++) mem_wdata[c] <= row_buf[c];
        mem_wdata[U-1] <= wdata;
      end
    end
  end

endmodule
