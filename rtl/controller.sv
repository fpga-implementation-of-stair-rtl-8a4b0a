// controller: the control logic of the detector. It runs the whole
// detection on the shared multiplier array as a fixed schedule:
//
//   start      the Newton-Raphson divider begins on diag(G); in parallel the
//              host keeps loading S-G into the S-G memory (64 cycles)
//   ND         when the reciprocals are ready: one cycle of OP_ND1
//              (S^-1(i,i) S^-1(j,j)), three cycles later one of OP_ND2
//              (times -G(i,j)), Algorithm 1 lines 5-6
//   X0         eight rows of x_0 = S^-1 x_MF, then 4 cycles for the pipeline
//   WAIT_LOAD  stall until all 8 rows of S-G are in the memory
//   ITER       ITERS iterations of 25 cycles each: cycles 0-7 issue the rows
//              of (S-G)x_{t-1}; cycles 12-19 issue the rows of
//              S^-1((S-G)x_{t-1} + x_MF); the last row is written back in
//              cycle 24
//   DONE       'done' is high for one cycle; the estimate is in the results
//              array
//
// Each issue names an operation and a row. sg_raddr carries the row in the
// issue cycle (the S-G memory answers one cycle later); 'tag' is the issue
// registered, so it arrives at the operand selection together with the
// memory data. The memory-read, multiplier (2) and adder-tree (2) stages give
// a 5-cycle loop from issue to write-back, which sets the 25-cycle iteration:
// 8 issues, 4 cycles until the last first-phase row is written (the second
// phase starts in that cycle, as it needs all rows), 8 issues and 5 cycles
// for the last row to come back: 8 + 4 + 8 + 5 = 25.
// With one S-G element per cycle from the start cycle on, 'done' rises in
// the 116th cycle counting the start cycle as the first: 64 load cycles,
// 1 cycle for the last row to enter the memory, 2 x 25 iteration cycles and
// the DONE cycle. The paper gives 25 cycles per iteration and 116 in all; the
// stage split that reaches those numbers is this design's own.
// 'start' is accepted only when idle; the matched filter, diag(G) and the
// off-diagonals of G must be written before it, and the S-G rows are counted
// from the start cycle on (rows written before 'start' are not counted).
module controller
  import smd_pkg::*;
#(
  parameter int unsigned ITERS = 2   // iterations t (paper: t = 2)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             nr_done,
  input  logic             sg_row_we,   // a complete S-G row enters the memory
  output logic             nr_start,
  output logic [IDX_W-1:0] sg_raddr,
  output tag_t             tag,
  output logic             busy,
  output logic             done
);

  typedef enum logic [2:0] {
    S_IDLE, S_NR, S_ND, S_X0, S_WAIT_LOAD, S_ITER, S_DONE
  } state_t;

  localparam int unsigned ITER_CYC = 25;
  localparam int unsigned IT_W = (ITERS > 1) ? $clog2(ITERS) : 1;

  state_t           state;
  logic [4:0]       cnt;
  logic [IT_W-1:0]  iter;
  logic [IDX_W:0]   rows;       // S-G rows written since start
  logic             loaded;
  tag_t             iss;

  assign loaded = (rows == (IDX_W+1)'(U)) || (rows == (IDX_W+1)'(U - 1) && sg_row_we);

  // issue of the current cycle
  always_comb begin
    iss = '0;
    unique case (state)
      S_ND: begin
        if (cnt == 5'd0) iss = '{valid: 1'b1, op: OP_ND1, row: '0};
        if (cnt == 5'd3) iss = '{valid: 1'b1, op: OP_ND2, row: '0};
      end
      S_X0: begin
        if (cnt < 5'(U)) iss = '{valid: 1'b1, op: OP_X0, row: cnt[IDX_W-1:0]};
      end
      S_ITER: begin
        if (cnt < 5'(U))
          iss = '{valid: 1'b1, op: OP_SGX, row: cnt[IDX_W-1:0]};
        else if (cnt >= 5'd12 && cnt < 5'd12 + 5'(U))
          iss = '{valid: 1'b1, op: OP_SINVB, row: IDX_W'(cnt - 5'd12)};
      end
      default: ;
    endcase
  end

  assign sg_raddr = iss.row;
  assign nr_start = (state == S_IDLE) && start;
  assign busy     = (state != S_IDLE);
  assign done     = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      iter  <= '0;
      rows  <= '0;
      tag   <= '0;
    end else begin
      tag <= iss;
      if (sg_row_we && rows != (IDX_W+1)'(U)) rows <= rows + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_NR;
          rows  <= '0;
        end
        S_NR: if (nr_done) begin
          state <= S_ND;
          cnt   <= '0;
        end
        S_ND: begin
          cnt <= cnt + 5'd1;
          if (cnt == 5'd5) begin
            state <= S_X0;
            cnt   <= '0;
          end
        end
        S_X0: begin
          cnt <= cnt + 5'd1;
          if (cnt == 5'(U + 3)) begin
            state <= S_WAIT_LOAD;
            cnt   <= '0;
          end
        end
        S_WAIT_LOAD: if (loaded) begin
          state <= S_ITER;
          cnt   <= '0;
          iter  <= '0;
        end
        S_ITER: begin
          cnt <= cnt + 5'd1;
          if (cnt == 5'(ITER_CYC - 1)) begin
            cnt  <= '0;
            iter <= iter + 1'b1;
            if (iter == IT_W'(ITERS - 1)) state <= S_DONE;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // start must not arrive while a detection is running
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("start while busy");

endmodule
