// tb_controller: drives the controller with the divider's done pulse and
// the S-G row writes of a simulated host and records every issue. Checks:
// the divider is started with 'start'; one OP_ND1 right after the divider
// finishes and one OP_ND2 three cycles later; eight OP_X0 rows 0..7 in
// consecutive cycles; the stall until the last S-G row; then, per iteration
// of 25 cycles, OP_SGX rows 0..7 in cycles 0-7 and OP_SINVB rows 0..7 in
// cycles 12-19; 'done' in the 116th cycle when the rows arrive at the
// host's full rate, and later by exactly the delay of the last row otherwise;
// the issued tag is the issue of the previous cycle and sg_raddr its row.
// A second run uses ITERS = 3 through a second instance.
module tb_controller;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, nr_done = 0, sg_row_we = 0;
  logic nr_start, busy, done, nr_start3, busy3, done3;
  logic [IDX_W-1:0] sg_raddr, sg_raddr3;
  tag_t tag, tag3;
  controller dut (.*);
  controller #(.ITERS(3)) dut3 (.clk, .rst_n, .start, .nr_done, .sg_row_we, .nr_start(nr_start3),
                                .sg_raddr(sg_raddr3), .tag(tag3), .busy(busy3), .done(done3));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("cycle %0d: %s", cyc, what); end
  endtask

  // one detection; rows arrive at cycles 8r+8 (+ extra delay for the last one)
  task automatic run(int nr_cycles, int last_row_delay, int iters);
    tag_t seen [$];
    int t0, tdone, k, it_start, n;
    t0 = cyc;
    @(negedge clk);
    start = 1;
    t0 = cyc;
    tdone = -1;
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      start = 0;
      // inputs for the coming edge
      nr_done = (cyc - t0 == nr_cycles);
      sg_row_we = 0;
      for (int r = 0; r < U; r++)
        if (cyc - t0 == 8 * r + 8 + ((r == U - 1) ? last_row_delay : 0)) sg_row_we = 1;
      @(posedge clk);
      seen.push_back((iters == 2) ? tag : tag3);
      if (((iters == 2) ? done : done3)) begin tdone = cyc - t0; break; end
    end
    @(negedge clk);
    nr_done = 0; sg_row_we = 0;
    while (busy || busy3) @(negedge clk);
    // decode the recorded tags (seen[i] is the tag during cycle t0 + i + 1)
    k = 0;
    while (k < seen.size() && !seen[k].valid) k++;
    check(k == nr_cycles + 1, $sformatf("first issue (ND1) in cycle %0d", k));
    check(seen[k].op == OP_ND1, "ND1 expected");
    check(seen[k + 3].valid && seen[k + 3].op == OP_ND2, "ND2 expected 3 cycles after ND1");
    for (int r = 0; r < U; r++)
      check(seen[k + 6 + r].valid && seen[k + 6 + r].op == OP_X0 && seen[k + 6 + r].row == IDX_W'(r), "X0 row");
    it_start = k + 6 + U;
    while (it_start < seen.size() && !seen[it_start].valid) it_start++;
    check(it_start >= 8 * (U - 1) + 8 + last_row_delay + 1, "iterations before the load finished");
    for (int it = 0; it < iters; it++)
      for (int c = 0; c < 25; c++) begin
        n = it_start + 25 * it + c;
        if (c < U) check(seen[n].valid && seen[n].op == OP_SGX && seen[n].row == IDX_W'(c), "SGX row");
        else if (c >= 12 && c < 12 + U)
          check(seen[n].valid && seen[n].op == OP_SINVB && seen[n].row == IDX_W'(c - 12), "SINVB row");
        else check(!seen[n].valid, "idle slot in iteration");
      end
    if (iters == 2 && last_row_delay == 0 && nr_cycles == 41)
      check(tdone + 1 == 116, $sformatf("done in cycle %0d of the detection, expected 116", tdone + 1));
    else if (nr_cycles == 41)
      check(tdone + 1 == 116 + last_row_delay + 25 * (iters - 2),
            $sformatf("done in cycle %0d", tdone + 1));
  endtask

  // sg_raddr is the row of the issue that the tag shows one cycle later
  logic [IDX_W-1:0] raddr_q;
  logic was_valid;
  always @(posedge clk) begin
    if (rst_n && was_valid) check(tag.row == raddr_q, "tag row differs from read address");
    raddr_q <= sg_raddr;
    was_valid <= 1'b1;
  end
  always @(posedge clk) if (rst_n && start) check(nr_start && nr_start3, "divider not started");

  initial begin
    was_valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(41, 0, 2);
    run(41, 5, 2);
    run(70, 0, 2);
    run(41, 0, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
