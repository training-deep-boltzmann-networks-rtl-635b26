// tb_snapshot_ctrl: sweep strobes every 20 cycles. A host request must give a
// one-cycle snapshot in the cycle after the next sweep strobe; with auto mode
// and auto_sweeps = 3 a snapshot must follow every third sweep; while the
// output memory is busy no snapshot may be issued (the request waits); the
// sweep counter counts only while running and clears on clr.
module tb_snapshot_ctrl;
  logic clk = 0, rst_n = 0, run = 0, sweep_done = 0, sw_req = 0, auto_en = 0;
  logic [31:0] auto_sweeps = 3;
  logic save_busy = 0, clr = 0, snapshot;
  logic [31:0] sweep_count, snap_count;
  int checks = 0, failures = 0;
  int t = 0, last_sweep = -100, snaps = 0, exp_sweeps = 0;

  snapshot_ctrl dut (.clk, .rst_n, .run, .sweep_done, .sw_req, .auto_en, .auto_sweeps,
                     .save_busy, .clr, .snapshot, .sweep_count, .snap_count);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sweep strobe generator and snapshot timing monitor
  always @(negedge clk) if (rst_n) begin
    t++;
    if (snapshot) begin
      snaps++;
      checks++;
      if (t - last_sweep != 1) begin failures++; $display("snapshot %0d cycles after sweep", t - last_sweep); end
      checks++;
      if (save_busy) failures++;
    end
    sweep_done = (t % 20 == 0);
    if (sweep_done) begin
      last_sweep = t;
      if (run) exp_sweeps++;
    end
  end

  initial begin
    int s0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // frozen: no sweeps counted
    repeat (100) @(negedge clk);
    checks++; if (sweep_count != 0) failures++;
    run = 1;
    // host request
    repeat (7) @(negedge clk);
    s0 = snaps;
    sw_req = 1; @(negedge clk); sw_req = 0;
    repeat (40) @(negedge clk);
    checks++; if (snaps != s0 + 1) begin failures++; $display("request gave %0d snapshots", snaps - s0); end
    // request while busy: must wait until busy falls
    save_busy = 1; s0 = snaps;
    sw_req = 1; @(negedge clk); sw_req = 0;
    repeat (60) @(negedge clk);
    checks++; if (snaps != s0) failures++;
    save_busy = 0;
    repeat (30) @(negedge clk);
    checks++; if (snaps != s0 + 1) failures++;
    // automatic mode, every 3 sweeps
    while (t % 20 != 5) @(negedge clk);
    auto_en = 1; s0 = snaps;
    repeat (20 * 30) @(negedge clk);
    auto_en = 0;
    checks++;
    if (snaps - s0 < 9 || snaps - s0 > 11) begin failures++; $display("auto gave %0d snapshots in 30 sweeps", snaps - s0); end
    checks++; if (snap_count != 32'(snaps)) failures++;
    checks++; if (sweep_count != 32'(exp_sweeps)) begin failures++; $display("sweeps %0d expected %0d", sweep_count, exp_sweeps); end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    checks++; if (sweep_count != 0 || snap_count != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
