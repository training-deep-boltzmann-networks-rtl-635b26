// tb_pcomputer_top: end-to-end test of the p-computer with 400 p-bits, driven
// only through its AXI4-Lite port, the way a host uses it:
//   1. with the p-bits frozen, write biases that clamp some p-bits to 1 and
//      others to 0, and strong couplings from clamped p-bits to two free ones;
//   2. run, request a snapshot, read the output memory and check the clamped
//      and coupled p-bits; check that a free p-bit takes both values;
//   3. freeze again: two snapshots must be identical and no sweep counted;
//   4. automatic snapshots every 5 sweeps;
//   5. beta = 0: clamping stops working (every p-bit is 1 half the time);
//   6. a flips/ns measurement over 2000 reference cycles (100 attempts per
//      color at DIV = 20).
// Each mechanism is counted; one that never happened counts as a failure.
module tb_pcomputer_top;
  import pbit_pkg::*;
  localparam int N = 400, DEG = 15, C = 4, DIV = 20, NW = (N + 31) / 32;
  localparam logic [19:0] CTRL = 20'h00000, STATUS = 20'h00004, BETA = 20'h00008,
                          AUTO = 20'h0000C, SWEEPS = 20'h00010, PRESET = 20'h00014,
                          SNAPS = 20'h0001C, FLIP0 = 20'h00040;
  localparam logic [19:0] WBASE = 20'h40000, HBASE = 20'h80000, OBASE = 20'hC0000;

  logic clk = 0, rst_n = 0;
  logic [C-1:0] color_clk;
  axil_bus #(.AW(20)) bus (.clk);
  int checks = 0, failures = 0;
  int n_writes = 0, n_snap_sw = 0, n_snap_auto = 0, n_freeze = 0, n_beta0 = 0, n_meas = 0,
      n_couple = 0;

  pcomputer_top #(.N(N), .DEG(DEG), .COLORS(C), .DIV(DIV)) dut (
    .clk, .rst_n,
    .s_awaddr(bus.awaddr), .s_awvalid(bus.awvalid), .s_awready(bus.awready),
    .s_wdata(bus.wdata), .s_wstrb(bus.wstrb), .s_wvalid(bus.wvalid), .s_wready(bus.wready),
    .s_bresp(bus.bresp), .s_bvalid(bus.bvalid), .s_bready(bus.bready),
    .s_araddr(bus.araddr), .s_arvalid(bus.arvalid), .s_arready(bus.arready),
    .s_rdata(bus.rdata), .s_rresp(bus.rresp), .s_rvalid(bus.rvalid), .s_rready(bus.rready),
    .color_clk);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(logic [19:0] a, logic [31:0] d);
    bus.write(a, d); n_writes++;
  endtask

  // request a snapshot, wait until it is saved, read it back
  task automatic snapshot(bit run, output logic [N-1:0] s);
    logic [31:0] d;
    logic [NW*32-1:0] all;
    wr(CTRL, {23'd0, 1'b1, 7'd0, run});
    do bus.read(STATUS, d); while (!d[0]);
    for (int w = 0; w < NW; w++) begin
      bus.read(OBASE + 20'(4 * w), d);
      all[32*w +: 32] = d;
    end
    s = all[N-1:0];
  endtask

  // clamp pattern: p-bit i (i mod 5 == 0) to 1, (i mod 5 == 1) to 0
  function automatic int clamp_of(int i);
    if (i % 5 == 0) return 1;
    if (i % 5 == 1) return 0;
    return -1;
  endfunction

  initial begin
    logic [N-1:0] s, s2;
    logic [31:0] d, sw0;
    int ones_free, ones_clamped, seen1, seen0;
    bus.init();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. program, frozen
    for (int i = 0; i < N; i++)
      if (clamp_of(i) >= 0) wr(HBASE + 20'(4 * i), clamp_of(i) ? 32'h1FF : 32'h200);
    // p-bit 4: slot 0 neighbour is p-bit 5 (clamped 1), J = +63.875 -> follows to 1
    // p-bit 9: slot 0 neighbour is p-bit 10 (clamped 1), J = -64 -> driven to 0
    wr(WBASE + 20'(4 * (4 * DEG + 0)), 32'h1FF);
    wr(WBASE + 20'(4 * (9 * DEG + 0)), 32'h200);
    // 2. run (two sweeps first, so p-bit 4 has seen its clamped neighbour) and sample
    wr(CTRL, 32'd1);
    repeat (2 * DIV) @(negedge clk);
    seen1 = 0; seen0 = 0;
    for (int k = 0; k < 8; k++) begin
      snapshot(1, s);
      n_snap_sw++;
      for (int i = 0; i < N; i++)
        if (clamp_of(i) >= 0) check($sformatf("clamped p-bit %0d", i), s[i] == clamp_of(i)[0]);
      check("coupled p-bit 4 follows +J", s[4] == 1'b1);
      check("coupled p-bit 9 follows -J", s[9] == 1'b0);
      n_couple++;
      seen1 += s[2]; seen0 += !s[2];
    end
    check("free p-bit 2 takes both values", seen1 > 0 && seen0 > 0);
    bus.read(SWEEPS, sw0);
    check("sweeps counted while running", sw0 > 0);
    // 3. freeze
    wr(CTRL, 32'd0);
    repeat (3 * DIV) @(negedge clk);
    bus.read(SWEEPS, sw0);
    snapshot(0, s);
    repeat (10 * DIV) @(negedge clk);
    snapshot(0, s2);
    bus.read(SWEEPS, d);
    check("frozen states do not change", s == s2);
    check("no sweeps while frozen", d == sw0);
    n_freeze++;
    // 4. automatic snapshots every 5 sweeps
    bus.read(SNAPS, sw0);
    wr(AUTO, 32'd5);
    wr(CTRL, 32'd3);
    repeat (50 * DIV) @(negedge clk);
    wr(CTRL, 32'd0);
    bus.read(SNAPS, d);
    check($sformatf("automatic snapshots: %0d in 50 sweeps", d - sw0), (d - sw0) >= 9 && (d - sw0) <= 11);
    if ((d - sw0) > 0) n_snap_auto++;
    // 5. beta = 0: every p-bit has probability 1/2
    wr(BETA, 32'd0);
    ones_free = 0; ones_clamped = 0;
    for (int k = 0; k < 30; k++) begin
      snapshot(1, s);
      for (int i = 0; i < N; i++) if (clamp_of(i) == 1) ones_clamped += s[i];
    end
    // (N+4)/5 clamped-to-1 p-bits x 30 snapshots (2,400 at N = 400), about half of them ones
    check($sformatf("beta=0 frees clamped p-bits (%0d ones of %0d)", ones_clamped, 30 * ((N + 4) / 5)),
          ones_clamped > 10 * ((N + 4) / 5) && ones_clamped < 20 * ((N + 4) / 5));
    n_beta0++;
    wr(BETA, 32'd8);
    // 6. flips/ns measurement
    wr(PRESET, 32'd2000);
    wr(CTRL, 32'h201);
    do bus.read(STATUS, d); while (!d[3]);
    for (int c = 0; c < C; c++) begin
      bus.read(FLIP0 + 20'(4 * c), d);
      check($sformatf("color %0d attempts %0d", c, d), d == 100);
    end
    n_meas++;
    wr(CTRL, 32'd0);

    check("weights and biases written", n_writes > 10);
    check("host snapshots", n_snap_sw > 0);
    check("automatic snapshots", n_snap_auto > 0);
    check("freeze", n_freeze > 0);
    check("beta switch", n_beta0 > 0);
    check("flip measurement", n_meas > 0);
    check("couplings", n_couple > 0);
    $display("mechanisms: writes=%0d host_snapshots=%0d auto=%0d freeze=%0d beta0=%0d meas=%0d",
             n_writes, n_snap_sw, n_snap_auto, n_freeze, n_beta0, n_meas);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
