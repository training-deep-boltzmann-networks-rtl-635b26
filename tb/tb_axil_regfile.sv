// tb_axil_regfile: drives the register slave through AXI4-Lite transactions
// and checks the control fields and pulses it produces, the weight and bias
// write ports (including out-of-range indices, which must be dropped), the
// status and counter read-back, the output-memory reads through a model
// memory with a registered read port, and the reset values.
module tb_axil_regfile;
  import pbit_pkg::*;
  localparam int N = 100, DEG = 15, C = 4, AW = 20;
  logic clk = 0, rst_n = 0;
  axil_bus #(.AW(AW)) bus (.clk);

  ctrl_t ctrl;
  logic snap_req, meas_start, cnt_clr, w_we, h_we;
  logic [$clog2(N*DEG)-1:0] w_addr;
  logic [$clog2(N)-1:0] h_addr;
  weight_t w_data, h_data;
  logic [1:0] ob_raddr;
  logic [31:0] ob_rdata;
  logic save_busy = 0, save_done = 0, meas_busy = 0, meas_done = 0;
  logic [31:0] sweep_count = 32'd1234, snap_count = 32'd77, ref_count = 32'd999;
  logic [31:0] flip_count [C];
  logic [31:0] obmem [4];
  int checks = 0, failures = 0;
  int n_snap = 0, n_meas = 0, n_clr = 0, n_w = 0, n_h = 0;
  logic [$clog2(N*DEG)-1:0] last_w_addr; weight_t last_w;
  logic [$clog2(N)-1:0] last_h_addr; weight_t last_h;

  axil_regfile #(.N(N), .DEG(DEG), .COLORS(C), .AW(AW)) dut (
    .clk, .rst_n,
    .s_awaddr(bus.awaddr), .s_awvalid(bus.awvalid), .s_awready(bus.awready),
    .s_wdata(bus.wdata), .s_wstrb(bus.wstrb), .s_wvalid(bus.wvalid), .s_wready(bus.wready),
    .s_bresp(bus.bresp), .s_bvalid(bus.bvalid), .s_bready(bus.bready),
    .s_araddr(bus.araddr), .s_arvalid(bus.arvalid), .s_arready(bus.arready),
    .s_rdata(bus.rdata), .s_rresp(bus.rresp), .s_rvalid(bus.rvalid), .s_rready(bus.rready),
    .ctrl, .snap_req, .meas_start, .cnt_clr, .w_we, .w_addr, .w_data, .h_we, .h_addr, .h_data,
    .ob_raddr, .ob_rdata, .save_busy, .save_done, .sweep_count, .snap_count,
    .meas_busy, .meas_done, .flip_count, .ref_count);

  always #5 clk = ~clk;

  // output-memory model with a registered read port
  always_ff @(posedge clk) ob_rdata <= obmem[ob_raddr];

  always @(posedge clk) if (rst_n) begin
    n_snap += snap_req; n_meas += meas_start; n_clr += cnt_clr;
    if (w_we) begin n_w++; last_w_addr = w_addr; last_w = w_data; end
    if (h_we) begin n_h++; last_h_addr = h_addr; last_h = h_data; end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d;
    for (int c = 0; c < C; c++) flip_count[c] = 32'(100 + c);
    for (int w = 0; w < 4; w++) obmem[w] = $urandom;
    bus.init();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset values
    expect_eq("run", ctrl.run, 0);
    expect_eq("beta", ctrl.beta, 8);
    bus.read(20'h00008, d); expect_eq("BETA reg", d, 8);
    bus.read(20'h0000C, d); expect_eq("AUTO_SWEEPS reg", d, 1);
    // control
    bus.write(20'h00000, 32'h0000_0003);
    expect_eq("run", ctrl.run, 1);
    expect_eq("auto", ctrl.auto_snap, 1);
    bus.write(20'h00008, 32'd40);  expect_eq("beta", ctrl.beta, 40);
    bus.write(20'h0000C, 32'd17);  expect_eq("auto_sweeps", ctrl.auto_sweeps, 17);
    bus.write(20'h00014, 32'd5000); expect_eq("preset", ctrl.ref_preset, 5000);
    bus.write(20'h00000, 32'h0000_0701);
    expect_eq("snap pulses", n_snap, 1);
    expect_eq("meas pulses", n_meas, 1);
    expect_eq("clr pulses", n_clr, 1);
    expect_eq("auto off", ctrl.auto_snap, 0);
    bus.read(20'h00000, d); expect_eq("CTRL", d, 1);
    // weights and biases
    for (int n = 0; n < 50; n++) begin
      int idx = $urandom_range(N*DEG - 1);
      int v = $urandom_range(1023);
      bus.write(20'h40000 + 20'(4 * idx), 32'(v));
      expect_eq("w_addr", last_w_addr, idx);
      expect_eq("w_data", last_w, weight_t'(v));
    end
    expect_eq("weight writes", n_w, 50);
    bus.write(20'h40000 + 20'(4 * N * DEG), 32'd5);
    expect_eq("weight write beyond depth", n_w, 50);
    for (int n = 0; n < 20; n++) begin
      int idx = $urandom_range(N - 1);
      int v = $urandom_range(1023);
      bus.write(20'h80000 + 20'(4 * idx), 32'(v));
      expect_eq("h_addr", last_h_addr, idx);
      expect_eq("h_data", last_h, weight_t'(v));
    end
    expect_eq("bias writes", n_h, 20);
    // status and counters
    save_busy = 1; meas_done = 1;
    bus.read(20'h00004, d); expect_eq("STATUS", d, 32'b1010);
    save_busy = 0; meas_done = 0;
    @(negedge clk); save_done = 1; @(negedge clk); save_done = 0;
    bus.read(20'h00004, d); expect_eq("STATUS snap_valid", d, 1);
    bus.read(20'h00010, d); expect_eq("SWEEPS", d, 1234);
    bus.read(20'h00018, d); expect_eq("REF_COUNT", d, 999);
    bus.read(20'h0001C, d); expect_eq("SNAPS", d, 77);
    bus.read(20'h00020, d); expect_eq("INFO", d, {4'd0, 4'd4, 8'd15, 16'd100});
    for (int c = 0; c < C; c++) begin
      bus.read(20'h00040 + 20'(4 * c), d); expect_eq("FLIP_CNT", d, 100 + c);
    end
    for (int w = 0; w < 4; w++) begin
      bus.read(20'hC0000 + 20'(4 * w), d); expect_eq("output word", d, obmem[w]);
    end
    bus.read(20'h40000, d); expect_eq("weight read", d, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
