// pcomputer_top: the FPGA probabilistic computer (p-computer), a sparse Ising
// machine that produces Gibbs samples of a sparse deep Boltzmann machine for a
// host that trains it.
//
// Blocks and data flow:
//   host --AXI4-Lite--> axil_regfile --> weight_mem (J), bias_mem (h), control
//   clock_phase_gen --phase_en[c]--> pbit_network (N p-bits, MAC per p-bit)
//   pbit_network --m--> mirror_reg --> out_bram --AXI4-Lite--> host
//   snapshot_ctrl drives the snapshot signal; flip_meter measures flips/ns.
//
// Operation: with run = 0 (all p-bits frozen) the host writes the binary-form
// weights and biases; it sets run = 1, the color blocks update in turn on the
// phase-shifted strobes (one full sweep per DIV system cycles, i.e. N flips
// per 15 MHz period at the defaults: 4,264 * 15 MHz = 64 flips/ns), and a
// snapshot copies the states into the mirror register at a sweep boundary;
// the falling snapshot signal saves them once into the output memory, which
// the host reads 32 p-bits per word. Clamping of visible or label p-bits is
// done by the host through large biases, as in the training algorithm.
//
// Everything runs on the single system clock `clk` (300 MHz in the sampler);
// the color clocks are clock enables, and the phase-shifted square waves are
// brought out on `color_clk` for observation. The sampler's vendor clock
// manager, differential clock input and PCIe/AXI manager are outside this
// module: the AXI4-Lite slave port is where the host's AXI manager connects.
module pcomputer_top
  import pbit_pkg::*;
#(
  parameter int unsigned N      = N_PBITS,
  parameter int unsigned DEG    = MAX_DEG,
  parameter int unsigned COLORS = NCOLORS,
  parameter int unsigned DIV    = CLK_DIV
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [AXI_ADDR_W-1:0] s_awaddr,
  input  logic                  s_awvalid,
  output logic                  s_awready,
  input  logic [31:0]           s_wdata,
  input  logic [3:0]            s_wstrb,
  input  logic                  s_wvalid,
  output logic                  s_wready,
  output logic [1:0]            s_bresp,
  output logic                  s_bvalid,
  input  logic                  s_bready,
  input  logic [AXI_ADDR_W-1:0] s_araddr,
  input  logic                  s_arvalid,
  output logic                  s_arready,
  output logic [31:0]           s_rdata,
  output logic [1:0]            s_rresp,
  output logic                  s_rvalid,
  input  logic                  s_rready,
  output logic [COLORS-1:0]     color_clk
);
  localparam int unsigned NW = (N + 31) / 32;

  ctrl_t                         ctrl;
  logic                          snap_req, meas_start, cnt_clr;
  logic                          w_we, h_we;
  logic [$clog2(N*DEG)-1:0]      w_addr;
  logic [$clog2(N)-1:0]          h_addr;
  weight_t                       w_data, h_data;
  logic [$clog2(NW)-1:0]         ob_raddr;
  logic [31:0]                   ob_rdata;
  logic                          save_busy, save_done;
  logic [31:0]                   sweep_count, snap_count, ref_count;
  logic                          meas_busy, meas_done;
  logic [31:0]                   flip_count [COLORS];
  logic [COLORS-1:0]             phase_en;
  logic                          sweep_done;
  weight_t                       j_q [N*DEG];
  weight_t                       h_q [N];
  logic [N-1:0]                  m, mirror;
  logic                          snapshot;

  axil_regfile #(.N(N), .DEG(DEG), .COLORS(COLORS), .AW(AXI_ADDR_W)) u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .ctrl, .snap_req, .meas_start, .cnt_clr,
    .w_we, .w_addr, .w_data, .h_we, .h_addr, .h_data, .ob_raddr,
    .ob_rdata, .save_busy, .save_done, .sweep_count, .snap_count,
    .meas_busy, .meas_done, .flip_count, .ref_count
  );

  weight_mem #(.DEPTH(N*DEG)) u_weights (
    .clk, .rst_n, .we(w_we), .waddr(w_addr), .wdata(w_data), .q(j_q)
  );

  bias_mem #(.DEPTH(N)) u_biases (
    .clk, .rst_n, .we(h_we), .waddr(h_addr), .wdata(h_data), .q(h_q)
  );

  clock_phase_gen #(.DIV(DIV), .COLORS(COLORS)) u_clocks (
    .clk, .rst_n, .phase_en, .color_clk, .sweep_done
  );

  pbit_network #(.N(N), .DEG(DEG), .COLORS(COLORS)) u_network (
    .clk, .rst_n, .run(ctrl.run), .phase_en, .beta(ctrl.beta),
    .j_w(j_q), .h(h_q), .m
  );

  snapshot_ctrl u_snapctl (
    .clk, .rst_n, .run(ctrl.run), .sweep_done, .sw_req(snap_req),
    .auto_en(ctrl.auto_snap), .auto_sweeps(ctrl.auto_sweeps),
    .save_busy, .clr(cnt_clr), .snapshot, .sweep_count, .snap_count
  );

  mirror_reg #(.N(N)) u_mirror (
    .clk, .rst_n, .snapshot, .m, .q(mirror)
  );

  out_bram #(.N(N)) u_outmem (
    .clk, .rst_n, .snapshot, .mirror, .raddr(ob_raddr), .rdata(ob_rdata),
    .busy(save_busy), .done(save_done)
  );

  flip_meter #(.COLORS(COLORS)) u_meter (
    .clk, .rst_n, .start(meas_start), .preset(ctrl.ref_preset), .run(ctrl.run),
    .phase_en, .count(flip_count), .ref_count, .busy(meas_busy), .done(meas_done)
  );
endmodule
