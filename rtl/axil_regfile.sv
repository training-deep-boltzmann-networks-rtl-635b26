// axil_regfile: the memory-mapped interfacing unit. A 32-bit AXI4-Lite slave
// through which the host writes the weights and biases, controls the
// p-computer and reads the saved p-bit states.
//
// Address map (byte addresses, AW = 20 bits, bits [19:18] select a region):
//   region 0  control and status registers, word index addr[7:2]
//     0x00 CTRL         [0] run (1 enables, 0 freezes all p-bits)
//                       [1] auto_snap (snapshot every AUTO_SWEEPS sweeps)
//                       [8] write 1: request one snapshot
//                       [9] write 1: start a flips/ns measurement
//                       [10] write 1: clear the sweep and snapshot counters
//     0x04 STATUS (ro)  [0] snapshot saved and not yet re-requested
//                       [1] save in progress  [2] measurement running
//                       [3] measurement done
//     0x08 BETA         [5:0] inverse temperature u{3}{3}; reset 8 (beta = 1)
//     0x0C AUTO_SWEEPS  sweeps between automatic snapshots; reset 1
//     0x10 SWEEPS (ro)  sweeps completed while running
//     0x14 REF_PRESET   reference count of the flips/ns measurement
//     0x18 REF_COUNT (ro)
//     0x1C SNAPS (ro)   snapshots taken
//     0x20 INFO (ro)    [15:0] N, [23:16] neighbour slots, [27:24] colors
//     0x40 + 4c (ro)    flip-attempt count of color c
//   region 1  weights: word index addr[17:2] = i*DEG + k, data [9:0] (wo)
//   region 2  biases:  word index addr[17:2] = i,         data [9:0] (wo)
//   region 3  output memory: word index addr[17:2] (ro), 32 p-bits per word
// Reads of write-only locations return 0; writes to read-only ones are ignored.
//
// Handshakes: a write is taken when AWVALID and WVALID are both high and no
// response is pending (AWREADY = WREADY = 1 in that cycle); BVALID follows on
// the next cycle. A read is taken when ARVALID is high and no read is in
// flight; RVALID follows two cycles later (the output memory has a
// registered read port). Responses are always OKAY; WSTRB is ignored, every
// write is a full word.
//
// A 32-bit memory-mapped register slave on AXI4 that maps the weight, bias and
// output memories follows the sampler. The AXI4-Lite subset, the address map
// and the register layout are this design's own.
module axil_regfile
  import pbit_pkg::*;
#(
  parameter int unsigned N      = N_PBITS,
  parameter int unsigned DEG    = MAX_DEG,
  parameter int unsigned COLORS = NCOLORS,
  parameter int unsigned AW     = AXI_ADDR_W
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite slave
  input  logic [AW-1:0] s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
  input  logic [3:0]    s_wstrb,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic [AW-1:0] s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  // to the core
  output ctrl_t                           ctrl,
  output logic                            snap_req,
  output logic                            meas_start,
  output logic                            cnt_clr,
  output logic                            w_we,
  output logic [$clog2(N*DEG)-1:0]        w_addr,
  output weight_t                         w_data,
  output logic                            h_we,
  output logic [$clog2(N)-1:0]            h_addr,
  output weight_t                         h_data,
  output logic [$clog2((N+31)/32)-1:0]    ob_raddr,
  // from the core
  input  logic [31:0]                     ob_rdata,
  input  logic                            save_busy,
  input  logic                            save_done,
  input  logic [31:0]                     sweep_count,
  input  logic [31:0]                     snap_count,
  input  logic                            meas_busy,
  input  logic                            meas_done,
  input  logic [31:0]                     flip_count [COLORS],
  input  logic [31:0]                     ref_count
);
  localparam int unsigned NW  = (N + 31) / 32;
  localparam int unsigned WAW = $clog2(N*DEG);
  localparam int unsigned HAW = $clog2(N);
  localparam int unsigned OAW = $clog2(NW);

  initial assert (AW >= 18 + 2 && N*DEG <= (1 << 16))
    else $error("axil_regfile: address map too small for N*DEG weights");

  // ------------------------------- writes --------------------------------
  logic          wr_take;
  logic [1:0]    wr_region;
  logic [15:0]   wr_index;
  logic          snap_valid;

  assign wr_take   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_take;
  assign s_wready  = wr_take;
  assign s_bresp   = 2'b00;
  assign wr_region = s_awaddr[19:18];
  assign wr_index  = s_awaddr[17:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid         <= 1'b0;
      ctrl.run         <= 1'b0;
      ctrl.auto_snap   <= 1'b0;
      ctrl.beta        <= BETA_WIDTH'(1 << BETA_FRAC);
      ctrl.auto_sweeps <= 32'd1;
      ctrl.ref_preset  <= 32'd0;
      snap_req         <= 1'b0;
      meas_start       <= 1'b0;
      cnt_clr          <= 1'b0;
      w_we             <= 1'b0;
      h_we             <= 1'b0;
      w_addr           <= '0;
      h_addr           <= '0;
      w_data           <= '0;
      h_data           <= '0;
      snap_valid       <= 1'b0;
    end else begin
      snap_req   <= 1'b0;
      meas_start <= 1'b0;
      cnt_clr    <= 1'b0;
      w_we       <= 1'b0;
      h_we       <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (save_done) snap_valid <= 1'b1;
      if (wr_take) begin
        s_bvalid <= 1'b1;
        unique case (wr_region)
          2'd0: begin
            unique case (s_awaddr[7:2])
              6'h00: begin
                ctrl.run       <= s_wdata[0];
                ctrl.auto_snap <= s_wdata[1];
                snap_req       <= s_wdata[8];
                meas_start     <= s_wdata[9];
                cnt_clr        <= s_wdata[10];
                if (s_wdata[8]) snap_valid <= 1'b0;
              end
              6'h02: ctrl.beta        <= s_wdata[BETA_WIDTH-1:0];
              6'h03: ctrl.auto_sweeps <= s_wdata;
              6'h05: ctrl.ref_preset  <= s_wdata;
              default: ;
            endcase
          end
          2'd1: if (32'(wr_index) < N*DEG) begin
            w_we   <= 1'b1;
            w_addr <= WAW'(wr_index);
            w_data <= s_wdata[W_WIDTH-1:0];
          end
          2'd2: if (32'(wr_index) < N) begin
            h_we   <= 1'b1;
            h_addr <= HAW'(wr_index);
            h_data <= s_wdata[W_WIDTH-1:0];
          end
          default: ;
        endcase
      end
    end
  end

  // -------------------------------- reads --------------------------------
  logic [AW-1:0] rd_addr;
  logic [1:0]    rd_stage;   // 0 idle, 1..2 waiting for the output memory
  logic [31:0]   reg_rdata;

  assign s_arready = (rd_stage == 2'd0) && !s_rvalid;
  assign s_rresp   = 2'b00;
  assign ob_raddr  = OAW'(rd_addr[17:2]);

  always_comb begin
    reg_rdata = 32'd0;
    unique case (rd_addr[7:2])
      6'h00: reg_rdata = {30'd0, ctrl.auto_snap, ctrl.run};
      6'h01: reg_rdata = {28'd0, meas_done, meas_busy, save_busy, snap_valid};
      6'h02: reg_rdata = 32'(ctrl.beta);
      6'h03: reg_rdata = ctrl.auto_sweeps;
      6'h04: reg_rdata = sweep_count;
      6'h05: reg_rdata = ctrl.ref_preset;
      6'h06: reg_rdata = ref_count;
      6'h07: reg_rdata = snap_count;
      6'h08: reg_rdata = {4'd0, 4'(COLORS), 8'(DEG), 16'(N)};
      default:
        for (int c = 0; c < COLORS; c++)
          if (rd_addr[7:2] == 6'(16 + c)) reg_rdata = flip_count[c];
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_addr  <= '0;
      rd_stage <= 2'd0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      unique case (rd_stage)
        2'd0: if (s_arvalid && s_arready) begin
          rd_addr  <= s_araddr;
          rd_stage <= 2'd1;
        end
        2'd1: rd_stage <= 2'd2;
        default: begin
          rd_stage <= 2'd0;
          s_rvalid <= 1'b1;
          unique case (rd_addr[19:18])
            2'd0:    s_rdata <= reg_rdata;
            2'd3:    s_rdata <= (32'(rd_addr[17:2]) < NW) ? ob_rdata : 32'd0;
            default: s_rdata <= 32'd0;
          endcase
        end
      endcase
    end
  end

  // ------------------------- protocol assertions -------------------------
  a_aw_stable : assert property (@(posedge clk) disable iff (!rst_n)
    s_awvalid && !s_awready |=> s_awvalid && $stable(s_awaddr))
    else $error("AXI: AWVALID dropped or AWADDR changed before AWREADY");
  a_w_stable  : assert property (@(posedge clk) disable iff (!rst_n)
    s_wvalid && !s_wready |=> s_wvalid && $stable(s_wdata))
    else $error("AXI: WVALID dropped or WDATA changed before WREADY");
  a_ar_stable : assert property (@(posedge clk) disable iff (!rst_n)
    s_arvalid && !s_arready |=> s_arvalid && $stable(s_araddr))
    else $error("AXI: ARVALID dropped or ARADDR changed before ARREADY");
  a_r_stable  : assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
  a_b_stable  : assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);

  logic unused_ok;
  assign unused_ok = ^{s_wstrb, rd_addr[1:0]};
endmodule
