// snapshot_ctrl: the controller that generates the snapshot signal of the
// readout path.
//
// It counts completed sweeps while the p-bits run (`sweep_done` strobes with
// run = 1) and issues a snapshot in two ways:
//   * on request: a `sw_req` pulse from the host is held pending and served at
//     the next sweep boundary;
//   * automatically: with `auto_en` set, after every `auto_sweeps` sweeps
//     (auto_sweeps = 0 is treated as 1).
// The snapshot signal is 1 for exactly one cycle, the cycle after the last
// color has updated, so the mirror register copies a complete sweep. It is
// never raised while the output memory is still saving (`save_busy`); a
// request then waits. `sweep_count` counts all sweeps since reset or `clr`;
// `snap_count` counts snapshots issued.
//
// That a controller generates the snapshot signal follows the sampler; the
// two trigger modes, the alignment to sweep boundaries and the counters are
// this design's choices.
module snapshot_ctrl (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic        sweep_done,
  input  logic        sw_req,
  input  logic        auto_en,
  input  logic [31:0] auto_sweeps,
  input  logic        save_busy,
  input  logic        clr,
  output logic        snapshot,
  output logic [31:0] sweep_count,
  output logic [31:0] snap_count
);
  logic        pending;
  logic [31:0] since_snap;
  logic        auto_hit;
  logic        fire;
  logic [31:0] target;

  always_comb begin
    target   = (auto_sweeps == 32'd0) ? 32'd1 : auto_sweeps;
    auto_hit = auto_en && run && sweep_done && (since_snap + 32'd1 >= target);
    fire     = sweep_done && !save_busy && !snapshot && (pending || auto_hit);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending     <= 1'b0;
      since_snap  <= '0;
      sweep_count <= '0;
      snap_count  <= '0;
      snapshot    <= 1'b0;
    end else begin
      snapshot <= fire;
      if (clr) begin
        sweep_count <= '0;
        since_snap  <= '0;
        snap_count  <= '0;
        pending     <= sw_req;
      end else begin
        if (run && sweep_done) sweep_count <= sweep_count + 32'd1;
        if (fire) begin
          since_snap <= '0;
          snap_count <= snap_count + 32'd1;
        end else if (run && sweep_done) begin
          since_snap <= since_snap + 32'd1;
        end
        if (sw_req)    pending <= 1'b1;
        else if (fire) pending <= 1'b0;
      end
    end
  end

  a_snapshot_one_cycle : assert property (@(posedge clk) disable iff (!rst_n)
    snapshot |=> !snapshot);
endmodule
