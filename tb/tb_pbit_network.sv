// tb_pbit_network: runs a 40-p-bit network with random weights and biases and
// predicts every p-bit update with a reference Gibbs sampler that has its own
// copy of the topology (offsets +-1,2,3,5,6,7,9 modulo N, color = i mod 4) and
// its own generator and activation models. The color strobes are driven one
// at a time in random order, and with gaps; run = 0 must freeze all states.
// The testbench also checks that the reference topology is properly colored.
module tb_pbit_network;
  import tb_ref_pkg::*;
  import pbit_pkg::weight_t;
  localparam int N = 40, DEG = 15, C = 4;
  localparam int OFFS [7] = '{1, 2, 3, 5, 6, 7, 9};

  logic clk = 0, rst_n = 0, run = 0;
  logic [C-1:0] phase_en = '0;
  logic [5:0] beta = 8;
  weight_t j_w [N*DEG];
  weight_t h [N];
  logic [N-1:0] m;
  int checks = 0, failures = 0;

  xo_state_t st [N];
  logic [N-1:0] ref_m;

  pbit_network #(.N(N), .DEG(DEG), .COLORS(C)) dut (
    .clk, .rst_n, .run, .phase_en, .beta, .j_w, .h, .m);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nbr(int i, int k);
    if (k >= 14) return -1;
    return (k % 2 == 0) ? (i + OFFS[k/2]) % N : (i - OFFS[k/2] + N) % N;
  endfunction

  // update all p-bits of color c in the reference model
  task automatic ref_update(int c);
    logic [N-1:0] old = ref_m;
    for (int i = c; i < N; i += C) begin
      longint f = longint'(h[i]);
      for (int k = 0; k < DEG; k++) begin
        int nb = nbr(i, k);
        if (nb >= 0 && old[nb]) f += longint'(j_w[i*DEG + k]);
      end
      ref_m[i] = (longint'(xo_out(st[i])) < act_ref(scale_ref(f, int'(beta))));
      st[i] = xo_step(st[i]);
    end
  endtask

  initial begin
    int ones;
    for (int a = 0; a < N*DEG; a++) j_w[a] = weight_t'($urandom_range(160) - 80);
    for (int i = 0; i < N; i++) h[i] = weight_t'($urandom_range(40) - 20);
    for (int i = 0; i < N; i++) st[i] = xo_seed(seed_ref(i));
    ref_m = '0;
    // coloring of the reference topology
    for (int i = 0; i < N; i++)
      for (int k = 0; k < 14; k++) begin
        checks++;
        if (nbr(i, k) % C == i % C) failures++;
      end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run = 1;
    for (int n = 0; n < 3000; n++) begin
      int c = $urandom_range(C - 1);
      @(negedge clk);
      if (n == 1000) run = 0;
      if (n == 1300) run = 1;
      if (n % 500 == 0) beta = 6'($urandom_range(1, 40));
      phase_en = '0;
      if ($urandom_range(3) != 0) phase_en[c] = 1'b1;
      if (run && phase_en != 0) ref_update(c);
      @(negedge clk);
      phase_en = '0;
      checks++;
      if (m !== ref_m) begin
        failures++;
        if (failures < 5) $display("n=%0d m=%h expected %h", n, m, ref_m);
      end
    end
    // all-zero weights and biases at beta = 1: each p-bit is 1 half the time
    for (int a = 0; a < N*DEG; a++) j_w[a] = '0;
    for (int i = 0; i < N; i++) h[i] = '0;
    ones = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk); beta = 8; phase_en = '1;
      @(negedge clk); phase_en = '0; ones += $countones(m);
    end
    checks++;
    if (ones < 9400 || ones > 10600) begin failures++; $display("ones %0d of 20000", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
