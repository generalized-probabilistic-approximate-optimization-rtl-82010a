// tb_spin_lattice: one 4x4x4 replica.
// (1) beta = 0: p-bits must be 1 half of the time.
// (2) no couplings, h = 1, beta = 1: P(m=1) must be (1 + tanh 1) / 2.
// (3) beta near its maximum with random couplings of whole units and odd
//     half-unit biases, so |beta*I| >= 8 and every update is a deterministic
//     m_i = [I_i > 0]. Each cycle the testbench computes I_i from its own
//     model of the periodic lattice and the previous states, and checks the
//     enabled colour against it and the other colour for being unchanged.
module tb_spin_lattice;
  import paoa_pkg::*;
  localparam int L = 4, N = 64;
  logic clk = 0, rst_n = 0;
  logic [1:0] colour_en;
  fx_t beta;
  fx_t [N-1:0][BONDS-1:0] j_bond;
  fx_t [N-1:0] h;
  logic [N-1:0] m, m_pre, m_exp;
  int checks = 0, failures = 0;

  spin_lattice #(.L(L), .REPLICA_ID(3)) dut (.clk, .rst_n, .colour_en, .beta, .j_bond, .h, .m);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int idx(input int x, input int y, input int z);
    return ((x + L) % L) + L * ((y + L) % L) + L * L * ((z + L) % L);
  endfunction

  function automatic int local_field(input int n, input logic [N-1:0] s);
    int x, y, z, f;
    x = n % L; y = (n / L) % L; z = n / (L * L);
    f = int'(h[n]);
    if (s[idx(x + 1, y, z)]) f += int'(j_bond[n][0]);
    if (s[idx(x - 1, y, z)]) f += int'(j_bond[idx(x - 1, y, z)][0]);
    if (s[idx(x, y + 1, z)]) f += int'(j_bond[n][1]);
    if (s[idx(x, y - 1, z)]) f += int'(j_bond[idx(x, y - 1, z)][1]);
    if (s[idx(x, y, z + 1)]) f += int'(j_bond[n][2]);
    if (s[idx(x, y, z - 1)]) f += int'(j_bond[idx(x, y, z - 1)][2]);
    return f;
  endfunction

  function automatic int colour_of(input int n);
    return ((n % L) + ((n / L) % L) + (n / (L * L))) % 2;
  endfunction

  task automatic measure_fraction(input int cycles, input real p, input string what);
    int ones;
    real f, sd;
    ones = 0;
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      colour_en = (c % 2 == 0) ? 2'b01 : 2'b10;
      @(posedge clk); #1;
      ones += $countones(m);
    end
    f  = real'(ones) / real'(cycles * N);
    // successive samples are correlated; allow a generous bound
    sd = $sqrt(p * (1.0 - p) / real'(cycles * N / 2));
    chk((f - p) < 6.0 * sd && (p - f) < 6.0 * sd, $sformatf("%s: fraction %f, expected %f", what, f, p));
  endtask

  initial begin
    int mism, upd;
    colour_en = 0; beta = 0; j_bond = '0; h = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // (1) beta = 0 with strong couplings: still a fair coin
    for (int n = 0; n < N; n++) for (int d = 0; d < 3; d++) j_bond[n][d] = fx_t'(64);
    measure_fraction(400, 0.5, "beta = 0");
    // (2) beta = 1, h = 1, no couplings
    j_bond = '0;
    for (int n = 0; n < N; n++) h[n] = fx_t'(32);
    beta = fx_t'(32);
    measure_fraction(400, (1.0 + $tanh(1.0)) / 2.0, "beta = 1, h = 1");
    // (3) deterministic regime
    beta = fx_t'(511);
    for (int n = 0; n < N; n++) begin
      for (int d = 0; d < 3; d++) j_bond[n][d] = fx_t'(32 * ($urandom_range(0, 4) - 2));
      h[n] = fx_t'(16 * (2 * $urandom_range(0, 5) - 5));
    end
    mism = 0; upd = 0;
    for (int c = 0; c < 1500; c++) begin
      @(negedge clk);
      case ($urandom_range(0, 4))
        0: colour_en = 2'b00;
        1, 2: colour_en = 2'b01;
        default: colour_en = 2'b10;
      endcase
      #1;
      m_pre = m;
      for (int n = 0; n < N; n++) begin
        if (colour_en[colour_of(n)]) m_exp[n] = (local_field(n, m_pre) > 0);
        else m_exp[n] = m_pre[n];
      end
      @(posedge clk); #1;
      for (int n = 0; n < N; n++) begin
        if (colour_en[colour_of(n)]) begin
          upd++;
          if (m[n] != m_exp[n]) mism++;
        end else begin
          chk(m[n] == m_pre[n], $sformatf("site %0d of a frozen colour changed", n));
        end
      end
      // keep the dynamics moving: occasionally flip the field of a site
      if (c % 50 == 49) begin
        int s;
        s = $urandom_range(0, N - 1);
        h[s] = -h[s];
      end
    end
    // a saturated LUT entry still loses against 1 in 65536 random numbers
    chk(mism <= 3, $sformatf("%0d of %0d deterministic updates wrong", mism, upd));
    chk(upd > 10000, "enough updates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
