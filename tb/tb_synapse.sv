// tb_synapse: random and corner-case vectors for I = sum_j J_j m_j + h,
// compared with an integer sum computed in the testbench.
module tb_synapse;
  import paoa_pkg::*;
  logic [NEIGH-1:0] m_nb;
  fx_t  [NEIGH-1:0] j_nb;
  fx_t              h;
  syn_t             i_out;
  int checks = 0, failures = 0;

  synapse dut (.m_nb, .j_nb, .h, .i_out);

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply_and_check();
    int exp;
    #1;
    exp = int'(h);
    for (int k = 0; k < NEIGH; k++) if (m_nb[k]) exp += int'(j_nb[k]);
    checks++;
    if (int'(i_out) != exp) begin
      failures++;
      $display("FAIL m=%b h=%0d: got %0d expected %0d", m_nb, h, i_out, exp);
    end
  endtask

  initial begin
    // extremes: all couplings at the most negative / most positive value
    for (int k = 0; k < NEIGH; k++) j_nb[k] = fx_t'(-512);
    h = fx_t'(-512); m_nb = '1; apply_and_check();
    for (int k = 0; k < NEIGH; k++) j_nb[k] = fx_t'(511);
    h = fx_t'(511);  m_nb = '1; apply_and_check();
    m_nb = '0; apply_and_check();
    // each neighbour alone
    for (int b = 0; b < NEIGH; b++) begin
      for (int k = 0; k < NEIGH; k++) j_nb[k] = fx_t'(k * 37 - 100);
      h = 0; m_nb = NEIGH'(1) << b; apply_and_check();
    end
    repeat (5000) begin
      for (int k = 0; k < NEIGH; k++) j_nb[k] = fx_t'($urandom);
      h    = fx_t'($urandom);
      m_nb = NEIGH'($urandom);
      apply_and_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
