// tb_weight_memory: random writes of couplings and biases, checked against a
// shadow copy after every write; writes to invalid sites or directions must
// change nothing, and reset must clear everything.
module tb_weight_memory;
  import paoa_pkg::*;
  localparam int L = 3, N = 27;
  logic clk = 0, rst_n = 0, j_we = 0, h_we = 0;
  logic [4:0] j_node, h_node;
  logic [1:0] j_dir;
  fx_t j_wdata, h_wdata;
  fx_t [N-1:0][BONDS-1:0] j_bond, j_m;
  fx_t [N-1:0] h, h_m;
  int checks = 0, failures = 0;

  weight_memory #(.L(L)) dut (.clk, .rst_n, .j_we, .j_node, .j_dir, .j_wdata, .h_we, .h_node, .h_wdata, .j_bond, .h);

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

  initial begin
    repeat (2) @(posedge clk);
    #1;
    chk(j_bond == '0 && h == '0, "cleared by reset");
    rst_n = 1;
    j_m = '0; h_m = '0;
    repeat (3000) begin
      @(negedge clk);
      j_we = $urandom_range(0, 1); h_we = $urandom_range(0, 1);
      j_node = 5'($urandom_range(0, 31)); j_dir = 2'($urandom);
      h_node = 5'($urandom_range(0, 31));
      j_wdata = fx_t'($urandom); h_wdata = fx_t'($urandom);
      if (j_we && j_node < N && j_dir < 3) j_m[j_node][j_dir] = j_wdata;
      if (h_we && h_node < N) h_m[h_node] = h_wdata;
      @(posedge clk); #1;
      chk(j_bond == j_m, "couplings match");
      chk(h == h_m, "biases match");
    end
    @(negedge clk); j_we = 0; h_we = 0; rst_n = 0;
    @(posedge clk); #1;
    chk(j_bond == '0 && h == '0, "cleared by second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
