// tb_mfc_controller: runs the feedback controller at the paper's size
// (1000 p-dits, 32-cycle count) on a sequence of random population vectors.
// Checks that `done` comes exactly 35 cycles after `start`, that the counts
// are exact, that the first run loads Nhat = N and later runs apply the
// alpha = 1/8 filter, and that the broadcast bias is floor(bl * Nhat / 2^8),
// all computed here from the state vector alone.
module tb_mfc_controller;
  import potts_pkg::*;
  localparam int N = 1000, Q = 3;

  logic clk = 0, rst = 1, start = 0, first = 0;
  logic [1:0] states [N];
  beta_t beta_lambda;
  logic [9:0] counts [Q];
  logic [17:0] nhat [Q];
  energy_t bias [Q];
  logic busy, done;
  int checks = 0, failures = 0;

  mfc_controller #(.N(N), .Q(Q), .CYCLES(32), .SHIFT(3)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic longint floordiv(input longint v, input longint d);
    longint r;
    r = v / d;
    if ((v < 0) && (r * d != v)) r = r - 1;
    return r;
  endfunction

  initial begin
    longint m [Q];
    for (int i = 0; i < N; i++) states[i] = '0;
    beta_lambda = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int run = 0; run < 60; run++) begin
      int e [Q];
      int lat;
      for (int k = 0; k < Q; k++) e[k] = 0;
      for (int i = 0; i < N; i++) begin
        states[i] = 2'($urandom_range(0, (run % 3 == 1) ? 1 : 2));
        e[states[i]]++;
      end
      beta_lambda = beta_t'($urandom_range(0, 60));
      @(negedge clk);
      start = 1; first = (run == 0);
      @(negedge clk);
      start = 0; first = 0;
      lat = 1;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      check(lat == 35, $sformatf("latency %0d exp 35", lat));
      for (int k = 0; k < Q; k++) begin
        if (run == 0) m[k] = longint'(e[k]) * 256;
        else          m[k] = m[k] + floordiv(longint'(e[k]) * 256 - m[k], 8);
        check(int'(counts[k]) == e[k], $sformatf("count[%0d]=%0d exp %0d", k, counts[k], e[k]));
        check(longint'(nhat[k]) == m[k], $sformatf("nhat[%0d]=%0d exp %0d", k, nhat[k], m[k]));
        check(longint'(bias[k]) == floordiv(longint'(beta_lambda) * m[k], 256),
              $sformatf("bias[%0d]=%0d", k, bias[k]));
      end
      check(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
