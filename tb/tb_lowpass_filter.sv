// tb_lowpass_filter: drives random population counts through the filter
// and compares every step with Nhat <- Nhat + floor(((N * 2^8) - Nhat) / 8),
// computed here with plain integers; also checks the `load` step, that
// the output holds without `update`, and that a constant input is
// approached geometrically.
module tb_lowpass_filter;
  localparam int Q = 3, CW = 10, FRAC = 8, SHIFT = 3;

  logic clk = 0, rst = 1, load = 0, update = 0;
  logic [CW-1:0] counts [Q];
  logic [CW+FRAC-1:0] nhat [Q];
  int checks = 0, failures = 0;

  lowpass_filter #(.Q(Q), .CW(CW), .FRAC(FRAC), .SHIFT(SHIFT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic longint floordiv8(input longint v);
    longint r;
    r = v / 8;
    if (v < 0 && r * 8 != v) r = r - 1;
    return r;
  endfunction

  initial begin
    longint m [Q];
    for (int k = 0; k < Q; k++) counts[k] = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    // load
    for (int k = 0; k < Q; k++) counts[k] = CW'(300 + 20 * k);
    @(negedge clk); load = 1;
    @(negedge clk); load = 0;
    for (int k = 0; k < Q; k++) begin
      m[k] = longint'(counts[k]) * 256;
      check(longint'(nhat[k]) == m[k], "load");
    end
    // random updates
    for (int it = 0; it < 500; it++) begin
      for (int k = 0; k < Q; k++) counts[k] = CW'($urandom_range(0, 1000));
      @(negedge clk); update = 1;
      @(negedge clk); update = 0;
      for (int k = 0; k < Q; k++) begin
        m[k] = m[k] + floordiv8(longint'(counts[k]) * 256 - m[k]);
        check(longint'(nhat[k]) == m[k],
              $sformatf("step %0d k=%0d nhat=%0d exp %0d", it, k, nhat[k], m[k]));
      end
      // no update: holds
      if (it % 7 == 0) begin
        @(negedge clk);
        for (int k = 0; k < Q; k++) check(longint'(nhat[k]) == m[k], "hold");
      end
    end
    // constant input: error shrinks by 7/8 per step
    for (int k = 0; k < Q; k++) counts[k] = CW'(1000);
    for (int it = 0; it < 60; it++) begin
      @(negedge clk); update = 1;
    end
    @(negedge clk); update = 0;
    for (int k = 0; k < Q; k++)
      check(nhat[k] >= (CW+FRAC)'(1000 * 256 - 64), $sformatf("convergence %0d", nhat[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
