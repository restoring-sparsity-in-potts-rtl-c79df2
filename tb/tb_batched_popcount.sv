// tb_batched_popcount: random state vectors are counted by two instances,
// the paper's size (1000 p-dits, 32 cycles) and a small odd one (50 p-dits,
// 4 cycles, last batch partly empty). Counts are compared with a direct
// count, and `done` must rise exactly CYCLES cycles after `start`.
module tb_batched_popcount;
  localparam int N1 = 1000, C1 = 32;
  localparam int N2 = 50,   C2 = 4;
  localparam int Q = 3;

  logic clk = 0, rst = 1;
  logic start1 = 0, start2 = 0;
  logic [1:0] st1 [N1];
  logic [1:0] st2 [N2];
  logic [9:0] cnt1 [Q];
  logic [5:0] cnt2 [Q];
  logic busy1, done1, busy2, done2;

  int checks = 0, failures = 0;

  batched_popcount #(.N(N1), .Q(Q), .CYCLES(C1)) dut1 (
    .clk, .rst, .start(start1), .states(st1), .counts(cnt1), .busy(busy1), .done(done1));
  batched_popcount #(.N(N2), .Q(Q), .CYCLES(C2)) dut2 (
    .clk, .rst, .start(start2), .states(st2), .counts(cnt2), .busy(busy2), .done(done2));

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

  initial begin
    for (int i = 0; i < N1; i++) st1[i] = '0;
    for (int i = 0; i < N2; i++) st2[i] = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int trial = 0; trial < 20; trial++) begin
      int e1 [Q];
      int e2 [Q];
      int lat1, lat2;
      for (int k = 0; k < Q; k++) begin e1[k] = 0; e2[k] = 0; end
      // Skewed distributions in some trials, all-one-state in one.
      for (int i = 0; i < N1; i++) begin
        st1[i] = (trial == 3) ? 2'd2 : 2'($urandom_range(0, (trial % 2) ? 2 : 1));
        e1[st1[i]]++;
      end
      for (int i = 0; i < N2; i++) begin
        st2[i] = 2'($urandom_range(0, 2));
        e2[st2[i]]++;
      end
      @(negedge clk);
      start1 = 1; start2 = 1;
      @(negedge clk);
      start1 = 0; start2 = 0;
      lat1 = 0; lat2 = 0;
      for (int c = 1; c <= 40; c++) begin
        if (done1 && lat1 == 0) lat1 = c;
        if (done2 && lat2 == 0) lat2 = c;
        if (lat1 != 0 && lat2 != 0) break;
        @(negedge clk);
      end
      check(lat1 == C1, $sformatf("latency %0d exp %0d", lat1, C1));
      check(lat2 == C2, $sformatf("latency %0d exp %0d", lat2, C2));
      for (int k = 0; k < Q; k++) begin
        check(int'(cnt1[k]) == e1[k], $sformatf("N=1000 count[%0d]=%0d exp %0d", k, cnt1[k], e1[k]));
        check(int'(cnt2[k]) == e2[k], $sformatf("N=50 count[%0d]=%0d exp %0d", k, cnt2[k], e2[k]));
      end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
