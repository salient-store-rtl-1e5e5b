// tb_hspm: multiplies random polynomials in Z_q[x]/(x^N+1) with the default
// N = 256 and compares every d_j = (a*b + c)_j with a schoolbook reference
// computed here. The first operation streams with no stalls and checks the
// cycle count N + (N+2) + N (+ phase changes); the second inserts random
// stalls on every input stream.
module tb_hspm;
  localparam int N = 256, Q = 7681;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic b_valid, b_ready; logic [5:0] b_data;
  logic a_valid, a_ready; logic [12:0] a_data;
  logic c_valid, c_ready; logic [12:0] c_data;
  logic d_valid; logic [7:0] d_addr; logic [12:0] d_data;
  int checks = 0, failures = 0;

  hspm dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pa [N], pc [N], pb [N], expd [N];
  logic [5:0] pbraw [N];
  int ndone;

  task automatic make_ref();
    for (int j = 0; j < N; j++) begin
      pa[j] = $urandom % Q;
      pc[j] = $urandom % Q;
      pbraw[j] = 6'($urandom);
      pb[j] = pbraw[j][5] ? -int'(pbraw[j][4:0]) : int'(pbraw[j][4:0]);
    end
    for (int k = 0; k < N; k++) begin
      longint acc = 0;
      for (int i = 0; i < N; i++) begin
        int j = k - i;
        if (j >= 0) acc += longint'(pa[i]) * pb[j];
        else        acc -= longint'(pa[i]) * pb[j + N];
      end
      acc = (acc + pc[k]) % Q;
      if (acc < 0) acc += Q;
      expd[k] = int'(acc);
    end
  endtask

  always @(posedge clk) if (d_valid) begin
    checks++;
    if (d_data != 13'(expd[d_addr])) begin
      failures++;
      if (failures < 10) $display("FAIL d[%0d]=%0d exp %0d", d_addr, d_data, expd[d_addr]);
    end
    ndone++;
  end

  task automatic run(input bit stalls, output int cycles);
    int t0;
    make_ref();
    ndone = 0;
    @(negedge clk); start = 1; t0 = 0;
    @(negedge clk); start = 0;
    fork
      begin
        for (int j = 0; j < N; j++) begin
          b_valid = stalls ? ($urandom % 3 != 0) : 1'b1;
          while (!b_valid) begin @(negedge clk); b_valid = ($urandom % 3 != 0); end
          b_data = pbraw[j];
          @(posedge clk); while (!b_ready) @(posedge clk);
          @(negedge clk); b_valid = 0;
        end
      end
      begin
        for (int j = 0; j < N; j++) begin
          a_data = 13'(pa[j]); a_valid = 1;
          do @(posedge clk); while (!a_ready);
          @(negedge clk); a_valid = 0;
          if (stalls && ($urandom % 3 == 0)) @(negedge clk);
        end
      end
      begin
        for (int j = 0; j < N; j++) begin
          c_data = 13'(pc[j]); c_valid = 1;
          do @(posedge clk); while (!c_ready);
          @(negedge clk); c_valid = 0;
          if (stalls && ($urandom % 3 == 0)) @(negedge clk);
        end
      end
      begin
        while (!done) begin @(posedge clk); t0++; end
      end
    join
    cycles = t0;
    @(posedge clk); #1;
    checks++;
    if (ndone != N) begin failures++; $display("FAIL %0d outputs, expected %0d", ndone, N); end
  endtask

  int cyc;
  initial begin
    start = 0; b_valid = 0; a_valid = 0; c_valid = 0; b_data = 0; a_data = 0; c_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, cyc);
    $display("hspm: one multiplication took %0d cycles", cyc);
    checks++;
    // N load + N multiply + 2 pipeline + N read-out, plus 3 phase-change cycles
    if (cyc > 3*N + 2 + 4 || cyc < 3*N) begin failures++; $display("FAIL cycle count %0d", cyc); end
    run(1, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
