// tb_prefix_sum: self-checking testbench of prefix_sum.
//
// Checks the worked example 1,0,1,1 -> 1,1,2,3 and every valid pattern of
// an 8-port instance against a counting loop.
module tb_prefix_sum;
  localparam int unsigned N = 8;
  localparam int unsigned SW = $clog2(N + 1);
  int checks = 0, failures = 0;

  logic [3:0]    v4;
  logic [2:0]    p4 [4];
  logic [N-1:0]  v;
  logic [SW-1:0] p [N];

  prefix_sum #(.N(4)) dut4 (.valid(v4), .psum(p4));
  prefix_sum #(.N(N)) dut  (.valid(v),  .psum(p));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v4 = 4'b1101;   // port 0 = 1, port 1 = 0, port 2 = 1, port 3 = 1
    #1;
    checks++;
    if (!(p4[0] == 1 && p4[1] == 1 && p4[2] == 2 && p4[3] == 3)) begin
      failures++; $display("FAIL example");
    end
    for (int m = 0; m < (1 << N); m++) begin
      int cnt;
      v = N'(m);
      #1;
      cnt = 0;
      for (int i = 0; i < N; i++) begin
        cnt += m[i];
        checks++;
        if (p[i] != SW'(cnt)) begin
          failures++;
          $display("FAIL m=%0h i=%0d got %0d exp %0d", m, i, p[i], cnt);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
