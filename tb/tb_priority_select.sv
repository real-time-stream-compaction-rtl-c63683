// tb_priority_select: self-checking testbench of priority_select.
//
// Checks the worked example (ranks 1,0,2,3 select addresses 0 and 2) and,
// for an 8-port, 4-encoder instance, every valid pattern turned into ranks
// by counting: encoder k must report the port of the (k+1)-th valid
// element, or no hit when fewer than k+1 elements are valid.
module tb_priority_select;
  localparam int unsigned N = 8;
  localparam int unsigned K = 4;
  int checks = 0, failures = 0;

  logic [2:0] r4 [4];
  logic [1:0] a4 [2];
  logic [1:0] h4;
  logic [3:0] r [N];
  logic [2:0] a [K];
  logic [K-1:0] h;

  priority_select #(.N(4), .K(2)) dut4 (.rank(r4), .addr(a4), .hit(h4));
  priority_select #(.N(N), .K(K)) dut  (.rank(r),  .addr(a),  .hit(h));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    r4[0] = 1; r4[1] = 0; r4[2] = 2; r4[3] = 3;
    #1;
    checks++;
    if (!(h4 == 2'b11 && a4[0] == 0 && a4[1] == 2)) begin
      failures++; $display("FAIL example");
    end
    for (int m = 0; m < (1 << N); m++) begin
      int cnt;
      int pos [K];
      cnt = 0;
      for (int k = 0; k < K; k++) pos[k] = -1;
      for (int i = 0; i < N; i++) begin
        if (m[i]) begin
          cnt++;
          r[i] = 4'(cnt);
          if (cnt <= K) pos[cnt-1] = i;
        end else begin
          r[i] = '0;
        end
      end
      #1;
      for (int k = 0; k < K; k++) begin
        checks++;
        if (pos[k] < 0 ? h[k] : !(h[k] && a[k] == 3'(pos[k]))) begin
          failures++;
          $display("FAIL m=%0h k=%0d hit=%0b addr=%0d exp %0d", m, k, h[k], a[k], pos[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
