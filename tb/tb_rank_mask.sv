// tb_rank_mask: self-checking testbench of rank_mask.
//
// Checks the worked example (valid 1,0,1,1 with prefix sum 1,1,2,3 gives
// 1,0,2,3) and random valid/prefix pairs against the rule
// rank = valid ? prefix : 0.
module tb_rank_mask;
  localparam int unsigned N = 4;
  int checks = 0, failures = 0;
  logic [N-1:0] v;
  logic [2:0] p [N];
  logic [2:0] r [N];

  rank_mask #(.N(N)) dut (.valid(v), .psum(p), .rank(r));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v = 4'b1101; p[0] = 1; p[1] = 1; p[2] = 2; p[3] = 3;
    #1;
    checks++;
    if (!(r[0] == 1 && r[1] == 0 && r[2] == 2 && r[3] == 3)) begin
      failures++; $display("FAIL example");
    end
    for (int t = 0; t < 500; t++) begin
      v = N'($urandom);
      for (int i = 0; i < N; i++) p[i] = 3'($urandom);
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (r[i] != (v[i] ? p[i] : 3'd0)) begin
          failures++; $display("FAIL t=%0d i=%0d", t, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
