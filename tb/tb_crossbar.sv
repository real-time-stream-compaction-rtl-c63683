// tb_crossbar: self-checking testbench of crossbar.
//
// Random inputs and selections on a 4 -> 2 and an 8 -> 4 instance; each
// output must carry the selected input, or zero and not valid when its
// selection is off.
module tb_crossbar;
  int checks = 0, failures = 0;

  logic [31:0] d4 [4];
  logic [1:0]  s2 [2];
  logic [1:0]  sv2, ov2;
  logic [31:0] o2 [2];
  logic [15:0] d8 [8];
  logic [2:0]  s4 [4];
  logic [3:0]  sv4, ov4;
  logic [15:0] o4 [4];

  crossbar #(.N_IN(4), .N_OUT(2), .WIDTH(32)) dut_a (
    .in_data(d4), .sel(s2), .sel_valid(sv2), .out_data(o2), .out_valid(ov2));
  crossbar #(.N_IN(8), .N_OUT(4), .WIDTH(16)) dut_b (
    .in_data(d8), .sel(s4), .sel_valid(sv4), .out_data(o4), .out_valid(ov4));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      foreach (d4[i]) d4[i] = $urandom;
      foreach (d8[i]) d8[i] = 16'($urandom);
      foreach (s2[j]) s2[j] = 2'($urandom);
      foreach (s4[j]) s4[j] = 3'($urandom);
      sv2 = 2'($urandom);
      sv4 = 4'($urandom);
      #1;
      for (int j = 0; j < 2; j++) begin
        checks++;
        if (ov2[j] != sv2[j] || o2[j] != (sv2[j] ? d4[s2[j]] : 32'd0)) begin
          failures++; $display("FAIL a t=%0d j=%0d", t, j);
        end
      end
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (ov4[j] != sv4[j] || o4[j] != (sv4[j] ? d8[s4[j]] : 16'd0)) begin
          failures++; $display("FAIL b t=%0d j=%0d", t, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
