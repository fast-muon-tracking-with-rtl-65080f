// tb_vec_add: checks the two- and three-input element-wise adders against
// integer sums wrapped to 12 bits, with random operands of full range (so
// that wrap-around happens) and of small range.
module tb_vec_add;
  import mt_pkg::*;
  import tb_ref_pkg::*;

  localparam int DW = DATA_I + FRAC_DEFAULT;

  localparam int N = 50;

  logic signed [DW-1:0] a2 [2][N];
  logic signed [DW-1:0] a3 [3][N];
  logic signed [DW-1:0] y2 [N];
  logic signed [DW-1:0] y3 [N];

  int checks = 0;
  int failures = 0;
  int n_wrap = 0;

  vec_add #(.N(N), .M(2)) dut2 (.a(a2), .y(y2));
  vec_add #(.N(N), .M(3)) dut3 (.a(a3), .y(y3));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 200; r++) begin
      int bits;
      bits = (r % 2) ? DW : 9;
      for (int i = 0; i < N; i++) begin
        for (int m = 0; m < 2; m++) a2[m][i] = DW'(rnd_s(bits));
        for (int m = 0; m < 3; m++) a3[m][i] = DW'(rnd_s(bits));
      end
      #1;
      for (int i = 0; i < N; i++) begin
        longint s2, s3;
        s2 = longint'(a2[0][i]) + a2[1][i];
        s3 = longint'(a3[0][i]) + a3[1][i] + a3[2][i];
        if (s3 != wrap(s3, DW)) n_wrap++;
        checks += 2;
        if (int'(y2[i]) != wrap(s2, DW)) begin
          failures++;
          if (failures < 10) $display("2-input sum %0d got %0d", s2, y2[i]);
        end
        if (int'(y3[i]) != wrap(s3, DW)) begin
          failures++;
          if (failures < 10) $display("3-input sum %0d got %0d", s3, y3[i]);
        end
      end
    end
    checks++;
    if (n_wrap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
