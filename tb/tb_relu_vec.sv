// tb_relu_vec: checks y = max(0, x) element-wise for random and edge values
// (most negative, -1, 0, +1, most positive).
module tb_relu_vec;
  import mt_pkg::*;
  import tb_ref_pkg::*;

  localparam int DW = DATA_I + FRAC_DEFAULT;

  localparam int N = 28;

  logic signed [DW-1:0] x [N];
  logic signed [DW-1:0] y [N];

  int checks = 0;
  int failures = 0;

  relu_vec #(.N(N)) dut (.x, .y);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 200; r++) begin
      for (int i = 0; i < N; i++) begin
        int v;
        case ((r * N + i) % 9)
          0: v = -2048;
          1: v = -1;
          2: v = 0;
          3: v = 1;
          4: v = 2047;
          default: v = rnd_s(dw());
        endcase
        x[i] = DW'(v);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        int e;
        e = (int'(x[i]) < 0) ? 0 : int'(x[i]);
        checks++;
        if (int'(y[i]) != e) begin
          failures++;
          if (failures < 10) $display("relu(%0d) = %0d", x[i], y[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
