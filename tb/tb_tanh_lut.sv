// tb_tanh_lut: checks the tanh table over every 12-bit input value (a sweep
// of all 4096 codes, 50 per clock) and then over random vectors, against
// floor(tanh(x) * 128) with x clamped to [-4, 4). Also checks the one-clock
// latency of the output and of out_valid, and that saturation was reached.
module tb_tanh_lut;
  import mt_pkg::*;
  import tb_ref_pkg::*;

  localparam int DW = DATA_I + FRAC_DEFAULT;

  localparam int N = 50;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  in_valid = 1'b0;
  logic signed [DW-1:0] x [N];
  logic  out_valid;
  logic signed [DW-1:0] y [N];

  int checks = 0;
  int failures = 0;

  tanh_lut #(.N(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xv [N];

  task automatic apply(bit valid);
    @(negedge clk);
    in_valid = valid;
    foreach (x[i]) x[i] = DW'(xv[i]);
    @(posedge clk);
    #1;
    checks++;
    if (out_valid !== valid) begin
      failures++;
      $display("out_valid %0b, expected %0b", out_valid, valid);
    end
    for (int i = 0; i < N; i++) begin
      int e;
      e = tanh_ref(xv[i]);
      checks++;
      if (int'(y[i]) != e) begin
        failures++;
        if (failures < 10) $display("tanh(%0d) = %0d, expected %0d", xv[i], y[i], e);
      end
    end
  endtask

  initial begin
    foreach (x[i]) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int base = -2048; base < 2048; base += N) begin
      for (int i = 0; i < N; i++) xv[i] = (base + i < 2048) ? base + i : 0;
      apply(1'b1);
    end
    for (int r = 0; r < 100; r++) begin
      for (int i = 0; i < N; i++) xv[i] = rnd_s(dw());
      apply(r % 3 != 0);
    end
    checks++;
    if (n_tanh_sat == 0) begin
      failures++;
      $display("saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
