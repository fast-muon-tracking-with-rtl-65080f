// tb_conv1d_hit: checks the one-filter hit convolution against the reference
// model. Random weights and bias are loaded through the configuration port,
// then random hit patterns of varying density stream in one per clock; every
// output vector is compared element by element one clock after its input,
// and out_valid is checked to follow in_valid by exactly one clock.
module tb_conv1d_hit;
  import mt_pkg::*;
  import tb_ref_pkg::*;

  localparam int DW = DATA_I + FRAC_DEFAULT;

  localparam int N = 50;
  localparam int C = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     cfg_we = 1'b0;
  logic [CFG_AW-1:0]        cfg_addr = '0;
  logic signed [CFG_DW-1:0] cfg_data = '0;
  logic                     in_valid = 1'b0;
  logic [N-1:0][C-1:0]      hits = '0;
  logic                     out_valid;
  logic signed [DW-1:0]                    y [N];

  int checks = 0;
  int failures = 0;

  conv1d_hit #(.N(N), .C(C), .K(3)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int a, int d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = CFG_AW'(a); cfg_data = CFG_DW'(d);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  int  w [];
  int  b;
  bit  h [];
  ivec_t exp_y;
  bit  prev_valid;

  initial begin
    w = new[3*C];
    h = new[N*C];
    foreach (w[i]) w[i] = rnd_s(ww());
    b = rnd_s(bw());
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (w[i]) cfg_write(i, w[i]);
    cfg_write(3*C, b);
    exp_y = new[N];
    prev_valid = 1'b0;
    for (int ev = 0; ev < 400; ev++) begin
      int dens;
      dens = (ev % 4 == 0) ? 2 : (ev % 4 == 1) ? 20 : (ev % 4 == 2) ? 50 : 95;
      @(negedge clk);
      in_valid = (ev % 7 != 3);
      for (int p = 0; p < N; p++)
        for (int c = 0; c < C; c++) begin
          h[p*C + c] = ($urandom_range(99) < dens);
          hits[p][c] = h[p*C + c];
        end
      exp_y = conv_ref(h, w, b, N, C);
      @(posedge clk);
      #1;
      checks++;
      if (out_valid !== in_valid) begin
        failures++;
        $display("out_valid %0b one clock after in_valid %0b", out_valid, in_valid);
      end
      for (int p = 0; p < N; p++) begin
        checks++;
        if (int'(y[p]) != exp_y[p]) begin
          failures++;
          if (failures < 10) $display("ev %0d y[%0d]=%0d expected %0d", ev, p, y[p], exp_y[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
