// tb_masked_linear: loads random in-window weights into the sparse 50 x 50
// layer, streams random state vectors one per clock and compares every output
// with the band-matrix reference one clock later. Includes vectors with a
// single non-zero input to check that each output only sees its own window
// (positions j-2..j+2) and that the plate edges are handled.
module tb_masked_linear;
  import mt_pkg::*;
  import tb_ref_pkg::*;

  localparam int DW = DATA_I + FRAC_DEFAULT;

  localparam int N  = 50;
  localparam int HW = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     cfg_we = 1'b0;
  logic [CFG_AW-1:0]        cfg_addr = '0;
  logic signed [CFG_DW-1:0] cfg_data = '0;
  logic                     in_valid = 1'b0;
  logic signed [DW-1:0]                    x [N];
  logic                     out_valid;
  logic signed [DW-1:0]                    y [N];

  int checks = 0;
  int failures = 0;

  masked_linear #(.N(N), .HALF(HW), .OFFSET(0)) dut (.*);

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

  int    w [];
  int    xv [];
  ivec_t e;

  initial begin
    foreach (x[i]) x[i] = '0;
    w  = new[N*(2*HW+1)];
    xv = new[N];
    foreach (w[i]) w[i] = rnd_s(ww());
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (w[i]) cfg_write(i, w[i]);
    for (int ev = 0; ev < 300; ev++) begin
      if (ev < N) begin
        foreach (xv[i]) xv[i] = 0;
        xv[ev] = 127;                 // one input of value ~1.0
      end else begin
        foreach (xv[i]) xv[i] = (ev % 2) ? rnd_s(8) : rnd_s(dw());
      end
      e = ml_ref(xv, w, HW);
      @(negedge clk);
      in_valid = (ev % 5 != 2);
      foreach (x[i]) x[i] = DW'(xv[i]);
      @(posedge clk);
      #1;
      checks++;
      if (out_valid !== in_valid) begin
        failures++;
        $display("out_valid wrong at event %0d", ev);
      end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (int'(y[j]) != e[j]) begin
          failures++;
          if (failures < 10) $display("ev %0d y[%0d]=%0d expected %0d", ev, j, y[j], e[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
