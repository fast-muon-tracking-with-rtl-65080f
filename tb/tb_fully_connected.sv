// tb_fully_connected: loads random weights into the four affine layers of
// the perceptron, streams random 50-value track states one per clock and
// compares theta with the reference model. Each result must appear exactly
// 4 clocks after its input; the test also checks that the ReLUs clipped
// negative values.
module tb_fully_connected;
  import mt_pkg::*;
  import tb_ref_pkg::*;

  localparam int DW = DATA_I + FRAC_DEFAULT;

  localparam int LAT = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     cfg_we = 1'b0;
  logic [1:0]               cfg_sel = '0;
  logic [CFG_AW-1:0]        cfg_addr = '0;
  logic signed [CFG_DW-1:0] cfg_data = '0;
  logic                     in_valid = 1'b0;
  logic signed [DW-1:0]                    x [NCH];
  logic                     out_valid;
  theta_t                   theta;

  int checks = 0;
  int failures = 0;

  fully_connected dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int l, int a, int d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_sel = 2'(l);
    cfg_addr = CFG_AW'(a); cfg_data = CFG_DW'(d);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  typedef struct {
    int t_in;
    int th;
  } exp_t;

  exp_t       q [$];
  net_weights nw;
  int         cycle = 0;

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("out_valid without an event");
      end else begin
        exp_t e;
        e = q.pop_front();
        checks += 2;
        if (cycle - e.t_in != LAT) begin
          failures++;
          $display("latency %0d, expected %0d", cycle - e.t_in, LAT);
        end
        if (int'(theta) != e.th) begin
          failures++;
          if (failures < 10) $display("theta=%0d expected %0d", theta, e.th);
        end
      end
    end
  end

  int xv [];

  initial begin
    nw = new();
    nw.randomise(8, 10);
    xv = new[NCH];
    foreach (x[i]) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int l = 6; l < 10; l++)
      for (int a = 0; a < nw.n_regs(l); a++) cfg_write(l - 6, a, nw.reg_value(l, a));
    for (int ev = 0; ev < 400; ev++) begin
      exp_t e;
      foreach (xv[i]) xv[i] = (ev % 2) ? rnd_s(8) : rnd_s(dw());
      @(negedge clk);
      in_valid = (ev % 8 != 6);
      foreach (x[i]) x[i] = DW'(xv[i]);
      if (in_valid) begin
        e.t_in = cycle;
        e.th = fc_ref(nw, xv);
        q.push_back(e);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 3) @(posedge clk);
    #2;
    checks += 2;
    if (q.size() != 0) begin
      failures++;
      $display("%0d events never came out", q.size());
    end
    if (n_relu_zero == 0) begin
      failures++;
      $display("ReLU clipping never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
