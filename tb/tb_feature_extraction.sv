// tb_feature_extraction: loads random weights into all six layers of the
// feature extractor, streams hit patterns one per clock (with gaps in
// in_valid) and compares each 50-value track state with the reference model.
// Expected results wait in a queue; each must appear exactly 6 clocks after
// its event entered, and out_valid must never rise without an event.
module tb_feature_extraction;
  import mt_pkg::*;
  import tb_ref_pkg::*;

  localparam int DW = DATA_I + FRAC_DEFAULT;

  localparam int LAT = 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                       cfg_we = 1'b0;
  logic [2:0]                 cfg_sel = '0;
  logic [CFG_AW-1:0]          cfg_addr = '0;
  logic signed [CFG_DW-1:0]   cfg_data = '0;
  logic                       in_valid = 1'b0;
  logic [NCH-1:0][GAPS_M1-1:0] hits_m1 = '0;
  logic [NCH-1:0][GAPS_M2-1:0] hits_m2 = '0;
  logic [NCH-1:0][GAPS_M3-1:0] hits_m3 = '0;
  logic                       out_valid;
  logic signed [DW-1:0]                      feat [NCH];

  int checks = 0;
  int failures = 0;

  feature_extraction dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int l, int a, int d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_sel = 3'(l);
    cfg_addr = CFG_AW'(a); cfg_data = CFG_DW'(d);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  typedef struct {
    int    t_in;
    ivec_t f;
  } exp_t;

  exp_t       q [$];
  net_weights nw;
  int         cycle = 0;
  bit         done = 1'b0;

  always @(posedge clk) cycle <= cycle + 1;

  // Output checker.
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
        checks++;
        if (cycle - e.t_in != LAT) begin
          failures++;
          $display("latency %0d, expected %0d", cycle - e.t_in, LAT);
        end
        for (int i = 0; i < NCH; i++) begin
          checks++;
          if (int'(feat[i]) != e.f[i]) begin
            failures++;
            if (failures < 10) $display("feat[%0d]=%0d expected %0d", i, feat[i], e.f[i]);
          end
        end
      end
    end
  end

  bit h1 [], h2 [], h3 [];

  initial begin
    nw = new();
    nw.randomise(8, 10);
    h1 = new[NCH*3]; h2 = new[NCH*2]; h3 = new[NCH*2];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 6; l++)
      for (int a = 0; a < nw.n_regs(l); a++) cfg_write(l, a, nw.reg_value(l, a));
    for (int ev = 0; ev < 300; ev++) begin
      int dens;
      exp_t e;
      dens = 1 + (ev % 5) * 8;
      foreach (h1[i]) h1[i] = ($urandom_range(99) < dens);
      foreach (h2[i]) h2[i] = ($urandom_range(99) < dens);
      foreach (h3[i]) h3[i] = ($urandom_range(99) < dens);
      @(negedge clk);
      in_valid = (ev % 9 != 4);
      for (int p = 0; p < NCH; p++) begin
        for (int c = 0; c < 3; c++) hits_m1[p][c] = h1[p*3 + c];
        for (int c = 0; c < 2; c++) hits_m2[p][c] = h2[p*2 + c];
        for (int c = 0; c < 2; c++) hits_m3[p][c] = h3[p*2 + c];
      end
      if (in_valid) begin
        e.t_in = cycle;
        e.f = fe_ref(nw, h1, h2, h3);
        q.push_back(e);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 3) @(posedge clk);
    #2;
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("%0d events never came out", q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
