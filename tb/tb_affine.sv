// tb_affine: checks two instances of the fully parallel affine layer, a
// hidden layer (50 -> 28, 12-bit output) and an output layer (8 -> 1, 16-bit
// output), against the reference model. Random weights and biases are loaded
// through the configuration port; random input vectors stream one per clock
// and each result is compared one clock later, together with out_valid.
module tb_affine;
  import mt_pkg::*;
  import tb_ref_pkg::*;

  localparam int DW = DATA_I + FRAC_DEFAULT;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     we_a = 1'b0;
  logic                     we_b = 1'b0;
  logic [CFG_AW-1:0]        cfg_addr = '0;
  logic signed [CFG_DW-1:0] cfg_data = '0;
  logic                     in_valid = 1'b0;
  logic signed [DW-1:0]                    xa [50];
  logic signed [DW-1:0]                    xb [8];
  logic                     va, vb;
  logic signed [DW-1:0]                    ya [28];
  logic signed [15:0]       yb [1];

  int checks = 0;
  int failures = 0;

  affine dut_a (
    .clk, .rst_n, .cfg_we(we_a), .cfg_addr, .cfg_data,
    .in_valid, .x(xa), .out_valid(va), .y(ya));

  affine #(.N_IN(8), .N_OUT(1), .OUT_W(16)) dut_b (
    .clk, .rst_n, .cfg_we(we_b), .cfg_addr, .cfg_data,
    .in_valid, .x(xb), .out_valid(vb), .y(yb));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(bit sel, int a, int d);
    @(negedge clk);
    we_a = !sel; we_b = sel;
    cfg_addr = CFG_AW'(a); cfg_data = CFG_DW'(d);
    @(negedge clk);
    we_a = 1'b0; we_b = 1'b0;
  endtask

  int wa [], ba [], wb [], bb [];
  int xva [], xvb [];
  ivec_t ea, eb;

  initial begin
    wa = new[50*28]; ba = new[28]; wb = new[8]; bb = new[1];
    xva = new[50]; xvb = new[8];
    foreach (wa[i]) wa[i] = rnd_s(ww());
    foreach (ba[i]) ba[i] = rnd_s(bw());
    foreach (wb[i]) wb[i] = rnd_s(ww());
    foreach (bb[i]) bb[i] = rnd_s(bw());
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (wa[i]) cfg_write(1'b0, i, wa[i]);
    foreach (ba[i]) cfg_write(1'b0, 50*28 + i, ba[i]);
    foreach (wb[i]) cfg_write(1'b1, i, wb[i]);
    cfg_write(1'b1, 8, bb[0]);
    for (int ev = 0; ev < 300; ev++) begin
      int bits;
      bits = (ev % 3 == 0) ? DW : 8;
      foreach (xva[i]) xva[i] = rnd_s(bits);
      foreach (xvb[i]) xvb[i] = rnd_s(bits);
      ea = affine_ref(xva, wa, ba, DW, 7);
      eb = affine_ref(xvb, wb, bb, 16, 7);
      @(negedge clk);
      in_valid = (ev % 6 != 5);
      foreach (xa[i]) xa[i] = DW'(xva[i]);
      foreach (xb[i]) xb[i] = DW'(xvb[i]);
      @(posedge clk);
      #1;
      checks += 2;
      if (va !== in_valid) failures++;
      if (vb !== in_valid) failures++;
      for (int o = 0; o < 28; o++) begin
        checks++;
        if (int'(ya[o]) != ea[o]) begin
          failures++;
          if (failures < 10) $display("ev %0d hidden y[%0d]=%0d expected %0d", ev, o, ya[o], ea[o]);
        end
      end
      checks++;
      if (int'(yb[0]) != eb[0]) begin
        failures++;
        if (failures < 10) $display("ev %0d output y=%0d expected %0d", ev, yb[0], eb[0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
