// tb_mnn_tracker: end-to-end test of the tracking network at its default
// size.
//
// The test runs three data-taking periods, one per detector noise level
// (0, 1e-4 and 1e-3 per channel). Before each period a fresh set of weights
// (a differently trained model) is written through the configuration port.
// Then muon-like events stream in: a straight track crosses M1 at a random
// channel and drifts by a fixed number of channels per plate, firing one or
// two adjacent channels per gas gap; a gap misses its hit now and then
// (chamber inefficiency) and noise hits are added at the period's level.
// A share of purely random hit patterns is mixed in. Events mostly come
// back to back, one per clock, with occasional idle clocks.
//
// Every theta is compared with a bit-exact reference model, and must appear
// exactly 11 clocks after its event. The test counts how often each mechanism
// was exercised: back-to-back events, idle clocks, weight reloads, noise hits,
// missing hits, tanh saturation and ReLU clipping; one that never happened is
// counted as a failure.
module tb_mnn_tracker;
  import mt_pkg::*;
  import tb_ref_pkg::*;

  localparam int DW = DATA_I + FRAC_DEFAULT;

  localparam int LAT       = 11;
  localparam int N_EVENTS  = 800;   // per noise level

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                        cfg_we = 1'b0;
  logic [15:0]                 cfg_addr = '0;
  logic signed [CFG_DW-1:0]    cfg_data = '0;
  logic                        in_valid = 1'b0;
  logic [NCH-1:0][GAPS_M1-1:0] hits_m1 = '0;
  logic [NCH-1:0][GAPS_M2-1:0] hits_m2 = '0;
  logic [NCH-1:0][GAPS_M3-1:0] hits_m3 = '0;
  logic                        out_valid;
  theta_t                      theta;

  int checks = 0;
  int failures = 0;

  mnn_tracker dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int l, int a, int d);
    @(negedge clk);
    cfg_we = 1'b1;
    cfg_addr = {4'(l), CFG_AW'(a)};
    cfg_data = CFG_DW'(d);
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

  // Mechanism counters.
  int n_back_to_back = 0;
  int n_idle = 0;
  int n_reload = 0;
  int n_noise = 0;
  int n_missing = 0;
  int n_results = 0;

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
        n_results++;
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

  bit h1 [], h2 [], h3 [];

  // Fire channel ch (and maybe its neighbour) in gap g of a plate with
  // gaps gaps; each gap misses its hit with probability 3 %.
  function automatic void track_hits(ref bit h [], input int gaps, input int ch);
    for (int g = 0; g < gaps; g++) begin
      if ($urandom_range(99) < 3) begin
        n_missing++;
        continue;
      end
      if (ch >= 0 && ch < NCH) h[ch*gaps + g] = 1'b1;
      if ($urandom_range(99) < 30 && ch + 1 < NCH) h[(ch+1)*gaps + g] = 1'b1;
    end
  endfunction

  function automatic void add_noise(ref bit h [], input int ppm);
    foreach (h[i])
      if ($urandom_range(999999) < ppm && !h[i]) begin
        h[i] = 1'b1;
        n_noise++;
      end
  endfunction

  int noise_ppm [3] = '{0, 100, 1000};
  bit prev_valid = 1'b0;

  initial begin
    nw = new();
    h1 = new[NCH*3]; h2 = new[NCH*2]; h3 = new[NCH*2];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 3; run++) begin
      nw.randomise(7, 9);
      for (int l = 0; l < 10; l++)
        for (int a = 0; a < nw.n_regs(l); a++) cfg_write(l, a, nw.reg_value(l, a));
      n_reload++;
      for (int ev = 0; ev < N_EVENTS; ev++) begin
        exp_t e;
        foreach (h1[i]) h1[i] = 1'b0;
        foreach (h2[i]) h2[i] = 1'b0;
        foreach (h3[i]) h3[i] = 1'b0;
        if (ev % 10 == 9) begin
          foreach (h1[i]) h1[i] = $urandom_range(9) < 2;
          foreach (h2[i]) h2[i] = $urandom_range(9) < 2;
          foreach (h3[i]) h3[i] = $urandom_range(9) < 2;
        end else begin
          int p1, d;
          p1 = $urandom_range(44, 5);
          d  = int'($urandom_range(4)) - 2;
          track_hits(h1, 3, p1);
          track_hits(h2, 2, p1 + d);
          track_hits(h3, 2, p1 + 2*d);
          add_noise(h1, noise_ppm[run]);
          add_noise(h2, noise_ppm[run]);
          add_noise(h3, noise_ppm[run]);
        end
        @(negedge clk);
        in_valid = ($urandom_range(19) != 0);
        if (in_valid && prev_valid) n_back_to_back++;
        if (!in_valid) n_idle++;
        prev_valid = in_valid;
        for (int p = 0; p < NCH; p++) begin
          for (int c = 0; c < 3; c++) hits_m1[p][c] = h1[p*3 + c];
          for (int c = 0; c < 2; c++) hits_m2[p][c] = h2[p*2 + c];
          for (int c = 0; c < 2; c++) hits_m3[p][c] = h3[p*2 + c];
        end
        if (in_valid) begin
          e.t_in = cycle;
          e.th = fc_ref(nw, fe_ref(nw, h1, h2, h3));
          q.push_back(e);
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      prev_valid = 1'b0;
      repeat (LAT + 2) @(posedge clk);
      #2;
      checks++;
      if (q.size() != 0) begin
        failures++;
        $display("run %0d: %0d events never came out", run, q.size());
      end
    end
    $display("mechanisms: back_to_back=%0d idle=%0d reloads=%0d noise_hits=%0d missing_hits=%0d tanh_saturations=%0d relu_clips=%0d results=%0d",
             n_back_to_back, n_idle, n_reload, n_noise, n_missing, n_tanh_sat, n_relu_zero, n_results);
    checks += 7;
    if (n_back_to_back == 0) failures++;
    if (n_idle == 0)         failures++;
    if (n_reload < 2)        failures++;
    if (n_noise == 0)        failures++;
    if (n_missing == 0)      failures++;
    if (n_tanh_sat == 0)     failures++;
    if (n_relu_zero == 0)    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
