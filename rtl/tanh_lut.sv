// tanh_lut: element-wise hyperbolic tangent of an N-wide activation vector.
//
// Each element is looked up in a TABLE_SIZE-entry table covering the input
// range [-4, 4). The index is x * TABLE_SIZE/8 + TABLE_SIZE/2, clamped to the
// table; with 7 fraction bits and 1024 entries one table step is one input
// LSB, so the index is simply x + 512. Entry i
// holds floor(tanh((i - TABLE_SIZE/2) * 8 / TABLE_SIZE) * 2^FRAC), the
// hyperbolic tangent truncated to the activation format; the table is
// computed at elaboration. Output is registered: y and out_valid follow the
// input by one clock, one vector per clock.
//
// The paper names the tanh activation after each merge of track information;
// the table method, its size and range are this design's choice, modelled on
// the usual lookup-table activations of high-level-synthesis flows.
module tanh_lut
  import mt_pkg::*;
#(
  parameter int N          = 50,
  parameter int TABLE_SIZE = 1024,
  parameter int FRAC       = mt_pkg::FRAC_DEFAULT,
  localparam int DW        = DATA_I + FRAC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [DW-1:0] x [N],
  output logic                out_valid,
  output logic signed [DW-1:0] y [N]
);

  localparam int IDX_W = $clog2(TABLE_SIZE);

  typedef logic signed [DW-1:0] table_t [TABLE_SIZE];

  function automatic table_t make_table();
    table_t t;
    for (int i = 0; i < TABLE_SIZE; i++) begin
      real xr;
      xr = real'(i - TABLE_SIZE/2) * 8.0 / real'(TABLE_SIZE);
      t[i] = DW'($rtoi($floor($tanh(xr) * real'(1 << FRAC))));
    end
    return t;
  endfunction

  localparam table_t TABLE = make_table();

  // Table index of an activation: x * TABLE_SIZE/8 scaled to LSBs, plus the
  // middle of the table, clamped at both ends.
  function automatic logic [IDX_W-1:0] index_of(logic signed [DW-1:0] v);
    int s;
    s = (int'(v) * TABLE_SIZE) / (8 << FRAC) + TABLE_SIZE/2;
    if (s < 0)           s = 0;
    if (s >= TABLE_SIZE) s = TABLE_SIZE - 1;
    return IDX_W'(s);
  endfunction

  always_ff @(posedge clk)
    for (int i = 0; i < N; i++) y[i] <= TABLE[index_of(x[i])];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

endmodule
