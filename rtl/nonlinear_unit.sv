// nonlinear_unit: lookup-table activation function used by the act u-op.
//
// A table of ENTRIES words is indexed by the top bits of the signed fixed-point
// input (the input's sign bit and the next bits, taken as an unsigned index) and
// the selected word is the output, so any activation can be loaded as a
// piecewise-constant table. Entries are written through lut_we/lut_idx/lut_data
// (the mimd.ld u-op with the LUT destination). After reset the table holds a
// quantised ReLU: entry i = i << (W - IDX_W) for non-negative indices, 0 for
// the negative half. The output is combinational. The paper states only that the
// non-linear function is a lookup table; its size, index and contents are this
// design's.
module nonlinear_unit #(
  parameter int unsigned W       = 16,
  parameter int unsigned ENTRIES = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        lut_we,
  input  logic [$clog2(ENTRIES)-1:0]  lut_idx,
  input  logic [W-1:0]                lut_data,
  input  logic [W-1:0]                x,
  output logic [W-1:0]                y
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);

  logic [W-1:0] lut_q [ENTRIES];

  assign y = lut_q[x[W-1 -: IDX_W]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++)
        lut_q[i] <= (i < ENTRIES / 2) ? W'(i << (W - IDX_W)) : '0;
    end else if (lut_we) begin
      lut_q[lut_idx] <= lut_data;
    end
  end

endmodule
