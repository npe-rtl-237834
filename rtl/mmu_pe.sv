// mmu_pe: one processing element of the matrix multiply unit.
//
// PE_LANES multipliers followed by an adder tree, as in the published
// MMU. In the 16-bit MMU (DW = 16) each multiplier takes one activation
// and one weight and the PE produces one inner product per cycle. In the
// 8-bit MMU (DW = 8) each multiplier slot computes two 8-bit products that
// share the activation input, so the PE produces two inner products per
// cycle (weights of output 0 in the low half of the weight word, output 1
// in the high half). Two register stages: products, then tree sums, so an
// operand presented in cycle t gives its sums in cycle t+2.
module mmu_pe #(
  parameter int PE_LANES = 16,
  parameter int DW       = 16,
  localparam int NO      = (DW == 8) ? 2 : 1,
  localparam int PW      = 2 * DW,
  localparam int SW      = PW + $clog2(PE_LANES)
) (
  input  logic                                clk,
  input  logic                                en,
  input  logic [PE_LANES-1:0][DW-1:0]         act,
  input  logic [NO-1:0][PE_LANES-1:0][DW-1:0] w,
  output logic [NO-1:0][SW-1:0]               sum
);
  localparam int LV = $clog2(PE_LANES);

  logic signed [PW-1:0] prod_q [NO][PE_LANES];
  logic signed [SW-1:0] tree   [NO][LV+1][PE_LANES];

  always_ff @(posedge clk)
    if (en)
      for (int o = 0; o < NO; o++)
        for (int l = 0; l < PE_LANES; l++)
          prod_q[o][l] <= PW'($signed(act[l])) * PW'($signed(w[o][l]));

  // Binary adder tree: level v holds PE_LANES >> v partial sums.
  always_comb begin
    for (int o = 0; o < NO; o++) begin
      for (int v = 0; v <= LV; v++)
        for (int l = 0; l < PE_LANES; l++) tree[o][v][l] = '0;
      for (int l = 0; l < PE_LANES; l++) tree[o][0][l] = SW'(prod_q[o][l]);
      for (int v = 1; v <= LV; v++)
        for (int l = 0; l < (PE_LANES >> v); l++)
          tree[o][v][l] = tree[o][v-1][2*l] + tree[o][v-1][2*l+1];
    end
  end

  always_ff @(posedge clk)
    if (en)
      for (int o = 0; o < NO; o++) sum[o] <= tree[o][LV][0];
endmodule
