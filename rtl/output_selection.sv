// output_selection: assembles the unit's 32-bit result from the slices.
//
// At most one slice width completes in a cycle (the issue logic sees to
// it). If the 32-bit slice has a result it is the output; otherwise the
// completing 16-bit lanes are placed at [15:0] and [31:16], or the 8-bit
// lanes at [8k+7:8k]. Lanes without a result contribute zeros, so a scalar
// 16-bit or 8-bit result is right-aligned with zeros above. valid_o is high
// when any slice completes. Combinational.
module output_selection (
  input  logic [31:0] res32_i,
  input  logic        v32_i,
  input  logic [15:0] res16_i [2],
  input  logic        v16_i   [2],
  input  logic [7:0]  res8_i  [4],
  input  logic        v8_i    [4],
  output logic [31:0] res_o,
  output logic        valid_o
);
  always_comb begin
    logic any16, any8;
    any16 = v16_i[0] | v16_i[1];
    any8  = v8_i[0] | v8_i[1] | v8_i[2] | v8_i[3];
    res_o = '0;
    if (v32_i) begin
      res_o = res32_i;
    end else if (any16) begin
      for (int j = 0; j < 2; j++)
        if (v16_i[j]) res_o[16*j +: 16] = res16_i[j];
    end else if (any8) begin
      for (int k = 0; k < 4; k++)
        if (v8_i[k]) res_o[8*k +: 8] = res8_i[k];
    end
    valid_o = v32_i | any16 | any8;
  end
endmodule
