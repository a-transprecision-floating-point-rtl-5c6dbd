// fp_fp_conv: bidirectional cast between floating-point formats A and B.
//
// One conversion unit of a slice: with b2a_i = 0 it converts the format-A
// value in the low EA+MA+1 bits of op_i into format B; with b2a_i = 1 it
// converts the format-B value in the low EB+MB+1 bits of op_i into format A.
// The result is right-aligned in res_o and zero-extended to WIDTH bits.
// Each direction is an fp_to_fp instance; whether the vendor block the
// design was built from shares logic between directions is not known, so
// two plain converters are used. Combinational (one clock of latency once
// the unit's output register is counted, as the paper gives for all casts).
module fp_fp_conv #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned EA    = 8,
  parameter int unsigned MA    = 23,
  parameter int unsigned EB    = 5,
  parameter int unsigned MB    = 10
) (
  input  logic             b2a_i,
  input  logic [WIDTH-1:0] op_i,
  output logic [WIDTH-1:0] res_o
);
  logic [EB+MB:0] a2b;
  logic [EA+MA:0] b2a;

  fp_to_fp #(.EI(EA), .MI(MA), .EO(EB), .MO(MB)) u_a2b (
    .a_i (op_i[EA+MA:0]), .res_o (a2b));
  fp_to_fp #(.EI(EB), .MI(MB), .EO(EA), .MO(MA)) u_b2a (
    .a_i (op_i[EB+MB:0]), .res_o (b2a));

  assign res_o = b2a_i ? WIDTH'(b2a) : WIDTH'(a2b);
endmodule
