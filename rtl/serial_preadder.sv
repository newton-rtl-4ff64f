// serial_preadder: bit-serial adders forming (X1 + X0) for the Karatsuba
// middle product, one full adder per crossbar row.
//
// The inputs are applied to the crossbar one bit per iteration, LSB first, so
// the sum X1 + X0 of the two input halves can be produced the same way: in
// step t the adder of row r outputs a[r] ^ b[r] ^ carry[r] and keeps the
// carry for step t+1. After the last data bit one more step (with a = b = 0)
// outputs the final carry, giving the 9th bit of the 9-bit sum. `clear` resets
// all carries before a new sum; `step` advances them. The 128 one-bit adders
// follow the paper; clear/step control is this design's own.
module serial_preadder #(
  parameter int unsigned N = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         step,
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] s
);
  logic [N-1:0] carry;

  assign s = a ^ b ^ carry;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     carry <= '0;
    else if (clear) carry <= '0;
    else if (step)  carry <= (a & b) | (a & carry) | (b & carry);
  end
endmodule
