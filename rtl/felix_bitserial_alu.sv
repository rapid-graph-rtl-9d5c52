// felix_bitserial_alu: one bit-slice of FELIX-style in-memory arithmetic for
// LANES bitlines of a PCM unit.
//
// Each call processes one bit position of LANES independent words, LSB first.
// Addition: S = A ^ B ^ Cin, Cout = Maj(A,B,Cin). Subtraction (used as the
// min-comparison): B is inverted and the carry starts at 1, so that after the
// MSB the sum bit is the sign of A - B. The majority is formed as the
// complement of the minority primitive, and the XORs are the two-input XOR
// primitive, following the primitive set of the paper's PCM array.
// The carry row (Temp_Carry) is held in this module between bit positions.
//
// Interface: 'en' advances one bit position; 'first' marks the LSB (carry
// starts at 0 for add, 1 for subtract); 'sum' and 'carry_next' are
// combinational from a, b and the held carry. One bit position per cycle is
// this design's assumption: the paper gives the cycle count of each
// primitive but not of the composed full-adder step.
module felix_bitserial_alu #(
  parameter int unsigned LANES = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             first,
  input  logic             sub,
  input  logic [LANES-1:0] a,
  input  logic [LANES-1:0] b,
  output logic [LANES-1:0] sum,
  output logic [LANES-1:0] carry_next
);

  logic [LANES-1:0] carry_q;    // Temp_Carry row
  logic [LANES-1:0] cin, bb, axb, minority;

  always_comb begin
    cin        = first ? {LANES{sub}} : carry_q;
    bb         = sub ? ~b : b;
    axb        = a ^ bb;                                   // XOR primitive
    sum        = axb ^ cin;                                // XOR primitive
    minority   = ~((a & bb) | (a & cin) | (bb & cin));     // minority primitive
    carry_next = ~minority;                                // NOT primitive
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  carry_q <= '0;
    else if (en) carry_q <= carry_next;
  end

endmodule
