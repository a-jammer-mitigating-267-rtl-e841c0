// x_shift_reg: pseudorandom +-1 vector x for the power iteration of SANDMAN.
//
// A 32-bit circular shift register, one bit per BS antenna: bit m = 1 means
// x(m) = +1, bit m = 0 means x(m) = -1. A seed is loaded with `load`; every
// `shift` rotates the register by one position (bit m takes bit m-1, bit 0
// takes bit 31) so that each algorithm iteration sees a different x.
//
// The circular shift register and its 32b size follow the design
// description; the load port, the seed value and the bit-to-sign encoding
// are this design's own choices. Reset loads SEED.
module x_shift_reg #(
  parameter int          N    = 32,
  parameter logic [31:0] SEED = 32'hB4E1_6C3A
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [N-1:0] seed,
  input  logic         shift,
  output logic [N-1:0] x
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     x <= SEED[N-1:0];
    else if (load)  x <= seed;
    else if (shift) x <= {x[N-2:0], x[N-1]};
  end
endmodule
