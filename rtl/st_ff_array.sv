// st_ff_array: flip-flop storage of the pilot matrix S_T (8 UEs x 16 pilots).
//
// One row per pilot symbol t (16 rows of 8 x 16b = 128b, as the ST FF array
// is sized), written one row per cycle through the load port. The read side
// presents the whole row of pilot t = rd_t to the PE array, where entry k is
// broadcast down PE column k during channel estimation and the pilot-phase
// error computation. Write port synchronous, read port combinational; no
// reset (every row is written before it is read).
//
// The size follows the design description; the load port is this design's.
module st_ff_array
  import sandman_pkg::*;
(
  input  logic               clk,
  input  logic               we,
  input  logic [3:0]         wr_t,
  input  cst_t [K_UE-1:0]    wr_row,
  input  logic [3:0]         rd_t,
  output cst_t [K_UE-1:0]    rd_row
);
  cst_t [K_UE-1:0] mem [T_PIL];

  always_ff @(posedge clk)
    if (we) mem[wr_t] <= wr_row;

  assign rd_row = mem[rd_t];
endmodule
