// s_ff_array: flip-flop storage of the data-symbol estimates S~_D
// (8 UEs x 48 data symbols x 20b = 8 rows of 960b, as the S FF array is
// sized). Each 20b entry holds either a complex estimate (10b + 10b) or,
// after the soft-output pass, four 5b LLRs.
//
// `clr` zeroes all entries (the initial estimate of a block). Write port:
// one whole column (all 8 UEs of data symbol wr_n) per cycle, which is how
// the gradient step and the LLR units produce results. Read: one column
// rd_n per cycle for the array, plus a second read port for the host.
// Writes take effect at the next clock edge; reads are combinational.
//
// The size and dual use (estimates, then LLRs) follow the design
// description; the port structure and the all-zero start are this design's
// choices.
module s_ff_array
  import sandman_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   we,
  input  logic [5:0]             wr_n,
  input  logic [K_UE-1:0][19:0]  wr_col,
  input  logic [5:0]             rd_n,
  output logic [K_UE-1:0][19:0]  rd_col,
  input  logic [5:0]             host_n,
  output logic [K_UE-1:0][19:0]  host_col
);
  logic [K_UE-1:0][19:0] mem [D_DAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < D_DAT; n++) mem[n] <= '0;
    end else if (clr) begin
      for (int n = 0; n < D_DAT; n++) mem[n] <= '0;
    end else if (we && wr_n < 6'(D_DAT)) begin
      mem[wr_n] <= wr_col;
    end
  end

  assign rd_col   = (rd_n   < 6'(D_DAT)) ? mem[rd_n]   : '0;
  assign host_col = (host_n < 6'(D_DAT)) ? mem[host_n] : '0;
endmodule
