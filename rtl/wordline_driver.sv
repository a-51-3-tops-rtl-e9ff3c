// wordline_driver -- global word-line multiplexer and local word-line drivers.
//
// Per row, the GWL mux passes the decoded row bus gwl outside filter mode and
// the filter row bus wl in filter mode (its select is the Filter signal). Each
// of the NB banks then has a local word-line driver that raises a row of the
// bank only while the bank's select bs[b] is high. The result wl_local[b][r] is
// the word line seen by the 15 columns of bank b. Purely combinational.
// The mux and its Filter select, the local drivers and the bank selects are the
// paper's; their logic-level form here is the plain reading of that function.
module wordline_driver
  import imf_pkg::*;
#(
  parameter int unsigned H  = IMF_H,
  parameter int unsigned NB = NBANK
) (
  input  logic [H-1:0]           gwl,
  input  logic [H-1:0]           wl,
  input  logic                   filter,
  input  logic [NB-1:0]          bs,
  output logic [NB-1:0][H-1:0]   wl_local
);
  logic [H-1:0] row_wl;

  always_comb begin
    row_wl = filter ? wl : gwl;
    for (int unsigned b = 0; b < NB; b++)
      wl_local[b] = bs[b] ? row_wl : '0;
  end
endmodule
