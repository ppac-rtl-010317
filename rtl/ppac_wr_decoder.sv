// ppac_wr_decoder: row address decoder of the PPAC array.
//
// It demultiplexes a write strobe onto the row selected by addr, giving one
// enable per row. In the design this drives the clock gates of the row
// memories (strobe wrEn) ; the same decoder is used here a second time to
// route the threshold write weD to the row addressed, which is this design's
// choice. Purely combinational.
module ppac_wr_decoder #(
  parameter int unsigned M = 256
) (
  input  logic [$clog2(M)-1:0] addr,
  input  logic                 en,
  output logic [M-1:0]         row_en
);
  always_comb begin
    row_en = '0;
    for (int i = 0; i < M; i++) row_en[i] = en && (addr == $clog2(M)'(i));
  end
endmodule
