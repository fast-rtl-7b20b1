// row_decoder: the conventional wordline decoder of the FAST array.
//
// Turns a row address into a one-hot wordline vector while en is high; all
// wordlines are low otherwise. Combinational: the wordline follows the address
// in the same cycle. An address at or above ROWS selects no row. The decoder
// itself is the same as in an ordinary SRAM; its logic form here is the
// simplest that does the job.
module row_decoder #(
  parameter int ROWS   = 128,
  localparam int ADDR_W = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              en,
  input  logic [ADDR_W-1:0] addr,
  output logic [ROWS-1:0]   wl
);

  always_comb begin
    wl = '0;
    for (int r = 0; r < ROWS; r++) begin
      if (en && addr == ADDR_W'(r)) wl[r] = 1'b1;
    end
  end

  always_comb begin
    assert ($onehot0(wl)) else $error("row_decoder: more than one wordline");
  end

endmodule
