// beta_rom -- block index / block shift tables of the base matrix.
//
// For layer `layer` and position `pos` it returns the block column (beta_I),
// the cyclic shift (beta_S) and a `last` flag of the pos-th valid block of
// that base-matrix row, plus the layer degree `dc` (number of valid
// blocks). Zero blocks of the base matrix are skipped, so the decoder
// spends one cycle per valid block only; keeping the base matrix as these
// two compact tables follows the paper. The tables are derived from the
// base matrix in ldpc_pkg by a scan that synthesis folds into a ROM.
// Purely combinational; an out-of-range pos returns col = 0, shift = 0.
module beta_rom
  import ldpc_pkg::*;
(
  input  logic [LAYER_W-1:0] layer,
  input  logic [POS_W-1:0]   pos,
  output beta_t              entry,
  output logic [POS_W:0]     dc
);
  always_comb begin
    int unsigned k;
    entry = '0;
    k     = 0;
    dc    = '0;
    for (int r = 0; r < MB; r++) begin
      if (layer == LAYER_W'(r)) begin
        for (int c = 0; c < NB; c++) begin
          if (HB[r][c] >= 0) begin
            if (pos == POS_W'(k)) begin
              entry.col   = COL_W'(c);
              entry.shift = SHIFT_W'(HB[r][c]);
            end
            k = k + 1;
          end
        end
        dc = (POS_W+1)'(k);
      end
    end
    entry.last = ({1'b0, pos} == dc - 1'b1);
  end
endmodule
