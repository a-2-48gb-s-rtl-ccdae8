// qc_rotator -- cyclic shifter between the posterior memory and the node
// processors.
//
// A valid z x z block of H is an identity matrix cyclically shifted right by
// s: check row r of the block is connected to variable lane (r + s) mod z.
// With DIR = 0 (read side) the rotator aligns a stored block to the check
// rows: out[r] = in[(r + s) mod z]. With DIR = 1 (write side) it undoes
// that: out[(r + s) mod z] = in[r]. Lanes are W bits wide.
// Built as a logarithmic barrel shifter: stage k rotates by 2^k mod z when
// bit k of the shift is set; rotations add modulo z, so any s < z works
// even though z = 81 is not a power of two. Purely combinational,
// SW stages of z two-way multiplexers.
module qc_rotator #(
  parameter int unsigned Z   = 81,
  parameter int unsigned W   = 12,
  parameter int unsigned SW  = 7,
  parameter bit          DIR = 1'b0
) (
  input  logic [SW-1:0] shift,
  input  logic [W-1:0]  din  [Z],
  output logic [W-1:0]  dout [Z]
);
  logic [W-1:0] stage [SW+1][Z];

  always_comb begin
    for (int r = 0; r < Z; r++) stage[0][r] = din[r];
    for (int k = 0; k < SW; k++) begin
      for (int r = 0; r < Z; r++) begin
        if (!shift[k])       stage[k+1][r] = stage[k][r];
        else if (DIR == 1'b0) stage[k+1][r] = stage[k][(r + (1 << k)) % Z];
        else                 stage[k+1][r] = stage[k][(r + Z - ((1 << k) % Z)) % Z];
      end
    end
    for (int r = 0; r < Z; r++) dout[r] = stage[SW][r];
  end
endmodule
