// Shift-and-add stage of an ADC-less crossbar.
//
// Turns the per-column SA bits into one signed partial sum (PS) per output
// neuron.  With 1-bit cells each of the NB_W=4 weight bits sits in its own
// column; the SA result of bit column i is weighted by 2^i.
//
//  MAP_ROWPAIR: columns j*4+i, i=0..3 (bit i of neuron j).  Each column
//     gives +1 (sa_hi), -1 (sa_lo) or 0:  PS_j = sum_i 2^i * sign_i.
//  MAP_COLPAIR: columns j*8+i are the positive magnitude bits, columns
//     j*8+4+i the negative ones, each giving h = 0/1:
//     PS_j = sum_i 2^i * h_pos_i - sum_i 2^i * h_neg_i.
//
// PS_j lies in [-15, 15].  Purely combinational.
// Follows the published design (the two mapping schemes, the sign and
// Heaviside SA functions, the 2^i weighting and the positive-minus-negative
// subtraction).  Own choice: the order of the columns (LSB first, positive
// group before negative group).
module shift_add
  import adcless_pkg::*;
#(
  parameter map_scheme_e MAP_SCHEME = MAP_COLPAIR,
  parameter int unsigned N_NEURON   = 8,
  localparam int unsigned COLS      = N_NEURON * cols_per_weight(MAP_SCHEME)
) (
  input  logic [COLS-1:0]                  sa_hi,
  input  logic [COLS-1:0]                  sa_lo,
  output logic signed [PS_XB_W-1:0]        ps [N_NEURON]
);

  localparam int unsigned CPW = cols_per_weight(MAP_SCHEME);

  always_comb begin
    for (int unsigned j = 0; j < N_NEURON; j++) begin
      logic signed [PS_XB_W-1:0] acc;
      acc = '0;
      for (int unsigned i = 0; i < NB_W; i++) begin
        if (MAP_SCHEME == MAP_ROWPAIR) begin
          if (sa_hi[j*CPW+i]) acc = acc + PS_XB_W'(1 << i);
          if (sa_lo[j*CPW+i]) acc = acc - PS_XB_W'(1 << i);
        end else begin
          if (sa_hi[j*CPW+i])      acc = acc + PS_XB_W'(1 << i);
          if (sa_hi[j*CPW+NB_W+i]) acc = acc - PS_XB_W'(1 << i);
        end
      end
      ps[j] = acc;
    end
  end

endmodule
