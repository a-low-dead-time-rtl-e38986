// lut_popcount6: number of ones in six raw-data bits, 0..6, as a 3-bit value.
//
// This is the function of one 6-input LUT group of the pre-encoded cell
// (three LUT6 outputs, one per result bit, in a Xilinx 7-series device).
// Purely combinational; no clock.
module lut_popcount6 (
  input  logic [5:0] bits_i,
  output logic [2:0] count_o
);
  always_comb begin
    count_o = '0;
    for (int i = 0; i < 6; i++) count_o = count_o + 3'(bits_i[i]);
  end
endmodule
