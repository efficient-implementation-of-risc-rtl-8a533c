// cs_count8: 8-input carry-save counter cell.
//
// Counts the ones among 8 bits with three full adders and one half adder and
// returns the count as two 3-bit rows, row_a + row_b = number of ones, with
// no carry propagation:
//   FA1 adds bits 7, 6, 5; FA2 adds bits 4, 3, 2;
//   FA3 adds the FA1 sum with bits 1 and 0;
//   HA  adds the FA1 and FA2 carries (both of weight 2).
//   row_a = {0,       HA sum,    FA3 sum}
//   row_b = {HA carry, FA3 carry, FA2 sum}
// This is the counting cell of the paper, copied from its 8-input figure;
// cs_counter uses it for every group of eight bits. Purely combinational.
module cs_count8 (
  input  logic [7:0] bits,
  output logic [2:0] row_a,
  output logic [2:0] row_b
);

  logic fa1_s, fa1_c, fa2_s, fa2_c, fa3_s, fa3_c, ha_s, ha_c;

  always_comb begin
    fa1_s = bits[7] ^ bits[6] ^ bits[5];
    fa1_c = (bits[7] & bits[6]) | (bits[7] & bits[5]) | (bits[6] & bits[5]);
    fa2_s = bits[4] ^ bits[3] ^ bits[2];
    fa2_c = (bits[4] & bits[3]) | (bits[4] & bits[2]) | (bits[3] & bits[2]);
    fa3_s = fa1_s ^ bits[1] ^ bits[0];
    fa3_c = (fa1_s & bits[1]) | (fa1_s & bits[0]) | (bits[1] & bits[0]);
    ha_s  = fa1_c ^ fa2_c;
    ha_c  = fa1_c & fa2_c;
    row_a = {1'b0, ha_s, fa3_s};
    row_b = {ha_c, fa3_c, fa2_s};
  end

endmodule
