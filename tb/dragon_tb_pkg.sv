// dragon_tb_pkg: helpers shared by the Dragon testbenches.
//
// drs_cell_value() is the voltage (as an ADC code) that the behavioural
// DRS4 model holds in cell `pos` of lane `lane` for event number `ev`; the
// testbenches use the same formula to work out what the readout must
// deliver, independently of the logic under test.
package dragon_tb_pkg;
  function automatic logic [11:0] drs_cell_value(int lane, int pos, int ev);
    return 12'((lane * 257 + pos * 5 + ev * 41 + 17) ^ (pos >> 3));
  endfunction
endpackage
