// gs_pkg: types and helper functions shared by the Goldschmidt/Mitchell divider.
//
// The controller walks ten states (idle, four iterations of two steps each, and a
// data-out step) and drives a 4-bit one-or-two-hot enable word en[3:0]. The enable
// codes below are the ones of the state diagram; they are the only contract between
// the controller and the datapath blocks.
//
// shift_length_r() is the leading-bit search used by the normalization shifter and
// the auxiliary shifters: it scans a w-bit value from its MSB and returns the number
// of leading zeros plus one (w+1 for a zero value). bit_length() turns that into the
// position of the leading one plus one, the "shift_length" of the multipliers.
// int_width() is the width of the integer part of the internal fixed-point words: one
// bit more than the wider operand magnitude, so that |-2^WIDTH| fits.
package gs_pkg;

  typedef enum logic [3:0] {
    S_IDLE,
    S_ITER1_1, S_ITER1_2,
    S_ITER2_1, S_ITER2_2,
    S_ITER3_1, S_ITER3_2,
    S_ITER4_1, S_ITER4_2,
    S_DATAOUT
  } state_t;

  // Enable codes (en[3:0]).
  localparam logic [3:0] EN_WAIT  = 4'b0001;  // idle, input sign converter armed
  localparam logic [3:0] EN_START = 4'b0000;  // idle, start seen
  localparam logic [3:0] EN_ADD1  = 4'b0011;  // first coefficient step
  localparam logic [3:0] EN_ADD   = 4'b0010;  // coefficient step of iterations 2..4
  localparam logic [3:0] EN_MUL   = 4'b0100;  // multiplier step
  localparam logic [3:0] EN_OUT   = 4'b1000;  // data out

  localparam int MAXW = 256;  // widest value the search functions accept

  function automatic int int_width(input int width_dividend, input int width_divisor);
    return ((width_dividend > width_divisor) ? width_dividend : width_divisor) + 1;
  endfunction

  // Leading zeros of the low w bits of v, plus one.
  function automatic int shift_length_r(input logic [MAXW-1:0] v, input int w);
    int  r;
    bit  once;
    r    = 1;
    once = 1'b1;
    for (int i = MAXW - 1; i >= 0; i--) begin
      if (i < w && once) begin
        if (v[i]) once = 1'b0;
        else      r    = r + 1;
      end
    end
    return r;
  endfunction

  // Index of the leading one plus one (0 for a zero value).
  function automatic int bit_length(input logic [MAXW-1:0] v, input int w);
    return w - shift_length_r(v, w) + 1;
  endfunction

endpackage
