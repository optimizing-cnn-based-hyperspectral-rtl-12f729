// requant: turns an accumulator into a stored 16-bit feature.
//
// The accumulator holds Q.2FRAC values (sums of Q8.8 x Q8.8 products plus a
// bias shifted up by FRAC). The value is arithmetically shifted right by FRAC
// (truncation toward minus infinity), clipped to the 16-bit range and, when
// relu is set, negative results become zero. Purely combinational.
// The paper fixes the 16-bit fixed-point format and ReLU after every layer;
// truncation and saturation are this design's choices.
module requant
  import hsi_pkg::*;
(
  input  acc_t  acc,
  input  logic  relu,
  output data_t q
);
  acc_t s;
  always_comb begin
    s = acc >>> FRAC;
    if (relu && s[ACC_W-1])               q = '0;
    else if (s > acc_t'(32767))           q = data_t'(16'sh7fff);
    else if (s < acc_t'(-32768))          q = data_t'(16'sh8000);
    else                                  q = data_t'(s[DATA_W-1:0]);
  end
endmodule
