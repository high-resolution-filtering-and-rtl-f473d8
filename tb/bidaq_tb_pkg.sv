// bidaq_tb_pkg: reference functions shared by the testbenches.
//
// adc_value gives the conversion result the ADC model returns for a given
// ADC, channel and conversion index; the checkers use the same function to
// know what each sample must contain. It is a simple integer hash, so every
// sample of every channel differs.
package bidaq_tb_pkg;
  function automatic logic [23:0] adc_value(int unsigned id, int unsigned ch, int unsigned n);
    logic [31:0] x;
    x = (id * 32'h0100_0193) ^ (ch * 32'h9E37_79B9) ^ (n * 32'h85EB_CA6B) ^ 32'h1234_5678;
    x = x ^ (x >> 13);
    x = x * 32'hC2B2_AE35;
    x = x ^ (x >> 16);
    return x[23:0];
  endfunction
endpackage
