// Reference arithmetic for the testbenches: the 8/16-bit fixed-point LSTM operations written
// with plain integers and real-valued activation functions, independent of the RTL.
// Values: 8-bit numbers carry 5 fractional bits, accumulators 10.
package lstm_ref_pkg;
  localparam int F = 5;

  function automatic int sat(input int v, input int lo, input int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  function automatic int add16(input int a, input int b);
    return sat(a + b, -32768, 32767);
  endfunction

  function automatic int q8(input int acc);
    return sat(acc >>> F, -128, 127);
  endfunction

  function automatic int rnd(input real v);
    return sat($rtoi($floor(v * 32.0 + 0.5)), -128, 127);
  endfunction

  function automatic int sigm(input int v);
    return rnd(1.0 / (1.0 + $exp(-real'(v) / 32.0)));
  endfunction

  function automatic int tanh_(input int v);
    return rnd($tanh(real'(v) / 32.0));
  endfunction

  function automatic int s8(input logic [7:0] b);
    return int'($signed(b));
  endfunction
endpackage
