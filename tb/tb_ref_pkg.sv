// tb_ref_pkg - reference arithmetic for the testbenches, written apart from
// the RTL: plain integer arithmetic on longint, no RTL types or functions.
//
// ref_neuron(x, w, b, relu) gives one neuron's output in the activation format
// (signed 16 bits, 8 fraction bits) from activations x, weights and bias w, b
// (signed 16 bits, 12 fraction bits): sum = b * 2^8 + sum x*w, shifted right
// by 12 with floor rounding, clipped at zero for ReLU, saturated to 16 bits.
package tb_ref_pkg;

  function automatic longint ref_requant(input longint sum, input bit relu);
    longint s;
    // floor division by 4096 (arithmetic shift semantics)
    if (sum >= 0) s = sum / 4096;
    else          s = -((-sum + 4095) / 4096);
    if (relu && s < 0) s = 0;
    if (s > 32767)  s = 32767;
    if (s < -32768) s = -32768;
    return s;
  endfunction

  // ADC code (18-bit signed) to activation: floor(code / 4)
  function automatic longint ref_adc(input longint code);
    if (code >= 0) return code / 4;
    return -((-code + 3) / 4);
  endfunction

endpackage
