// rome_tb_pkg: helpers shared by the RoMe testbenches.
//
// beat_data() is the data pattern the testbenches write and expect back: a
// 512-bit beat built from a 32-bit seed and the beat number by a simple
// xorshift, so every beat of every request differs. init_data() is what the
// DRAM model returns from a location never written.
package rome_tb_pkg;
  import rome_pkg::*;

  function automatic logic [31:0] mix(input logic [31:0] x);
    logic [31:0] y = x ^ 32'h9E37_79B9;
    y = y ^ (y << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  function automatic logic [CH_DW-1:0] beat_data(input logic [31:0] seed, input int beat);
    logic [CH_DW-1:0] d;
    logic [31:0]      s = mix(seed ^ (32'(beat) << 24) ^ 32'(beat));
    for (int i = 0; i < CH_DW / 32; i++) begin
      s = mix(s + 32'(i));
      d[i*32 +: 32] = s;
    end
    return d;
  endfunction

  function automatic logic [PC_DW-1:0] init_data(input logic [31:0] key, input int pc);
    logic [CH_DW-1:0] d = beat_data(key ^ 32'hA5A5_0000, pc);
    return d[PC_DW-1:0];
  endfunction
endpackage
