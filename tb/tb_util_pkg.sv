// tb_util_pkg: helpers shared by the testbenches.
//
// Builds 48-bit command words and event-table words in the layout of rf_pkg, and gives
// the reference value of the coherent phase word, computed with 64-bit arithmetic
// independently of phase_tracker.
package tb_util_pkg;
  import rf_pkg::*;

  function automatic logic [47:0] mk_word(input logic [3:0] slot, input logic all_ch,
                                          input logic [1:0] ch, input logic [1:0] sel,
                                          input logic [6:0] addr, input logic [31:0] data);
    return {slot, all_ch, ch, sel, addr, data};
  endfunction

  function automatic logic [31:0] evt_word(input int w, input logic [31:0] ftw,
                                           input logic [13:0] asf, input logic [15:0] pow,
                                           input logic [31:0] wait_cyc, input logic [13:0] vga,
                                           input logic shaped, input logic spi, input logic ttl);
    case (w)
      0: return ftw;
      1: return {2'b00, asf, pow};
      2: return wait_cyc;
      default: return {13'b0, ttl, spi, shaped, 2'b00, vga};
    endcase
  endfunction

  function automatic logic [31:0] seq_word(input logic [1:0] op, input int count, input int idx);
    return {op, 22'(count), 8'(idx)};
  endfunction

  // phase word for tuning word ftw at sequence time t (sequencer clocks), 8 DDS clocks each
  function automatic logic [15:0] exp_pow(input logic [31:0] ftw, input longint unsigned t,
                                          input logic [15:0] off);
    longint unsigned p;
    p = (longint'(ftw) * ((t * 8) % 64'h1_0000_0000)) % 64'h1_0000_0000;
    return 16'(p >> 16) + off;
  endfunction
endpackage
