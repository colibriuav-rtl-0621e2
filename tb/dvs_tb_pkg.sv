// Test-pattern helpers shared by the testbenches of the event-camera path.
//
// ev_byte() gives the event byte of the 2x2 group (x, y) in frame f. Each of
// the four pixels gets 00 (no event), 01 (ON) or 10 (OFF) from a small
// integer hash, so a byte never marks a pixel both ON and OFF. With full = 1
// every pixel carries an event (ON on even pixels, OFF on odd), which gives
// the fully populated 13728-event frame. The counting functions are written
// independently of the RTL (bit by bit over pixel pairs).
package dvs_tb_pkg;

  function automatic int unsigned mix(input int unsigned a);
    int unsigned h;
    h = a * 32'h9E3779B1;
    h = h ^ (h >> 15);
    h = h * 32'h85EBCA77;
    h = h ^ (h >> 13);
    return h;
  endfunction

  function automatic logic [7:0] ev_byte(input int unsigned f, input int unsigned y,
                                         input int unsigned x, input bit full);
    logic [7:0] b;
    int unsigned h;
    b = '0;
    h = mix(f * 65536 + y * 256 + x);
    for (int p = 0; p < 4; p++) begin
      int unsigned v;
      v = full ? ((p % 2) + 1) : ((h >> (4 * p)) % 3);
      b[2*p]   = (v == 1);   // ON
      b[2*p+1] = (v == 2);   // OFF
    end
    return b;
  endfunction

  function automatic int unsigned n_on(input logic [7:0] b);
    int unsigned n = 0;
    for (int p = 0; p < 4; p++) if (b[2*p +: 2] == 2'b01) n++;
    return n;
  endfunction

  function automatic int unsigned n_off(input logic [7:0] b);
    int unsigned n = 0;
    for (int p = 0; p < 4; p++) if (b[2*p +: 2] == 2'b10) n++;
    return n;
  endfunction

endpackage
