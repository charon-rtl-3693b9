// tb_model_pkg: reference models used by the testbenches, written apart from
// the RTL: the predicted score with 64-bit integer arithmetic, the table
// entry as three separate fields, and a byte-at-a-time CRC.
package tb_model_pkg;

  typedef struct {
    longint unsigned g;   // 32-bit score
    longint unsigned t;   // 32-bit timestamp
    longint unsigned v;   // 8-bit velocity
  } entry_t;

  // max(0, g - v*(now - t)), elapsed time taken modulo 2^32
  function automatic longint unsigned model_score(entry_t e, longint unsigned now);
    longint unsigned dt, drained;
    dt      = (now - e.t) & 64'hFFFF_FFFF;
    drained = e.v * dt;
    return (drained >= e.g) ? 0 : e.g - drained;
  endfunction

  function automatic logic [71:0] pack(entry_t e);
    return {e.g[31:0], e.t[31:0], e.v[7:0]};
  endfunction

  function automatic entry_t unpack(logic [71:0] b);
    entry_t e;
    e.g = 64'(b[71:40]);
    e.t = 64'(b[39:8]);
    e.v = 64'(b[7:0]);
    return e;
  endfunction

  // CRC, MSB first, init all ones, no final xor, processed a byte at a time
  function automatic logic [31:0] crc_bytes(logic [31:0] poly, byte unsigned msg[]);
    logic [31:0] c = 32'hFFFF_FFFF;
    foreach (msg[i]) begin
      c ^= {msg[i], 24'h0};
      for (int b = 0; b < 8; b++) c = c[31] ? ((c << 1) ^ poly) : (c << 1);
    end
    return c;
  endfunction

endpackage
