// tb_pkt_pkg: builds Test-Jig command packets for the testbenches.
//
// Written from the packet layout documented in tj_pkg, without using its
// constants, so that a wrong constant in the design shows up as a failure:
//   AA 55 | Size(16) | Command ID | fields (big-endian) | R_Ack | Checksum | 55 AA
// Event: X(32) Z(128) U(32) W(16) T(16); Monitoring: Y(16) Z(128) W(16);
// Cross talk: X(16) D(16) W(16). Checksum = 8-bit sum of all earlier bytes.
package tb_pkt_pkg;

  typedef byte unsigned bytes_t[$];

  function automatic void put(ref bytes_t q, input logic [127:0] v, input int nbytes);
    for (int i = nbytes - 1; i >= 0; i--) q.push_back(v[8*i +: 8]);
  endfunction

  // Wraps a body (Command ID, fields, R_Ack) into a full packet.
  function automatic bytes_t frame(input bytes_t body);
    bytes_t q;
    byte unsigned s;
    int len;
    len = body.size() + 7;
    q = {8'hAA, 8'h55, 8'(len >> 8), 8'(len)};
    foreach (body[i]) q.push_back(body[i]);
    s = 0;
    foreach (q[i]) s += q[i];
    q.push_back(s);
    q.push_back(8'h55);
    q.push_back(8'hAA);
    return q;
  endfunction

  function automatic bytes_t event_pkt(input logic [31:0] x, input logic [127:0] z,
                                       input logic [31:0] u, input logic [15:0] w,
                                       input logic [15:0] t, input bit rack);
    bytes_t b;
    b.push_back(8'h01);
    put(b, 128'(x), 4);
    put(b, z, 16);
    put(b, 128'(u), 4);
    put(b, 128'(w), 2);
    put(b, 128'(t), 2);
    b.push_back(rack ? 8'h01 : 8'h00);
    return frame(b);
  endfunction

  function automatic bytes_t mon_pkt(input logic [15:0] y, input logic [127:0] z,
                                     input logic [15:0] w, input bit rack);
    bytes_t b;
    b.push_back(8'h02);
    put(b, 128'(y), 2);
    put(b, z, 16);
    put(b, 128'(w), 2);
    b.push_back(rack ? 8'h01 : 8'h00);
    return frame(b);
  endfunction

  function automatic bytes_t xtalk_pkt(input logic [15:0] x, input logic [15:0] d,
                                       input logic [15:0] w, input bit rack);
    bytes_t b;
    b.push_back(8'h03);
    put(b, 128'(x), 2);
    put(b, 128'(d), 2);
    put(b, 128'(w), 2);
    b.push_back(rack ? 8'h01 : 8'h00);
    return frame(b);
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom(), $urandom(), $urandom(), $urandom()};
  endfunction

endpackage
