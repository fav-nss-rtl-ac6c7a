// can_tb_pkg -- reference model of CAN 2.0A framing for the testbenches.
//
// Builds the exact bit sequence a standard-format frame puts on the bus:
// the unstuffed SOF..data bits are collected in an array, the CRC-15 is
// computed by long division of that array by the generator polynomial
// x^15+x^14+x^10+x^8+x^7+x^4+x^3+1, stuff bits are inserted after every five
// equal bits from SOF to the end of the CRC, and the recessive tail (CRC
// delimiter, ACK slot, ACK delimiter, 7 EOF bits) is appended.  The ACK slot
// is returned recessive; the receiver overwrites it on the bus.
package can_tb_pkg;
  import fav_pkg::*;

  typedef bit bitq_t[$];

  function automatic bitq_t unstuffed_bits(can_frame_t f);
    bitq_t b;
    int n;
    b.push_back(1'b0);
    for (int i = 10; i >= 0; i--) b.push_back(f.id[i]);
    b.push_back(f.rtr);
    b.push_back(1'b0);
    b.push_back(1'b0);
    for (int i = 3; i >= 0; i--) b.push_back(f.dlc[i]);
    n = f.rtr ? 0 : ((f.dlc > 8) ? 8 : int'(f.dlc));
    for (int i = 0; i < 8 * n; i++) b.push_back(f.data[63 - i]);
    return b;
  endfunction

  // CRC as remainder of (message * x^15) modulo the generator.
  function automatic bit [14:0] crc_of(bitq_t m);
    bit [15:0] g = 16'hC599;   // generator including x^15
    bit r[$];
    bit [14:0] c;
    r = m;
    for (int i = 0; i < 15; i++) r.push_back(1'b0);
    for (int i = 0; i + 15 < r.size(); i++)
      if (r[i]) for (int k = 0; k < 16; k++) r[i + k] = r[i + k] ^ g[15 - k];
    for (int k = 0; k < 15; k++) c[14 - k] = r[r.size() - 15 + k];
    return c;
  endfunction

  // Full on-bus bit sequence of a frame (stuffed, with tail).
  function automatic bitq_t bus_bits(can_frame_t f);
    bitq_t u, s;
    bit [14:0] c;
    int run;
    bit last;
    u = unstuffed_bits(f);
    c = crc_of(u);
    for (int i = 14; i >= 0; i--) u.push_back(c[i]);
    run = 0;
    last = 1'b1;
    foreach (u[i]) begin
      s.push_back(u[i]);
      if (u[i] == last) run++; else begin run = 1; last = u[i]; end
      if (run == 5) begin
        s.push_back(~last);
        last = ~last;
        run = 1;
      end
    end
    for (int i = 0; i < 10; i++) s.push_back(1'b1);
    return s;
  endfunction

  function automatic can_frame_t rand_frame();
    can_frame_t f;
    f.id   = 11'($urandom);
    f.rtr  = ($urandom_range(0, 9) == 0);
    f.dlc  = 4'($urandom_range(0, 9));
    f.data = {$urandom, $urandom};
    return f;
  endfunction

  // Payload as the receiver reports it: bytes beyond DLC zero, none for RTR.
  function automatic can_frame_t expected_rx(can_frame_t f);
    can_frame_t e = f;
    int n = f.rtr ? 0 : ((f.dlc > 8) ? 8 : int'(f.dlc));
    for (int i = 0; i < 64; i++) if (i >= 8 * n) e.data[63 - i] = 1'b0;
    return e;
  endfunction
endpackage
