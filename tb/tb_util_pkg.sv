// tb_util_pkg: reference models shared by the testbenches. It builds the
// expected Ethernet II + IPv4 + UDP frame of a payload byte by byte (fields
// big-endian, IPv4 checksum as the ones'-complement sum of the ten header
// words), generates deterministic payload bytes, and converts between byte
// queues and 64-byte beats (byte 0 in bits [7:0]). It is written separately
// from the RTL so that the RTL is checked against an independent model.
package tb_util_pkg;
  typedef byte unsigned bytes_t[$];

  function automatic byte unsigned pay_byte(int unsigned seed, int unsigned i);
    int unsigned x;
    x = (seed * 32'h9E3779B1) ^ (i * 32'h85EBCA6B) ^ (i >> 3);
    return byte'(x ^ (x >> 13) ^ (x >> 24));
  endfunction

  function automatic bytes_t make_payload(int unsigned seed, int unsigned n);
    bytes_t q;
    for (int unsigned i = 0; i < n; i++) q.push_back(pay_byte(seed, i));
    return q;
  endfunction

  function automatic void push_be(ref bytes_t q, input longint unsigned v, input int n);
    for (int i = n - 1; i >= 0; i--) q.push_back(byte'(v >> (8 * i)));
  endfunction

  function automatic bytes_t make_frame(longint unsigned dmac, longint unsigned smac,
                                        int unsigned sip, int unsigned dip, int unsigned lbuf,
                                        int unsigned seq, bytes_t pay);
    bytes_t q;
    int unsigned words[10];
    int unsigned sum;
    int unsigned iplen;
    iplen = 28 + pay.size();
    words = '{16'h4500, iplen, seq & 16'hFFFF, 16'h4000, 16'h4011,
              0, sip >> 16, sip & 16'hFFFF, dip >> 16, dip & 16'hFFFF};
    sum = 0;
    foreach (words[i]) sum += words[i];
    while (sum >> 16) sum = (sum & 16'hFFFF) + (sum >> 16);
    sum = ~sum & 16'hFFFF;
    push_be(q, dmac, 6);
    push_be(q, smac, 6);
    push_be(q, 16'h0800, 2);
    push_be(q, 8'h45, 1);
    push_be(q, 8'h00, 1);
    push_be(q, iplen, 2);
    push_be(q, seq, 2);
    push_be(q, 16'h4000, 2);
    push_be(q, 8'd64, 1);
    push_be(q, 8'd17, 1);
    push_be(q, sum, 2);
    push_be(q, sip, 4);
    push_be(q, dip, 4);
    push_be(q, lbuf, 2);
    push_be(q, seq, 2);
    push_be(q, 8 + pay.size(), 2);
    push_be(q, 0, 2);
    foreach (pay[i]) q.push_back(pay[i]);
    return q;
  endfunction

  // beat k of a byte queue: data and keep
  function automatic void beat_of(bytes_t q, int unsigned k, output logic [511:0] d,
                                  output logic [63:0] keep);
    d = '0;
    keep = '0;
    for (int unsigned j = 0; j < 64; j++) begin
      if (64 * k + j < q.size()) begin
        d[8*j +: 8] = q[64 * k + j];
        keep[j] = 1'b1;
      end
    end
  endfunction

  function automatic int unsigned nbeats(int unsigned nbytes);
    return (nbytes + 63) / 64;
  endfunction
endpackage
