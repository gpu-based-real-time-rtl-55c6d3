// tb_pkt_pkg: frame and fragment builders shared by the testbenches.
//
// eth_udp_frame() builds the bytes of an Ethernet II / IPv4 / UDP frame
// (without preamble and FCS, as a MAC delivers them), padded to the 60-byte
// Ethernet minimum. frag_bytes() builds one event fragment in the format
// frag_rx expects (src_last is the last byte of the sender's IP address): big-endian timestamp, hit count, hit words.
package tb_pkt_pkg;
  typedef byte unsigned bytes_t[$];

  function automatic bytes_t eth_udp_frame(input bytes_t payload,
                                           input logic [15:0] dport,
                                           input logic [15:0] ethertype = 16'h0800,
                                           input logic [7:0]  proto     = 8'd17,
                                           input logic [7:0]  verihl    = 8'h45,
                                           input logic [7:0]  src_last  = 8'd10);
    bytes_t f;
    int unsigned ulen = payload.size() + 8;
    int unsigned iplen = ulen + 20;
    // destination and source MAC
    for (int i = 0; i < 6; i++) f.push_back(8'h02);
    for (int i = 0; i < 6; i++) f.push_back(8'h10 + 8'(i));
    f.push_back(ethertype[15:8]); f.push_back(ethertype[7:0]);
    // IPv4 header
    f.push_back(verihl); f.push_back(8'h00);
    f.push_back(8'(iplen >> 8)); f.push_back(8'(iplen));
    f.push_back(8'h12); f.push_back(8'h34); f.push_back(8'h40); f.push_back(8'h00);
    f.push_back(8'd64); f.push_back(proto);
    f.push_back(8'h00); f.push_back(8'h00);                 // checksum not checked
    f.push_back(8'd192); f.push_back(8'd168); f.push_back(8'd1); f.push_back(src_last);
    f.push_back(8'd192); f.push_back(8'd168); f.push_back(8'd1); f.push_back(8'd1);
    // UDP header
    f.push_back(8'hC3); f.push_back(8'h50);
    f.push_back(dport[15:8]); f.push_back(dport[7:0]);
    f.push_back(8'(ulen >> 8)); f.push_back(8'(ulen));
    f.push_back(8'h00); f.push_back(8'h00);
    foreach (payload[i]) f.push_back(payload[i]);
    while (f.size() < 60) f.push_back(8'h00);
    return f;
  endfunction

  function automatic void push_word(ref bytes_t q, input logic [31:0] w);
    q.push_back(w[31:24]); q.push_back(w[23:16]); q.push_back(w[15:8]); q.push_back(w[7:0]);
  endfunction

  // Hit word of board `b`, hit `k` of the fragment with timestamp `ts`.
  function automatic logic [31:0] hit_word(input int b, input logic [31:0] ts, input int k);
    return {4'(b), 12'(ts), 16'(k * 7 + 3)};
  endfunction

  function automatic bytes_t frag_bytes(input int b, input logic [31:0] ts, input int nhits);
    bytes_t q;
    push_word(q, ts);
    push_word(q, 32'(nhits));
    for (int k = 0; k < nhits; k++) push_word(q, hit_word(b, ts, k));
    return q;
  endfunction
endpackage
