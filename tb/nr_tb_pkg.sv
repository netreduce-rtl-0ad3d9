// nr_tb_pkg: frame building and parsing helpers shared by the testbenches.
//
// Frames are built byte by byte (Ethernet / IPv4 / UDP port 4791 / BTH, plus
// the 16-byte NetReduce header on first packets) and cut into 64-byte beats
// the way the accelerator expects them. Gradient values are a fixed hash of
// (ring, host, message, packet offset, word index), so a checker can work out
// any expected sum on its own.
package nr_tb_pkg;
  import nr_pkg::*;

  typedef logic [7:0] byte_q_t [$];
  typedef beat_t      beat_q_t [$];

  function automatic logic [31:0] grad(input int ring, input int host, input int msg,
                                       input int off, input int idx);
    return 32'(ring * 7919 + host * 104729 + msg * 1299709 + off * 15485863) ^
           32'(idx * 32'h9E37_79B9 + host * 17 + 3);
  endfunction

  function automatic logic [47:0] host_mac(input int ring, input int host);
    return 48'h02_00_00_00_00_00 | (48'(ring) << 8) | 48'(host);
  endfunction
  function automatic logic [31:0] host_ip(input int ring, input int host);
    return {8'd10, 8'd0, 8'(ring), 8'(host)};
  endfunction

  // RoCE v2 frame. first=1 adds the NetReduce header; nwords 32-bit words of
  // payload are taken from pay[].
  function automatic byte_q_t mk_frame(input logic [47:0] smac, input logic [47:0] dmac,
                                       input logic [31:0] sip, input logic [31:0] dip,
                                       input logic [23:0] qp, input logic [23:0] psn,
                                       input logic [7:0] opcode, input bit first,
                                       input logic [31:0] tag, input logic [31:0] ring,
                                       input logic [31:0] msg, input logic [31:0] mlen,
                                       input logic [31:0] pay [$]);
    byte_q_t f;
    int ip_len;
    logic [19:0] cs;
    ip_len = 20 + 8 + 12 + (first ? 16 : 0) + 4 * pay.size();
    for (int i = 5; i >= 0; i--) f.push_back(dmac[8*i +: 8]);
    for (int i = 5; i >= 0; i--) f.push_back(smac[8*i +: 8]);
    f.push_back(8'h08); f.push_back(8'h00);
    // IPv4
    f.push_back(8'h45); f.push_back(8'h00);
    f.push_back(8'(ip_len >> 8)); f.push_back(8'(ip_len));
    f.push_back(8'h00); f.push_back(8'h01); f.push_back(8'h40); f.push_back(8'h00);
    f.push_back(8'd64); f.push_back(8'd17); f.push_back(8'h00); f.push_back(8'h00);
    for (int i = 3; i >= 0; i--) f.push_back(sip[8*i +: 8]);
    for (int i = 3; i >= 0; i--) f.push_back(dip[8*i +: 8]);
    cs = '0;
    for (int w = 0; w < 10; w++) cs += {4'h0, f[14 + 2*w], f[15 + 2*w]};
    cs = {4'h0, cs[15:0]} + {16'h0, cs[19:16]};
    cs = {4'h0, cs[15:0]} + {16'h0, cs[19:16]};
    f[24] = ~cs[15:8]; f[25] = ~cs[7:0];
    // UDP
    f.push_back(8'hC0); f.push_back(8'h00); f.push_back(8'h12); f.push_back(8'hB7);
    f.push_back(8'((ip_len - 20) >> 8)); f.push_back(8'(ip_len - 20));
    f.push_back(8'h00); f.push_back(8'h00);
    // BTH
    f.push_back(opcode); f.push_back(8'h00); f.push_back(8'hFF); f.push_back(8'hFF);
    f.push_back(8'h00);
    for (int i = 2; i >= 0; i--) f.push_back(qp[8*i +: 8]);
    f.push_back(8'h00);
    for (int i = 2; i >= 0; i--) f.push_back(psn[8*i +: 8]);
    if (first) begin
      for (int i = 3; i >= 0; i--) f.push_back(tag[8*i +: 8]);
      for (int i = 3; i >= 0; i--) f.push_back(ring[8*i +: 8]);
      for (int i = 3; i >= 0; i--) f.push_back(msg[8*i +: 8]);
      for (int i = 3; i >= 0; i--) f.push_back(mlen[8*i +: 8]);
    end
    foreach (pay[w]) for (int i = 3; i >= 0; i--) f.push_back(pay[w][8*i +: 8]);
    return f;
  endfunction

  // Gradient payload of one packet: 252 words on a first packet (the
  // NetReduce header takes 16 of the 1024 bytes), 256 otherwise.
  function automatic void mk_grads(input int ring, input int host, input int msg, input int off,
                                   input bit first, output logic [31:0] pay [$]);
    int n;
    pay.delete();
    n = first ? 252 : 256;
    for (int i = 0; i < n; i++) pay.push_back(grad(ring, host, msg, off, i));
  endfunction

  function automatic beat_q_t to_beats(input byte_q_t f, input int port);
    beat_q_t q;
    beat_t   b;
    int n;
    n = f.size();
    for (int k = 0; 64 * k < n; k++) begin
      b = '0;
      for (int j = 0; j < 64; j++)
        if (64 * k + j < n) b.data[BEAT_W-1-8*j -: 8] = f[64*k + j];
        else                b.data[BEAT_W-1-8*j -: 8] = 8'($urandom);  // junk past the end
      b.sop    = (k == 0);
      b.eop    = (64 * (k + 1) >= n);
      b.nbytes = b.eop ? 7'(n - 64 * k) : 7'd64;
      b.port   = 3'(port);
      q.push_back(b);
    end
    return q;
  endfunction

  function automatic logic [31:0] rd32(input byte_q_t f, input int off);
    return {f[off], f[off+1], f[off+2], f[off+3]};
  endfunction
  function automatic logic [23:0] rd24(input byte_q_t f, input int off);
    return {f[off], f[off+1], f[off+2]};
  endfunction

endpackage
