// tb_header_manager: self-checking test of the Header Manager.
//
// Headers are real Ethernet/IPv4/UDP/BTH headers with valid checksums. The
// test covers the three configurations:
//   ToR (LocalSize == GlobalSize): headers leave unchanged;
//   leaf of a two-level job (LocalSize < GlobalSize): an upstream header gets
//     the leaf's source and the spine's destination MAC/IP and a correct IPv4
//     checksum, with everything else unchanged; a header coming back
//     addressed to the leaf itself is replaced by the original stored for its
//     DstQP and PSN (or by one received from another leaf through the ext
//     port), keeping its own payload length and port; without a stored
//     header it is left alone;
//   spine: a header addressed to the spine gets source and destination
//     MAC/IP swapped, with a correct checksum.
module tb_header_manager;
  import nr_pkg::*;
  import nr_tb_pkg::*;

  localparam int HB = HDR_MAX * 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] cfg_local_size, cfg_global_size;
  logic cfg_is_spine, h_valid, ext_wr;
  logic [47:0] cfg_self_mac, cfg_spine_mac;
  logic [31:0] cfg_self_ip, cfg_spine_ip;
  hdr_rec_t h_in, h_out, ext_hdr;

  header_manager #(.STORE_ENTRIES(16)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] none [$];

  task automatic fail(string s);
    failures++;
    $display("FAIL: %s", s);
  endtask

  function automatic hdr_rec_t rec(logic [47:0] sm, logic [47:0] dm, logic [31:0] si, logic [31:0] di,
                                   logic [23:0] qp, logic [23:0] psn);
    byte_q_t f;
    hdr_rec_t r;
    f = mk_frame(sm, dm, si, di, qp, psn, OP_SEND_MIDDLE, 1'b0, 0, 0, 0, 0, none);
    r = '0;
    foreach (f[i]) r.bytes[HB-1-8*i -: 8] = f[i];
    r.hdr_len = 7'(HDR_BASE);
    r.pay_len = 11'($urandom_range(1, 1024));
    r.port = 3'($urandom_range(0, 5));
    return r;
  endfunction

  function automatic bit csum_ok(hdr_rec_t r);
    logic [19:0] s;
    s = '0;
    for (int w = 0; w < 10; w++) s += {4'h0, r.bytes[HB-1-8*(OFF_IP+2*w) -: 16]};
    s = {4'h0, s[15:0]} + {16'h0, s[19:16]};
    s = {4'h0, s[15:0]} + {16'h0, s[19:16]};
    return s[15:0] == 16'hFFFF;
  endfunction

  function automatic hdr_rec_t with_addr(hdr_rec_t r, logic [47:0] sm, logic [47:0] dm,
                                         logic [31:0] si, logic [31:0] di);
    hdr_rec_t o;
    o = r;
    o.bytes[HB-1-8*OFF_DMAC -: 48] = dm;
    o.bytes[HB-1-8*OFF_SMAC -: 48] = sm;
    o.bytes[HB-1-8*OFF_SIP -: 32] = si;
    o.bytes[HB-1-8*OFF_DIP -: 32] = di;
    o.bytes[HB-1-8*OFF_IP_CSUM -: 16] = '0;   // compared separately
    return o;
  endfunction

  // present a header for one cycle; returns the output seen
  task automatic pass(hdr_rec_t r, bit v, output hdr_rec_t o);
    @(negedge clk);
    h_in = r;
    h_valid = v;
    #1;
    o = h_out;
    @(negedge clk);
    h_valid = 0;
  endtask

  function automatic hdr_rec_t no_csum(hdr_rec_t r);
    hdr_rec_t o;
    o = r;
    o.bytes[HB-1-8*OFF_IP_CSUM -: 16] = '0;
    return o;
  endfunction

  initial begin
    hdr_rec_t r, o, orig [$];
    cfg_self_mac = 48'h0A_0B_0C_00_00_01; cfg_self_ip = 32'h0A64_0001;
    cfg_spine_mac = 48'h0A_0B_0C_00_00_99; cfg_spine_ip = 32'h0A64_0099;
    cfg_local_size = 3; cfg_global_size = 3; cfg_is_spine = 0;
    h_valid = 0; h_in = '0; ext_wr = 0; ext_hdr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ToR: unchanged
    repeat (20) begin
      r = rec(48'($urandom), 48'($urandom), $urandom, $urandom, 24'($urandom), 24'($urandom));
      pass(r, 1, o);
      checks++;
      if (o != r) fail("ToR header changed");
    end

    // leaf of a two-level job, upstream
    cfg_global_size = 6;
    for (int i = 0; i < 10; i++) begin
      r = rec(host_mac(0, i), host_mac(0, i + 1), host_ip(0, i), host_ip(0, i + 1), 24'(300 + i), 24'(5000 + i));
      orig.push_back(r);
      pass(r, 1, o);
      checks += 2;
      if (no_csum(o) != with_addr(r, cfg_self_mac, cfg_spine_mac, cfg_self_ip, cfg_spine_ip))
        fail("upstream addresses");
      if (!csum_ok(o)) fail("upstream checksum");
    end
    // downstream: the spine's answer, addressed to this leaf, gets the original back
    for (int i = 9; i >= 0; i--) begin
      hdr_rec_t back;
      back = rec(cfg_spine_mac, cfg_self_mac, cfg_spine_ip, cfg_self_ip, 24'(300 + i), 24'(5000 + i));
      pass(back, 1, o);
      checks++;
      r = orig[i];
      r.pay_len = back.pay_len;
      r.port = back.port;
      if (o != r) fail($sformatf("downstream header %0d not restored", i));
    end
    // addressed to the leaf but never stored: left alone
    r = rec(cfg_spine_mac, cfg_self_mac, cfg_spine_ip, cfg_self_ip, 24'h777, 24'h777);
    pass(r, 1, o);
    checks++;
    if (o != r) fail("unknown downstream header changed");
    // a header sent by another leaf, through the ext port
    r = rec(host_mac(1, 4), host_mac(1, 5), host_ip(1, 4), host_ip(1, 5), 24'h123, 24'h456);
    @(negedge clk);
    ext_hdr = r; ext_wr = 1;
    @(negedge clk);
    ext_wr = 0;
    begin
      hdr_rec_t back;
      back = rec(cfg_spine_mac, cfg_self_mac, cfg_spine_ip, cfg_self_ip, 24'h123, 24'h456);
      pass(back, 1, o);
      checks++;
      r.pay_len = back.pay_len;
      r.port = back.port;
      if (o != r) fail("header from another leaf not used");
    end

    // spine: swap
    cfg_is_spine = 1;
    repeat (10) begin
      logic [47:0] sm;
      logic [31:0] si;
      sm = 48'($urandom); si = $urandom;
      r = rec(sm, cfg_self_mac, si, cfg_self_ip, 24'($urandom), 24'($urandom));
      pass(r, 1, o);
      checks += 2;
      if (no_csum(o) != with_addr(r, cfg_self_mac, sm, cfg_self_ip, si)) fail("spine swap");
      if (!csum_ok(o)) fail("spine checksum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
