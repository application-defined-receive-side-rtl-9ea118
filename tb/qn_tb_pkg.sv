// qn_tb_pkg: helpers shared by the testbenches: build QNP frames as 512-bit
// beats (header beat + TLV payload beats), rule-table configuration words,
// and TLV encoding of message fields.
package qn_tb_pkg;
  import qn_pkg::*;

  typedef byte unsigned bytes_t[$];

  function automatic void tlv(ref bytes_t b, input int idx, input string s);
    b.push_back(8'(idx));
    b.push_back(8'(s.len()));
    for (int i = 0; i < s.len(); i++) b.push_back(s[i]);
  endfunction

  function automatic logic [63:0] str8(string s);
    logic [63:0] d = '0;
    for (int i = 0; i < s.len() && i < 8; i++) d[8*i +: 8] = s[i];
    return d;
  endfunction

  // Header beat: Ethernet/IPv4/UDP to `port`, then the packed QNP header.
  function automatic beat_t hdr_beat(logic [7:0] app, logic [7:0] typ, logic [31:0] msg_id,
                                     logic [7:0] len, logic [7:0] seq, logic [7:0] seg_cnt,
                                     int payload_len, logic [15:0] port, logic last);
    beat_t b;
    logic [15:0] udp_len;
    b.data = '0;
    b.keep = '1;
    b.last = last;
    udp_len = 16'(8 + 22 + payload_len);
    b.data[8*12 +: 8] = 8'h08; b.data[8*13 +: 8] = 8'h00;
    b.data[8*14 +: 8] = 8'h45;
    b.data[8*23 +: 8] = 8'd17;
    b.data[8*36 +: 8] = port[15:8]; b.data[8*37 +: 8] = port[7:0];
    b.data[8*38 +: 8] = udp_len[15:8]; b.data[8*39 +: 8] = udp_len[7:0];
    b.data[8*42 +: 8] = app;
    b.data[8*43 +: 8] = typ;
    for (int i = 0; i < 4; i++) b.data[8*(44+i) +: 8] = msg_id[8*i +: 8];
    b.data[8*52 +: 8] = len;
    b.data[8*53 +: 8] = seq;
    b.data[8*54 +: 8] = 8'd0;   // DATA
    b.data[8*55 +: 8] = seg_cnt;
    return b;
  endfunction

  // Frame as beats.
  function automatic void make_pkt(ref beat_t beats[$], input logic [7:0] app, input logic [7:0] typ,
                                   input logic [31:0] msg_id, input logic [7:0] len, input logic [7:0] seq,
                                   input logic [7:0] seg_cnt, input bytes_t payload, input logic [15:0] port);
    int n = payload.size();
    int i = 0;
    beats = {};
    beats.push_back(hdr_beat(app, typ, msg_id, len, seq, seg_cnt, n, port, n == 0));
    while (i < n) begin
      beat_t b;
      int k = (n - i > 64) ? 64 : n - i;
      b.data = '0; b.keep = '0;
      for (int j = 0; j < k; j++) begin
        b.data[8*j +: 8] = payload[i + j];
        b.keep[j] = 1'b1;
      end
      i += k;
      b.last = (i == n);
      beats.push_back(b);
    end
  endfunction

  function automatic cfg_t cfg_cam(int a, logic [7:0] app, logic [7:0] typ, logic [7:0] fld,
                                   logic [7:0] stt, string s);
    cfg_t c;
    cam_entry_t e;
    e = '{app_id: app, msg_type: typ, field_idx: fld, state: stt, data: str8(s)};
    c.valid = 1'b1; c.target = CFG_CAM; c.addr = 9'(a);
    c.wdata = {1'b1, 96'(e)};
    return c;
  endfunction

  function automatic cfg_t cfg_ram(int a, logic [7:0] fld, logic [7:0] skp, logic [7:0] ins, logic [7:0] stt);
    cfg_t c;
    ram_entry_t e;
    e = '{field_idx: fld, skip: skp, inspect: ins, state: stt};
    c.valid = 1'b1; c.target = CFG_RAM; c.addr = 9'(a);
    c.wdata = 97'(e);
    return c;
  endfunction

  function automatic cfg_t cfg_simple(cfg_target_e t, int a, int v);
    cfg_t c;
    c.valid = 1'b1; c.target = t; c.addr = 9'(a);
    c.wdata = 97'(v);
    return c;
  endfunction
endpackage
