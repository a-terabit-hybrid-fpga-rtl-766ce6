// tb_pkt_pkg: frame builders shared by the testbenches.
//
// A frame is built as bytes (destination MAC, source MAC, optional 802.1Q tag
// with the given VLAN id, EtherType 0x0800, payload) and cut into 32-byte lane
// words; byte 0 of a word is tdata[7:0]. The payload carries a tag byte and a
// sequence number so a receiver can identify every frame.
package tb_pkt_pkg;
  import vsw_pkg::*;

  typedef lane_word_t frame_t [$];

  function automatic frame_t build_frame(input bit has_tag, input logic [11:0] vid,
                                         input int unsigned len, input logic [31:0] id);
    byte unsigned b [$];
    frame_t f;
    for (int i = 0; i < 6; i++) b.push_back(8'h02 + i);          // dst MAC
    for (int i = 0; i < 6; i++) b.push_back(8'h10 + i);          // src MAC
    if (has_tag) begin
      b.push_back(8'h81); b.push_back(8'h00);
      b.push_back({4'h0, vid[11:8]}); b.push_back(vid[7:0]);
    end
    b.push_back(8'h08); b.push_back(8'h00);
    b.push_back(id[31:24]); b.push_back(id[23:16]); b.push_back(id[15:8]); b.push_back(id[7:0]);
    while (b.size() < len) b.push_back(8'(b.size() ^ id[7:0]));
    for (int w = 0; w * 32 < b.size(); w++) begin
      lane_word_t lw;
      lw = '0;
      for (int k = 0; k < 32; k++) begin
        if (w * 32 + k < b.size()) begin
          lw.tdata[8*k +: 8] = b[w * 32 + k];
          lw.tkeep[k] = 1'b1;
        end
      end
      lw.tlast = ((w + 1) * 32 >= b.size());
      lw.tuser = {$urandom, $urandom, $urandom, $urandom};
      f.push_back(lw);
    end
    return f;
  endfunction

  // The 4-byte id placed after the EtherType (offset 14 or 18).
  function automatic logic [31:0] frame_id(input logic [DATA_W-1:0] d, input bit has_tag);
    int o;
    o = has_tag ? 18 : 14;
    return {d[8*o +: 8], d[8*(o+1) +: 8], d[8*(o+2) +: 8], d[8*(o+3) +: 8]};
  endfunction

  function automatic vs_word_t to_vs(input lane_word_t w);
    vs_word_t v;
    v.tdata = w.tdata; v.tkeep = w.tkeep; v.tlast = w.tlast;
    return v;
  endfunction
endpackage
