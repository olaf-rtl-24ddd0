// tb_pkt_util: builds the first beat of Ethernet/IPv4/UDP packets in the
// byte layout the design parses (byte 0 of the frame in bits 7:0).
package tb_pkt_util;
  import olaf_pkg::*;
  function automatic logic [DATA_W-1:0] hdr_beat(input logic [31:0] src_ip,
                                                 input logic [31:0] dst_ip,
                                                 input logic [15:0] sport,
                                                 input logic [15:0] dport,
                                                 input logic [15:0] seg_id,
                                                 input logic [7:0]  proto,
                                                 input logic [15:0] ethertype);
    logic [DATA_W-1:0] d;
    d = {16{$urandom}};
    d = put_be(d, 12, 2, 32'(ethertype));
    d[8*23 +: 8] = proto;
    d = put_be(d, 26, 4, src_ip);
    d = put_be(d, 30, 4, dst_ip);
    d = put_be(d, 34, 2, 32'(sport));
    d = put_be(d, 36, 2, 32'(dport));
    d = put_be(d, 42, 2, 32'(seg_id));
    return d;
  endfunction

  // Worker_ID expected for a 5-tuple: CRC-16/CCITT-FALSE computed byte-wise.
  function automatic logic [15:0] worker_crc(input logic [31:0] sip, input logic [31:0] dip,
                                             input logic [15:0] sp, input logic [15:0] dp,
                                             input logic [7:0] proto);
    logic [7:0] b [13];
    logic [15:0] c;
    for (int i = 0; i < 4; i++) begin
      b[i]     = sip[31-8*i -: 8];
      b[4 + i] = dip[31-8*i -: 8];
    end
    b[8] = sp[15:8]; b[9] = sp[7:0]; b[10] = dp[15:8]; b[11] = dp[7:0]; b[12] = proto;
    c = 16'hFFFF;
    foreach (b[k]) begin
      c = c ^ {b[k], 8'h00};
      repeat (8) c = c[15] ? ((c << 1) ^ 16'h1021) : (c << 1);
    end
    return c;
  endfunction
endpackage
