// udp_ip_stack: the network and transport layers of the chip (the "UDP/IP"
// sub-core), wired as in the paper's UDP/IP data-flow diagram.
//
// Receive: a frame from the data link layer (Ethernet header record + bytes)
// goes to ARP when its EtherType is 0x0806 and to IP_RX otherwise. IP_RX's
// packets of protocol 17 go to UDP_RX and come out on APP_UDP_RX; all other
// protocols come out on APP_IP_RX.
// Transmit: datagrams from APP_UDP_TX pass UDP_CHECKSUM_GEN (store and
// forward) and UDP_TX; IP_ARBITER_MUX takes whole packets from UDP_TX
// (input 0) and APP_IP_TX (input 1) round-robin; IP_TX adds the IPv4 header,
// resolves the MAC through ARP and sends on DATALINK_IP_TX. ARP replies and
// requests leave on DATALINK_ARP_TX.
// All channels are a header record with valid/ready followed by a byte-wide
// payload stream with tlast. The receive path adds a few cycles of header
// parsing and no buffering; the transmit UDP path buffers one datagram.
module udp_ip_stack
  import ros2_chip_pkg::*;
#(
  parameter int ARP_CACHE_ENTRIES = 8,
  parameter int UDP_BUF_DEPTH     = 256,
  parameter int ARP_TIMEOUT       = 4096
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] local_ip,
  input  logic [47:0] local_mac,
  // data link receive (DATALINK_IP_RX_HEADER_AXIS / PAYLOAD_AXIS)
  input  logic        dl_rx_hdr_valid,
  output logic        dl_rx_hdr_ready,
  input  eth_hdr_t    dl_rx_hdr,
  input  logic [7:0]  dl_rx_tdata,
  input  logic        dl_rx_tvalid,
  input  logic        dl_rx_tlast,
  output logic        dl_rx_tready,
  // data link IP transmit
  output logic        dl_ip_tx_hdr_valid,
  input  logic        dl_ip_tx_hdr_ready,
  output eth_hdr_t    dl_ip_tx_hdr,
  output logic [7:0]  dl_ip_tx_tdata,
  output logic        dl_ip_tx_tvalid,
  output logic        dl_ip_tx_tlast,
  input  logic        dl_ip_tx_tready,
  // data link ARP transmit
  output logic        dl_arp_tx_hdr_valid,
  input  logic        dl_arp_tx_hdr_ready,
  output eth_hdr_t    dl_arp_tx_hdr,
  output logic [7:0]  dl_arp_tx_tdata,
  output logic        dl_arp_tx_tvalid,
  output logic        dl_arp_tx_tlast,
  input  logic        dl_arp_tx_tready,
  // APP_IP_RX
  output logic        app_ip_rx_hdr_valid,
  input  logic        app_ip_rx_hdr_ready,
  output ip_hdr_t     app_ip_rx_hdr,
  output logic [7:0]  app_ip_rx_tdata,
  output logic        app_ip_rx_tvalid,
  output logic        app_ip_rx_tlast,
  input  logic        app_ip_rx_tready,
  // APP_UDP_RX
  output logic        app_udp_rx_hdr_valid,
  input  logic        app_udp_rx_hdr_ready,
  output udp_hdr_t    app_udp_rx_hdr,
  output logic [7:0]  app_udp_rx_tdata,
  output logic        app_udp_rx_tvalid,
  output logic        app_udp_rx_tlast,
  input  logic        app_udp_rx_tready,
  // APP_UDP_TX
  input  logic        app_udp_tx_hdr_valid,
  output logic        app_udp_tx_hdr_ready,
  input  udp_hdr_t    app_udp_tx_hdr,
  input  logic [7:0]  app_udp_tx_tdata,
  input  logic        app_udp_tx_tvalid,
  input  logic        app_udp_tx_tlast,
  output logic        app_udp_tx_tready,
  // APP_IP_TX
  input  logic        app_ip_tx_hdr_valid,
  output logic        app_ip_tx_hdr_ready,
  input  ip_hdr_t     app_ip_tx_hdr,
  input  logic [7:0]  app_ip_tx_tdata,
  input  logic        app_ip_tx_tvalid,
  input  logic        app_ip_tx_tlast,
  output logic        app_ip_tx_tready,
  // status
  output logic [15:0] ip_rx_drops,
  output logic [15:0] udp_rx_drops,
  output logic [15:0] ip_tx_drops
);
  // ---------------------------------------------------------- receive demux
  logic     e_hv [2], e_hr [2], e_tv [2], e_tl [2], e_tr [2];
  eth_hdr_t e_h  [2];
  logic [7:0] e_td [2];
  stream_demux2 #(.H(eth_hdr_t)) u_eth_demux (
    .clk, .rst, .sel1(dl_rx_hdr.ethertype == ETHERTYPE_ARP),
    .s_hdr_valid(dl_rx_hdr_valid), .s_hdr_ready(dl_rx_hdr_ready), .s_hdr(dl_rx_hdr),
    .s_tdata(dl_rx_tdata), .s_tvalid(dl_rx_tvalid), .s_tlast(dl_rx_tlast), .s_tready(dl_rx_tready),
    .m_hdr_valid(e_hv), .m_hdr_ready(e_hr), .m_hdr(e_h),
    .m_tdata(e_td), .m_tvalid(e_tv), .m_tlast(e_tl), .m_tready(e_tr));

  // ---------------------------------------------------------- IP_RX
  logic       i_hv, i_hr, i_tv, i_tl, i_tr;
  ip_hdr_t    i_h;
  logic [7:0] i_td;
  ip_rx u_ip_rx (
    .clk, .rst, .local_ip,
    .s_hdr_valid(e_hv[0]), .s_hdr_ready(e_hr[0]), .s_hdr(e_h[0]),
    .s_tdata(e_td[0]), .s_tvalid(e_tv[0]), .s_tlast(e_tl[0]), .s_tready(e_tr[0]),
    .m_hdr_valid(i_hv), .m_hdr_ready(i_hr), .m_hdr(i_h),
    .m_tdata(i_td), .m_tvalid(i_tv), .m_tlast(i_tl), .m_tready(i_tr),
    .drop_count(ip_rx_drops));

  logic    p_hv [2], p_hr [2], p_tv [2], p_tl [2], p_tr [2];
  ip_hdr_t p_h  [2];
  logic [7:0] p_td [2];
  stream_demux2 #(.H(ip_hdr_t)) u_proto_demux (
    .clk, .rst, .sel1(i_h.protocol == IP_PROTO_UDP),
    .s_hdr_valid(i_hv), .s_hdr_ready(i_hr), .s_hdr(i_h),
    .s_tdata(i_td), .s_tvalid(i_tv), .s_tlast(i_tl), .s_tready(i_tr),
    .m_hdr_valid(p_hv), .m_hdr_ready(p_hr), .m_hdr(p_h),
    .m_tdata(p_td), .m_tvalid(p_tv), .m_tlast(p_tl), .m_tready(p_tr));

  assign app_ip_rx_hdr_valid = p_hv[0];
  assign p_hr[0]             = app_ip_rx_hdr_ready;
  assign app_ip_rx_hdr       = p_h[0];
  assign app_ip_rx_tdata     = p_td[0];
  assign app_ip_rx_tvalid    = p_tv[0];
  assign app_ip_rx_tlast     = p_tl[0];
  assign p_tr[0]             = app_ip_rx_tready;

  // ---------------------------------------------------------- UDP_RX
  udp_rx u_udp_rx (
    .clk, .rst,
    .s_hdr_valid(p_hv[1]), .s_hdr_ready(p_hr[1]), .s_hdr(p_h[1]),
    .s_tdata(p_td[1]), .s_tvalid(p_tv[1]), .s_tlast(p_tl[1]), .s_tready(p_tr[1]),
    .m_hdr_valid(app_udp_rx_hdr_valid), .m_hdr_ready(app_udp_rx_hdr_ready), .m_hdr(app_udp_rx_hdr),
    .m_tdata(app_udp_rx_tdata), .m_tvalid(app_udp_rx_tvalid), .m_tlast(app_udp_rx_tlast),
    .m_tready(app_udp_rx_tready), .drop_count(udp_rx_drops));

  // ---------------------------------------------------------- ARP
  logic [31:0] lk_ip, rq_ip;
  logic        lk_hit, rq_valid;
  logic [47:0] lk_mac;
  arp #(.CACHE_ENTRIES(ARP_CACHE_ENTRIES)) u_arp (
    .clk, .rst, .local_ip, .local_mac,
    .s_hdr_valid(e_hv[1]), .s_hdr_ready(e_hr[1]), .s_hdr(e_h[1]),
    .s_tdata(e_td[1]), .s_tvalid(e_tv[1]), .s_tlast(e_tl[1]), .s_tready(e_tr[1]),
    .m_hdr_valid(dl_arp_tx_hdr_valid), .m_hdr_ready(dl_arp_tx_hdr_ready), .m_hdr(dl_arp_tx_hdr),
    .m_tdata(dl_arp_tx_tdata), .m_tvalid(dl_arp_tx_tvalid), .m_tlast(dl_arp_tx_tlast),
    .m_tready(dl_arp_tx_tready),
    .lookup_ip(lk_ip), .lookup_hit(lk_hit), .lookup_mac(lk_mac),
    .req_valid(rq_valid), .req_ip(rq_ip));

  // ---------------------------------------------------------- UDP transmit
  logic       c_hv, c_hr, c_tv, c_tl, c_tr;
  udp_hdr_t   c_h;
  logic [7:0] c_td;
  udp_checksum_gen #(.BUF_DEPTH(UDP_BUF_DEPTH)) u_csum (
    .clk, .rst,
    .s_hdr_valid(app_udp_tx_hdr_valid), .s_hdr_ready(app_udp_tx_hdr_ready), .s_hdr(app_udp_tx_hdr),
    .s_tdata(app_udp_tx_tdata), .s_tvalid(app_udp_tx_tvalid), .s_tlast(app_udp_tx_tlast),
    .s_tready(app_udp_tx_tready),
    .m_hdr_valid(c_hv), .m_hdr_ready(c_hr), .m_hdr(c_h),
    .m_tdata(c_td), .m_tvalid(c_tv), .m_tlast(c_tl), .m_tready(c_tr));

  logic    a_hv [2], a_hr [2], a_tv [2], a_tl [2], a_tr [2];
  ip_hdr_t a_h  [2];
  logic [7:0] a_td [2];
  udp_tx u_udp_tx (
    .clk, .rst,
    .s_hdr_valid(c_hv), .s_hdr_ready(c_hr), .s_hdr(c_h),
    .s_tdata(c_td), .s_tvalid(c_tv), .s_tlast(c_tl), .s_tready(c_tr),
    .m_hdr_valid(a_hv[0]), .m_hdr_ready(a_hr[0]), .m_hdr(a_h[0]),
    .m_tdata(a_td[0]), .m_tvalid(a_tv[0]), .m_tlast(a_tl[0]), .m_tready(a_tr[0]));

  assign a_hv[1]             = app_ip_tx_hdr_valid;
  assign app_ip_tx_hdr_ready = a_hr[1];
  assign a_h[1]              = app_ip_tx_hdr;
  assign a_td[1]             = app_ip_tx_tdata;
  assign a_tv[1]             = app_ip_tx_tvalid;
  assign a_tl[1]             = app_ip_tx_tlast;
  assign app_ip_tx_tready    = a_tr[1];

  logic       x_hv, x_hr, x_tv, x_tl, x_tr;
  ip_hdr_t    x_h;
  logic [7:0] x_td;
  ip_arbiter_mux #(.N(2)) u_arb (
    .clk, .rst,
    .s_hdr_valid(a_hv), .s_hdr_ready(a_hr), .s_hdr(a_h),
    .s_tdata(a_td), .s_tvalid(a_tv), .s_tlast(a_tl), .s_tready(a_tr),
    .m_hdr_valid(x_hv), .m_hdr_ready(x_hr), .m_hdr(x_h),
    .m_tdata(x_td), .m_tvalid(x_tv), .m_tlast(x_tl), .m_tready(x_tr), .grant());

  ip_tx #(.ARP_TIMEOUT(ARP_TIMEOUT)) u_ip_tx (
    .clk, .rst, .local_mac,
    .s_hdr_valid(x_hv), .s_hdr_ready(x_hr), .s_hdr(x_h),
    .s_tdata(x_td), .s_tvalid(x_tv), .s_tlast(x_tl), .s_tready(x_tr),
    .m_hdr_valid(dl_ip_tx_hdr_valid), .m_hdr_ready(dl_ip_tx_hdr_ready), .m_hdr(dl_ip_tx_hdr),
    .m_tdata(dl_ip_tx_tdata), .m_tvalid(dl_ip_tx_tvalid), .m_tlast(dl_ip_tx_tlast),
    .m_tready(dl_ip_tx_tready),
    .arp_lookup_ip(lk_ip), .arp_lookup_hit(lk_hit), .arp_lookup_mac(lk_mac),
    .arp_req_valid(rq_valid), .arp_req_ip(rq_ip), .drop_count(ip_tx_drops));

endmodule
