// ros2_on_chip: the whole ROS 2 networking chip.
//
// Three sub-cores in a stack, each wired as in its data-flow diagram:
//   ROS 2 layer   rmw_bridge_rx / rmw_bridge_tx (subscribers, service
//                 clients, action clients / publishers, service servers,
//                 action servers) and ros_static_discovery_writer;
//   RTPS/DDS      rtps_dds_core (parser, decoder, discovery, NR readers and
//                 NW writers with their DDS history caches, RTPS_OUT);
//   UDP/IP        udp_ip_stack (IP_RX, ARP, UDP_RX, UDP_CHECKSUM_GEN, UDP_TX,
//                 IP_ARBITER_MUX, IP_TX).
// Reader i of the RTPS/DDS core feeds ROS entity port i of the receive
// bridge; writer i is fed by entity port i of the transmit bridge (see
// rmw_bridge_rx/tx for the order). The Ethernet MAC/PHY is outside: its
// frames enter and leave on the dl_* ports as an Ethernet header record plus
// a byte stream. The application talks to the chip through app_rx_* /
// app_tx_* (ROS_APP_RX / ROS_APP_TX: a ros_msg_t tagged with the reader or
// writer index) and may also use raw IP on app_ip_rx_* / app_ip_tx_*.
// Configuration (addresses, GUID prefix, topic ids, client GUIDs) is on
// static input ports. Everything runs on one clock (156 MHz in the paper's
// prototype) with a synchronous active-high reset.
module ros2_on_chip
  import ros2_chip_pkg::*;
#(
  parameter int NUM_SUB           = 1,
  parameter int NUM_SRV_CLIENT    = 1,
  parameter int NUM_ACTION_CLIENT = 1,
  parameter int NUM_PUB           = 1,
  parameter int NUM_SRV_SERVER    = 1,
  parameter int NUM_ACTION_SERVER = 1,
  parameter int FIFO_DEPTH        = 4,
  parameter int MATCH_ENTRIES     = 4,
  parameter int HISTORY_DEPTH     = 4,
  parameter int ARP_TIMEOUT       = 4096,
  localparam int NR = NUM_SUB + NUM_SRV_CLIENT + 4*NUM_ACTION_CLIENT,
  localparam int NW = NUM_PUB + NUM_SRV_SERVER + 4*NUM_ACTION_SERVER,
  localparam int NC = NUM_SRV_CLIENT + 3*NUM_ACTION_CLIENT
) (
  input  logic         clk,
  input  logic         rst,
  // configuration
  input  logic [31:0]  local_ip,
  input  logic [47:0]  local_mac,
  input  logic [95:0]  local_guid_prefix,
  input  logic [31:0]  reader_topic [NR],
  input  logic         reader_en    [NR],
  input  logic [31:0]  writer_topic [NW],
  input  logic         writer_en    [NW],
  input  logic [127:0] client_guid  [NC > 0 ? NC : 1],
  // data link (Ethernet MAC) receive
  input  logic         dl_rx_hdr_valid,
  output logic         dl_rx_hdr_ready,
  input  eth_hdr_t     dl_rx_hdr,
  input  logic [7:0]   dl_rx_tdata,
  input  logic         dl_rx_tvalid,
  input  logic         dl_rx_tlast,
  output logic         dl_rx_tready,
  // data link IP transmit
  output logic         dl_ip_tx_hdr_valid,
  input  logic         dl_ip_tx_hdr_ready,
  output eth_hdr_t     dl_ip_tx_hdr,
  output logic [7:0]   dl_ip_tx_tdata,
  output logic         dl_ip_tx_tvalid,
  output logic         dl_ip_tx_tlast,
  input  logic         dl_ip_tx_tready,
  // data link ARP transmit
  output logic         dl_arp_tx_hdr_valid,
  input  logic         dl_arp_tx_hdr_ready,
  output eth_hdr_t     dl_arp_tx_hdr,
  output logic [7:0]   dl_arp_tx_tdata,
  output logic         dl_arp_tx_tvalid,
  output logic         dl_arp_tx_tlast,
  input  logic         dl_arp_tx_tready,
  // raw IP for the application (APP_IP_RX / APP_IP_TX)
  output logic         app_ip_rx_hdr_valid,
  input  logic         app_ip_rx_hdr_ready,
  output ip_hdr_t      app_ip_rx_hdr,
  output logic [7:0]   app_ip_rx_tdata,
  output logic         app_ip_rx_tvalid,
  output logic         app_ip_rx_tlast,
  input  logic         app_ip_rx_tready,
  input  logic         app_ip_tx_hdr_valid,
  output logic         app_ip_tx_hdr_ready,
  input  ip_hdr_t      app_ip_tx_hdr,
  input  logic [7:0]   app_ip_tx_tdata,
  input  logic         app_ip_tx_tvalid,
  input  logic         app_ip_tx_tlast,
  output logic         app_ip_tx_tready,
  // ROS_APP_RX / ROS_APP_TX
  output logic         app_rx_valid,
  input  logic         app_rx_ready,
  output ros_msg_t     app_rx_msg,
  output logic [7:0]   app_rx_entity,
  input  logic         app_tx_valid,
  output logic         app_tx_ready,
  input  ros_msg_t     app_tx_msg,
  input  logic [7:0]   app_tx_entity,
  // discovered peers
  input  logic [2:0]   peer_idx,
  output logic         peer_valid,
  output match_t       peer,
  output logic [15:0]  peer_count,
  // status
  output logic [15:0]  rtps_rx_count,
  output logic [15:0]  rtps_tx_count,
  output logic [15:0]  match_count,
  output logic [15:0]  gap_count,
  output logic [15:0]  dup_count,
  output logic [15:0]  resend_count,
  output logic [15:0]  overflow_count,
  output logic [15:0]  drop_count
);
  // ---------------------------------------------------------- UDP/IP
  logic       urx_hv, urx_hr, urx_tv, urx_tl, urx_tr;
  udp_hdr_t   urx_h;
  logic [7:0] urx_td;
  logic       utx_hv, utx_hr, utx_tv, utx_tl, utx_tr;
  udp_hdr_t   utx_h;
  logic [7:0] utx_td;
  logic [15:0] ip_rx_drops, udp_rx_drops, ip_tx_drops, rtps_drops, rx_drops, tx_drops;

  udp_ip_stack #(.ARP_TIMEOUT(ARP_TIMEOUT)) u_udp_ip (
    .clk, .rst, .local_ip, .local_mac,
    .dl_rx_hdr_valid, .dl_rx_hdr_ready, .dl_rx_hdr, .dl_rx_tdata, .dl_rx_tvalid, .dl_rx_tlast, .dl_rx_tready,
    .dl_ip_tx_hdr_valid, .dl_ip_tx_hdr_ready, .dl_ip_tx_hdr, .dl_ip_tx_tdata, .dl_ip_tx_tvalid,
    .dl_ip_tx_tlast, .dl_ip_tx_tready,
    .dl_arp_tx_hdr_valid, .dl_arp_tx_hdr_ready, .dl_arp_tx_hdr, .dl_arp_tx_tdata, .dl_arp_tx_tvalid,
    .dl_arp_tx_tlast, .dl_arp_tx_tready,
    .app_ip_rx_hdr_valid, .app_ip_rx_hdr_ready, .app_ip_rx_hdr, .app_ip_rx_tdata, .app_ip_rx_tvalid,
    .app_ip_rx_tlast, .app_ip_rx_tready,
    .app_udp_rx_hdr_valid(urx_hv), .app_udp_rx_hdr_ready(urx_hr), .app_udp_rx_hdr(urx_h),
    .app_udp_rx_tdata(urx_td), .app_udp_rx_tvalid(urx_tv), .app_udp_rx_tlast(urx_tl),
    .app_udp_rx_tready(urx_tr),
    .app_udp_tx_hdr_valid(utx_hv), .app_udp_tx_hdr_ready(utx_hr), .app_udp_tx_hdr(utx_h),
    .app_udp_tx_tdata(utx_td), .app_udp_tx_tvalid(utx_tv), .app_udp_tx_tlast(utx_tl),
    .app_udp_tx_tready(utx_tr),
    .app_ip_tx_hdr_valid, .app_ip_tx_hdr_ready, .app_ip_tx_hdr, .app_ip_tx_tdata, .app_ip_tx_tvalid,
    .app_ip_tx_tlast, .app_ip_tx_tready,
    .ip_rx_drops, .udp_rx_drops, .ip_tx_drops);

  // ---------------------------------------------------------- RTPS / DDS
  logic    rx_valid [NR], rx_ready [NR];
  sample_t rx_sample [NR];
  logic    tx_valid [NW], tx_ready [NW];
  sample_t tx_sample [NW];
  logic    disc_valid, disc_ready;
  match_t  disc;

  rtps_dds_core #(.NUM_READERS(NR), .NUM_WRITERS(NW), .FIFO_DEPTH(FIFO_DEPTH),
                  .MATCH_ENTRIES(MATCH_ENTRIES), .HISTORY_DEPTH(HISTORY_DEPTH)) u_rtps_dds (
    .clk, .rst, .local_guid_prefix, .local_ip,
    .reader_topic, .reader_en, .writer_topic, .writer_en,
    .udp_rx_hdr_valid(urx_hv), .udp_rx_hdr_ready(urx_hr), .udp_rx_hdr(urx_h),
    .udp_rx_tdata(urx_td), .udp_rx_tvalid(urx_tv), .udp_rx_tlast(urx_tl), .udp_rx_tready(urx_tr),
    .udp_tx_hdr_valid(utx_hv), .udp_tx_hdr_ready(utx_hr), .udp_tx_hdr(utx_h),
    .udp_tx_tdata(utx_td), .udp_tx_tvalid(utx_tv), .udp_tx_tlast(utx_tl), .udp_tx_tready(utx_tr),
    .ros_rx_valid(rx_valid), .ros_rx_ready(rx_ready), .ros_rx_sample(rx_sample),
    .ros_tx_valid(tx_valid), .ros_tx_ready(tx_ready), .ros_tx_sample(tx_sample),
    .discover_valid(disc_valid), .discover_ready(disc_ready), .discover(disc),
    .rx_msg_count(rtps_rx_count), .tx_msg_count(rtps_tx_count), .match_count,
    .gap_count, .dup_count, .resend_count, .overflow_count, .drop_count(rtps_drops));

  // ---------------------------------------------------------- ROS 2
  rmw_bridge_rx #(.NUM_SUB(NUM_SUB), .NUM_SRV_CLIENT(NUM_SRV_CLIENT),
                  .NUM_ACTION_CLIENT(NUM_ACTION_CLIENT)) u_bridge_rx (
    .clk, .rst, .client_guid,
    .s_valid(rx_valid), .s_ready(rx_ready), .s_sample(rx_sample),
    .app_valid(app_rx_valid), .app_ready(app_rx_ready), .app_msg(app_rx_msg),
    .app_entity(app_rx_entity), .drop_count(rx_drops));

  rmw_bridge_tx #(.NUM_PUB(NUM_PUB), .NUM_SRV_SERVER(NUM_SRV_SERVER),
                  .NUM_ACTION_SERVER(NUM_ACTION_SERVER)) u_bridge_tx (
    .clk, .rst,
    .app_valid(app_tx_valid), .app_ready(app_tx_ready), .app_msg(app_tx_msg),
    .app_entity(app_tx_entity),
    .m_valid(tx_valid), .m_ready(tx_ready), .m_sample(tx_sample),
    .sent_count(), .drop_count(tx_drops));

  ros_static_discovery_writer #(.CACHE_DEPTH(8)) u_static_disc (
    .clk, .rst, .s_valid(disc_valid), .s_ready(disc_ready), .s_event(disc),
    .rd_idx(peer_idx), .rd_valid(peer_valid), .rd_entry(peer), .event_count(peer_count));

  assign drop_count = ip_rx_drops + udp_rx_drops + ip_tx_drops + rtps_drops + rx_drops + tx_drops;
endmodule
