// ros2_chip_pkg: types and constants shared by every layer of the ROS 2 chip.
//
// The chip moves data in two forms. Below RTPS (UDP/IP and the RTPS parser /
// serializer) a packet is a header record on a valid/ready channel followed by
// its payload as a byte-wide stream with tlast. Above the parser every RTPS
// submessage, DDS sample and ROS message is one fixed-size record that holds up
// to MAX_PAYLOAD bytes of serialized data; such a record moves in one
// valid/ready transfer. The byte width and MAX_PAYLOAD are this design's
// choices; protocol constants (EtherTypes, RTPS ids, port numbers) follow the
// public IPv4, ARP, UDP and DDSI-RTPS specifications.
package ros2_chip_pkg;

  // Serialized payload bytes carried by one RTPS/DDS/ROS record.
  localparam int MAX_PAYLOAD = 64;
  localparam int LEN_W       = $clog2(MAX_PAYLOAD + 1);

  typedef logic [MAX_PAYLOAD*8-1:0] payload_t;   // byte i at bits [8*i +: 8]
  typedef logic [LEN_W-1:0]         plen_t;

  // ---------------------------------------------------------------- Ethernet / IP
  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [15:0] ETHERTYPE_ARP  = 16'h0806;
  localparam logic [7:0]  IP_PROTO_UDP   = 8'd17;

  typedef struct packed {
    logic [47:0] dst_mac;
    logic [47:0] src_mac;
    logic [15:0] ethertype;
  } eth_hdr_t;

  // Header record of an IPv4 packet (payload_len excludes the IP header).
  typedef struct packed {
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [7:0]  protocol;
    logic [15:0] payload_len;
  } ip_hdr_t;

  // Header record of a UDP datagram (payload_len excludes the UDP header).
  typedef struct packed {
    logic [31:0] src_ip;
    logic [31:0] dst_ip;
    logic [15:0] src_port;
    logic [15:0] dst_port;
    logic [15:0] payload_len;
    logic [15:0] checksum;
  } udp_hdr_t;

  // One's complement 16-bit add with end-around carry.
  function automatic logic [15:0] csum_add(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[15:0] + {15'd0, s[16]};
  endfunction

  // ---------------------------------------------------------------- RTPS
  localparam logic [7:0] RTPS_SUB_ACKNACK = 8'h06;
  localparam logic [7:0] RTPS_SUB_DATA    = 8'h15;

  localparam logic [15:0] RTPS_PORT_BASE   = 16'd7400;  // PB
  localparam logic [15:0] RTPS_SRC_PORT    = 16'd7411;  // user unicast, domain 0, participant 0

  // Builtin entity ids of the discovery writers (DDSI-RTPS 9.3.1.3).
  localparam logic [31:0] ENTITYID_SEDP_PUB_WRITER = 32'h0000_03C2;
  localparam logic [31:0] ENTITYID_SEDP_SUB_WRITER = 32'h0000_04C2;
  localparam logic [31:0] ENTITYID_SEDP_PUB_READER = 32'h0000_03C7;
  localparam logic [31:0] ENTITYID_SEDP_SUB_READER = 32'h0000_04C7;
  localparam logic [31:0] ENTITYID_UNKNOWN         = 32'h0000_0000;

  // Entity ids of local user endpoints: key = index+1, kind 0x03 (writer,
  // no key) or 0x04 (reader, no key).
  function automatic logic [31:0] reader_entity(input int idx);
    return {16'h0000, 8'(idx + 1), 8'h04};
  endfunction
  function automatic logic [31:0] writer_entity(input int idx);
    return {16'h0000, 8'(idx + 1), 8'h03};
  endfunction

  typedef enum logic [1:0] {
    SUB_DATA    = 2'd0,
    SUB_ACKNACK = 2'd1
  } sub_kind_e;

  // One RTPS submessage as a record. On receive, guid_prefix/ip/port are those
  // of the sender; on transmit, those of the destination.
  typedef struct packed {
    sub_kind_e   kind;
    logic [95:0] guid_prefix;
    logic [31:0] reader_id;
    logic [31:0] writer_id;
    logic [63:0] sn;          // DATA: writer SN; ACKNACK: first SN requested
    logic [31:0] ip;
    logic [15:0] port;
    plen_t       len;         // serialized payload bytes
    payload_t    data;
  } rtps_msg_t;

  // Static discovery announcement payload (20 bytes, little endian fields):
  // [0..3] encapsulation PL_CDR_LE, [4..7] topic id, [8..11] entity id
  // (big endian as on the wire), [12..15] unicast IPv4 address (big endian),
  // [16..17] unicast port, [18..19] zero.
  localparam int DISC_LEN = 20;

  // A match between a local endpoint and a remote one, from discovery.
  typedef struct packed {
    logic [7:0]  local_idx;
    logic [95:0] guid_prefix;   // remote
    logic [31:0] entity_id;     // remote
    logic [31:0] ip;
    logic [15:0] port;
  } match_t;

  // ---------------------------------------------------------------- DDS / ROS
  // A DDS sample or ROS message: serialized data plus where it came from.
  typedef struct packed {
    logic [95:0] guid_prefix;   // source participant (receive) or 0
    logic [31:0] writer_id;     // source writer (receive) or 0
    logic [63:0] sn;
    plen_t       len;
    payload_t    data;
  } sample_t;

  // CDR little-endian encapsulation header bytes 00 01 00 00.
  localparam logic [31:0] CDR_LE_HDR = 32'h0000_0100;   // byte0 at [7:0]
  localparam int REQ_ID_LEN = 24;                       // 16-byte GUID + 8-byte seq

  // A message on the application side of the ROS 2 layer. req_guid/req_seq
  // identify the service request a response belongs to (zero for topics).
  typedef struct packed {
    logic [127:0] req_guid;
    logic [63:0]  req_seq;
    plen_t        len;
    payload_t     data;
  } ros_msg_t;

endpackage
