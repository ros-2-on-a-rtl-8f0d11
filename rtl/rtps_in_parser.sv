// rtps_in_parser: front end of the RTPS layer (RTPS_IN_PARSER).
//
// Takes UDP datagrams from APP_UDP_RX (udp_hdr_t record + data bytes). A
// datagram is kept only if its destination port is one of the four RTPS
// ports of this participant (7400 + 250*domain + {0, 1, 10+2*pid, 11+2*pid},
// the DDSI-RTPS default mapping) and it starts with the 20-byte RTPS header
// ("RTPS", protocol major version 2, vendor, 12-byte GUID prefix).
// Submessages follow, each a 4-byte header (id, flags, octetsToNextHeader;
// flag bit 0 selects little endian) and a body. DATA (0x15) and ACKNACK
// (0x06) are turned into one rtps_msg_t record each; any other submessage
// is skipped by its length. For DATA the serialized payload (after
// octetsToInlineQos; inline QoS is not supported) is copied into the record; a payload longer than
// MAX_PAYLOAD bytes drops the submessage (counted in drop_count). An ACKNACK
// becomes a record only if its bitmap asks for its base sequence number;
// pure acknowledgements are dropped. The sender's GUID prefix, IP address and
// UDP port are copied into every record.
// Timing: one byte per cycle; a record is offered the cycle after its last
// byte and the parser waits while it is not taken. The RTPS subset and port
// filter are this design's choices; the block is from the paper's diagram.
module rtps_in_parser
  import ros2_chip_pkg::*;
#(
  parameter int DOMAIN_ID      = 0,
  parameter int PARTICIPANT_ID = 0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        s_hdr_valid,
  output logic        s_hdr_ready,
  input  udp_hdr_t    s_hdr,
  input  logic [7:0]  s_tdata,
  input  logic        s_tvalid,
  input  logic        s_tlast,
  output logic        s_tready,
  output logic        m_valid,
  input  logic        m_ready,
  output rtps_msg_t   m_msg,
  output logic [15:0] msg_count,
  output logic [15:0] drop_count
);
  localparam logic [15:0] PORT_MC_META = 16'(7400 + 250*DOMAIN_ID);
  localparam logic [15:0] PORT_MC_USER = 16'(7400 + 250*DOMAIN_ID + 1);
  localparam logic [15:0] PORT_UC_META = 16'(7400 + 250*DOMAIN_ID + 10 + 2*PARTICIPANT_ID);
  localparam logic [15:0] PORT_UC_USER = 16'(7400 + 250*DOMAIN_ID + 11 + 2*PARTICIPANT_ID);

  typedef enum logic [2:0] {IDLE, RHDR, SUBHDR, BODY, EMIT, DROP} state_e;
  state_e state;

  logic [15:0] cnt;            // byte index inside the current unit
  logic [31:0] sh;             // last four bytes, first byte most significant
  logic        hdr_ok;
  logic [7:0]  sub_id, sub_flags;
  logic [15:0] otnh;           // submessage body length
  logic [15:0] pstart;         // DATA: body offset of the payload
  logic        too_long;
  logic        keep;           // ACKNACK: bitmap asks for base
  logic        last_seen;
  rtps_msg_t   msg;

  wire  [31:0] sh_n   = {sh[23:0], s_tdata};
  wire         le     = sub_flags[0];
  wire  [31:0] field  = le ? {sh_n[7:0], sh_n[15:8], sh_n[23:16], sh_n[31:24]} : sh_n;
  wire         in_fire = s_tvalid && s_tready;
  wire         port_ok = (s_hdr.dst_port == PORT_MC_META) || (s_hdr.dst_port == PORT_MC_USER) ||
                         (s_hdr.dst_port == PORT_UC_META) || (s_hdr.dst_port == PORT_UC_USER);
  wire         body_end = (cnt == otnh - 16'd1);
  // this DATA payload byte does not fit (also counts on the byte that overflows)
  wire         over_now = (sub_id == RTPS_SUB_DATA) && cnt >= pstart && cnt >= 16'd20 &&
                          (cnt - pstart >= 16'(MAX_PAYLOAD));
  wire         too_long_n = too_long || over_now;

  assign s_hdr_ready = (state == IDLE);
  assign s_tready    = (state == RHDR) || (state == SUBHDR) || (state == BODY) || (state == DROP);
  assign m_valid     = (state == EMIT);
  assign m_msg       = msg;

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= IDLE;
      cnt        <= '0;
      msg_count  <= '0;
      drop_count <= '0;
      last_seen  <= 1'b0;
      hdr_ok     <= 1'b0;
      sub_flags  <= '0;
      otnh       <= '0;
      pstart     <= '0;
    end else begin
      if (in_fire) sh <= sh_n;
      unique case (state)
        IDLE: if (s_hdr_valid) begin
          cnt       <= '0;
          hdr_ok    <= 1'b1;
          last_seen <= 1'b0;
          msg.ip    <= s_hdr.src_ip;
          msg.port  <= s_hdr.src_port;
          if (port_ok) state <= RHDR;
          else begin
            state      <= DROP;
            drop_count <= drop_count + 1'b1;
          end
        end
        RHDR: if (in_fire) begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'd3 && sh_n != 32'h5254_5053) hdr_ok <= 1'b0;   // "RTPS"
          if (cnt == 16'd4 && s_tdata != 8'd2)       hdr_ok <= 1'b0;   // major 2
          if (cnt >= 16'd8) msg.guid_prefix <= {msg.guid_prefix[87:0], s_tdata};
          if (s_tlast) begin
            state <= IDLE;
            if (cnt != 16'd19 || !hdr_ok) drop_count <= drop_count + 1'b1;
          end else if (cnt == 16'd19) begin
            cnt   <= '0;
            state <= hdr_ok ? SUBHDR : DROP;
            if (!hdr_ok) drop_count <= drop_count + 1'b1;
          end
        end
        SUBHDR: if (in_fire) begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'd0) sub_id    <= s_tdata;
          if (cnt == 16'd1) sub_flags <= s_tdata;
          if (s_tlast) state <= IDLE;
          else if (cnt == 16'd3) begin
            // octetsToNextHeader: 0 means "to the end of the message"
            otnh     <= le ? {s_tdata, sh[7:0]} : {sh[7:0], s_tdata};
            if ({s_tdata, sh[7:0]} == 16'd0 && le) otnh <= 16'hFFFF;
            if ({sh[7:0], s_tdata} == 16'd0 && !le) otnh <= 16'hFFFF;
            cnt      <= '0;
            pstart   <= 16'd20;
            too_long <= 1'b0;
            keep     <= 1'b0;
            msg.kind <= (sub_id == RTPS_SUB_ACKNACK) ? SUB_ACKNACK : SUB_DATA;
            msg.len  <= '0;
            msg.data <= '0;
            state    <= BODY;
          end
        end
        BODY: if (in_fire) begin
          cnt <= cnt + 1'b1;
          if (s_tlast) last_seen <= 1'b1;
          if (sub_id == RTPS_SUB_DATA) begin
            if (cnt == 16'd3)  pstart        <= 16'd4 + (le ? {sh_n[7:0], sh_n[15:8]} : sh_n[15:0]);
            if (cnt == 16'd7)  msg.reader_id <= sh_n;
            if (cnt == 16'd11) msg.writer_id <= sh_n;
            if (cnt == 16'd15) msg.sn[63:32] <= field;
            if (cnt == 16'd19) msg.sn[31:0]  <= field;
            if (cnt >= pstart && cnt >= 16'd20) begin
              if (cnt - pstart < 16'(MAX_PAYLOAD)) begin
                msg.data[8*(cnt - pstart) +: 8] <= s_tdata;
                msg.len <= plen_t'(cnt - pstart + 16'd1);
              end else
                too_long <= 1'b1;
            end
          end else if (sub_id == RTPS_SUB_ACKNACK) begin
            if (cnt == 16'd3)  msg.reader_id <= sh_n;
            if (cnt == 16'd7)  msg.writer_id <= sh_n;
            if (cnt == 16'd11) msg.sn[63:32] <= field;
            if (cnt == 16'd15) msg.sn[31:0]  <= field;
            if (cnt == 16'd19) keep          <= (field != 32'd0);   // numBits
            if (cnt == 16'd23) keep          <= keep && field[31];  // bit of base
          end
          if (body_end || s_tlast) begin
            if ((sub_id == RTPS_SUB_DATA && !too_long_n && cnt >= 16'd19) ||
                (sub_id == RTPS_SUB_ACKNACK && keep && cnt >= 16'd23))
              state <= EMIT;
            else if (s_tlast)
              state <= IDLE;
            else begin
              cnt   <= '0;
              state <= SUBHDR;
            end
            if ((sub_id == RTPS_SUB_DATA && (too_long_n || cnt < 16'd19)) ||
                (sub_id == RTPS_SUB_ACKNACK && cnt < 16'd23))
              drop_count <= drop_count + 1'b1;
          end
        end
        EMIT: if (m_ready) begin
          msg_count <= msg_count + 1'b1;
          cnt       <= '0;
          state     <= last_seen ? IDLE : SUBHDR;
        end
        DROP: if (in_fire && s_tlast) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
