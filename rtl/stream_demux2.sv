// stream_demux2: steers a header record and the payload stream that follows
// it to one of two outputs.
//
// While idle, the header on the input is offered to output 1 when sel1 is
// high and to output 0 otherwise (sel1 is computed by the parent from the
// header itself, e.g. from the EtherType or IP protocol). Once the chosen
// output accepts the header, payload bytes go to the same output until the
// byte with tlast, and no new header is accepted before that. Combinational
// data path, no added latency. Header type is a parameter.
module stream_demux2 #(
  parameter type H = logic [7:0]
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       sel1,
  input  logic       s_hdr_valid,
  output logic       s_hdr_ready,
  input  H           s_hdr,
  input  logic [7:0] s_tdata,
  input  logic       s_tvalid,
  input  logic       s_tlast,
  output logic       s_tready,
  output logic       m_hdr_valid [2],
  input  logic       m_hdr_ready [2],
  output H           m_hdr       [2],
  output logic [7:0] m_tdata     [2],
  output logic       m_tvalid    [2],
  output logic       m_tlast     [2],
  input  logic       m_tready    [2]
);
  logic busy, sel;

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      m_hdr[i]       = s_hdr;
      m_hdr_valid[i] = !busy && s_hdr_valid && (sel1 == (i == 1));
      m_tdata[i]     = s_tdata;
      m_tlast[i]     = s_tlast;
      m_tvalid[i]    = busy && s_tvalid && (sel == (i == 1));
    end
    s_hdr_ready = !busy && m_hdr_ready[sel1];
    s_tready    = busy && m_tready[sel];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      sel  <= 1'b0;
    end else if (!busy) begin
      if (s_hdr_valid && s_hdr_ready) begin
        busy <= 1'b1;
        sel  <= sel1;
      end
    end else if (s_tvalid && s_tready && s_tlast) begin
      busy <= 1'b0;
    end
  end
endmodule
