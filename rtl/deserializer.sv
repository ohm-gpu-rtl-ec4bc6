// deserializer: SerDes receive half behind each optical detector.
//
// Collects W-bit flits, least significant word first, while valid is high. The
// first HDR_W/W flits form the header; its command tells whether a cache line
// follows. When the last flit arrives the packet is presented on pkt with
// pkt_valid for one clock. A break in valid in the middle of a packet drops the
// partial packet (err pulses). The paper gives only the function (serial to
// parallel); the framing is this design's own.
module deserializer
  import ohm_pkg::*;
#(
  parameter int unsigned W = VC_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid,
  input  logic [W-1:0] flit,
  output logic         pkt_valid,
  output pkt_t         pkt,
  output logic         err
);
  localparam int unsigned PW = HDR_W + LINE_W;
  localparam int unsigned NF = PW / W;
  localparam int unsigned HF = HDR_W / W;
  logic [NF-1:0][W-1:0] buf_q;
  logic [$clog2(NF+1)-1:0] cnt;
  hdr_t hdr_now;
  int unsigned need;

  // header as it will be once flit HF-1 is in
  always_comb begin
    logic [NF-1:0][W-1:0] tmp;
    tmp = buf_q;
    if (valid && cnt < NF) tmp[cnt] = flit;
    hdr_now = hdr_t'(tmp[HF-1:0]);
    need = pkt_flits(hdr_now.cmd);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0; cnt <= '0; pkt_valid <= 1'b0; pkt <= '0; err <= 1'b0;
    end else begin
      pkt_valid <= 1'b0;
      err       <= 1'b0;
      if (valid) begin
        buf_q[cnt] <= flit;
        if (cnt >= HF-1 && 32'(cnt) + 1 == need) begin
          pkt_valid <= 1'b1;
          pkt.hdr   <= hdr_now;
          pkt.data  <= '0;
          for (int i = HF; i < NF; i++)
            if (i < int'(cnt)) pkt.data[(i-HF)*W +: W] <= buf_q[i];
            else if (i == int'(cnt)) pkt.data[(i-HF)*W +: W] <= flit;
          cnt <= '0;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end else if (cnt != 0) begin
        err <= 1'b1;
        cnt <= '0;
      end
    end
  end
endmodule
