// report_framer: sends the receiver's per-symbol statistics over the UART,
// doing in logic the reporting job of the prototype's embedded processor.
//
// The G superbin sums S(g) and the G running sums H(g) of a symbol are
// captured as they stream past. When H(G-1) arrives the pair of vectors is
// copied into a send buffer and transmitted as one frame:
//   0xA5 0x5A, then S(0)..S(G-1), then H(0)..H(G-1), each value as 6 bytes,
//   most significant byte first (values zero-extended to 48 bits).
// If a new symbol completes while a frame is still being sent, the new one is
// not sent and 'dropped' pulses: at 115,200 baud a 16-superbin frame
// (194 bytes, 16.8 ms) fits within one SF=10 symbol (20.48 ms at 50 kHz).
//
// Interface: valid/ready byte stream into uart_tx.
// Paper: S and H are sent by UART to a host for display and logging. Own
// choices: the frame layout and the drop rule.
module report_framer #(
  parameter int unsigned G  = 16,
  parameter int unsigned SW = 38,
  parameter int unsigned HW = 44,
  localparam int unsigned GW = (G > 1) ? $clog2(G) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          s_vld,
  input  logic [GW-1:0] s_idx,
  input  logic [SW-1:0] s_val,
  input  logic          h_vld,
  input  logic [GW-1:0] h_idx,
  input  logic [HW-1:0] h_val,
  output logic          tx_valid,
  output logic [7:0]    tx_data,
  input  logic          tx_ready,
  output logic          dropped
);
  localparam int unsigned NBYTES = 2 + 2 * G * 6;
  localparam int unsigned BW     = $clog2(NBYTES + 1);

  logic [47:0] cap  [2*G];   // capture: S in 0..G-1, H in G..2G-1
  logic [47:0] sbuf [2*G];   // frame being sent
  logic        busy;
  logic [BW-1:0] bidx;       // index of the byte on tx_data
  logic [BW-1:0] vbyte;      // byte index within the value part
  logic [$clog2(2*G)-1:0] vsel;
  logic [2:0]  bsel;

  always_comb begin
    vbyte = bidx - BW'(2);
    vsel  = ($clog2(2*G))'(vbyte / 6);
    bsel  = 3'(vbyte % 6);
    if (bidx == '0)      tx_data = 8'hA5;
    else if (bidx == 1)  tx_data = 8'h5A;
    else                 tx_data = sbuf[vsel][8*(5-bsel) +: 8];
  end
  assign tx_valid = busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      bidx    <= '0;
      dropped <= 1'b0;
      for (int i = 0; i < 2*G; i++) begin
        cap[i]  <= '0;
        sbuf[i] <= '0;
      end
    end else begin
      dropped <= 1'b0;
      if (s_vld) cap[($clog2(2*G))'(s_idx)] <= 48'(s_val);
      if (h_vld) cap[($clog2(2*G))'(G) + ($clog2(2*G))'(h_idx)] <= 48'(h_val);
      if (busy && tx_ready) begin
        if (bidx == BW'(NBYTES - 1)) begin
          busy <= 1'b0;
          bidx <= '0;
        end else begin
          bidx <= bidx + 1'b1;
        end
      end
      if (h_vld && h_idx == GW'(G - 1)) begin
        if (busy) begin
          dropped <= 1'b1;
        end else begin
          busy <= 1'b1;
          bidx <= '0;
          for (int i = 0; i < 2*G - 1; i++) sbuf[i] <= cap[i];
          sbuf[2*G-1] <= 48'(h_val);
        end
      end
    end
  end
endmodule
