// lv2_eth_tx: sends the events read from the Lv2 memory to the Lv3 farm.
//
// Each event (EV_WORDS words of 256 bits) is cut into packets of at most
// PKT_MEM_WORDS words. Every packet starts with an 8-byte header:
//   byte 0 destination node, byte 1 source module (SRC_ID),
//   bytes 2-3 event number, bytes 4-5 packet sequence within the event,
//   bytes 6-7 payload length in bytes,
// followed by the payload, each word sent as link 0 first, high byte first.
// The destination changes from event to event: node = event number mod
// N_NODES, taken from the header word the ADC modules put at the start of
// each event. As every Lv2 module derives the same node from the same event
// number, the Ethernet switch delivers all pieces of one event to one Lv3
// node, which is how events are built. Per-event destination switching
// follows the description; the header, packet size and node rule are this
// design's choices.
// Timing: one byte per clock when tx_ready is high (1 Gb/s at 125 MHz);
// tx_sop/tx_eop mark the first and last byte of a packet and tx_dest holds
// the packet's destination for its whole length. An input word is taken
// (in_ready) with its last byte.
module lv2_eth_tx
  import koto_pkg::*;
#(
  parameter int unsigned EV_WORDS      = PKT_WORDS,
  parameter int unsigned PKT_MEM_WORDS = 32,
  parameter int unsigned N_NODES       = N_LV3_NODES,
  parameter logic [7:0]  SRC_ID        = 8'd0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  logic [MEM_W-1:0] in_data,
  output logic             in_ready,
  output logic             tx_valid,
  output logic [7:0]       tx_data,
  output logic             tx_sop,
  output logic             tx_eop,
  output logic [7:0]       tx_dest,
  input  logic             tx_ready,
  output logic [31:0]      n_events
);

  localparam int unsigned BPW = MEM_W / 8;              // 32 bytes per word
  localparam int unsigned EW  = $clog2(EV_WORDS + 1);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_PAY} state_t;
  state_t            state;
  logic [EW-1:0]     wi;        // words of the event already sent
  logic [EW-1:0]     pw;        // words in this packet
  logic [EW-1:0]     pcnt;      // words of this packet sent
  logic [4:0]        bidx;      // byte within word
  logic [2:0]        hidx;      // byte within header
  logic [15:0]       evno, seq, plen;
  logic [7:0]        dest;
  logic [7:0]        hbyte, pbyte;
  logic [EW-1:0]     left, pw_n;

  assign left = EW'(EV_WORDS) - wi;
  assign pw_n = (left > EW'(PKT_MEM_WORDS)) ? EW'(PKT_MEM_WORDS) : left;

  always_comb begin
    unique case (hidx)
      3'd0: hbyte = dest;
      3'd1: hbyte = SRC_ID;
      3'd2: hbyte = evno[15:8];
      3'd3: hbyte = evno[7:0];
      3'd4: hbyte = seq[15:8];
      3'd5: hbyte = seq[7:0];
      3'd6: hbyte = plen[15:8];
      default: hbyte = plen[7:0];
    endcase
    pbyte = in_data[16*(bidx >> 1) + (bidx[0] ? 0 : 8) +: 8];
  end

  assign tx_valid = (state == S_HDR) || (state == S_PAY && in_valid);
  assign tx_data  = (state == S_HDR) ? hbyte : pbyte;
  assign tx_sop   = (state == S_HDR) && (hidx == 3'd0);
  assign tx_eop   = (state == S_PAY) && (bidx == 5'(BPW-1)) && (pcnt == pw - 1'b1);
  assign tx_dest  = dest;
  assign in_ready = (state == S_PAY) && tx_ready && (bidx == 5'(BPW-1));

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; wi <= '0; pw <= '0; pcnt <= '0; bidx <= '0; hidx <= '0;
      evno <= '0; seq <= '0; plen <= '0; dest <= '0; n_events <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          if (wi == '0) begin
            evno <= in_data[15:0];
            dest <= 8'(in_data[15:0] % 16'(N_NODES));
            seq  <= '0;
          end
          pw    <= pw_n;
          plen  <= 16'(pw_n) * 16'(BPW);
          hidx  <= '0;
          state <= S_HDR;
        end
        S_HDR: if (tx_ready) begin
          hidx <= hidx + 1'b1;
          if (hidx == 3'd7) begin
            state <= S_PAY;
            bidx  <= '0;
            pcnt  <= '0;
          end
        end
        S_PAY: if (tx_ready && in_valid) begin
          bidx <= bidx + 1'b1;
          if (bidx == 5'(BPW-1)) begin
            bidx <= '0;
            pcnt <= pcnt + 1'b1;
            wi   <= wi + 1'b1;
            if (pcnt == pw - 1'b1) begin
              state <= S_IDLE;
              seq   <= seq + 1'b1;
              if (wi == EW'(EV_WORDS - 1)) begin
                wi       <= '0;
                n_events <= n_events + 1;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
