// eth_tx: transmit side of the Ethernet layer (layer 1 of the stack).
//
// When the arbiter below ARP and IP reports a frame (req) and the MAC is not
// busy, it starts a frame right away: the 14-byte Ethernet header
// (destination MAC from the granted module's meta, own MAC, EtherType from
// the meta) goes out on tx_en/txd, and two cycles before the header ends it
// pulls the upper module with a one-cycle `start` pulse. The upper module
// answers with its first byte in the next cycle; this module registers it,
// so the payload follows the last header byte seamlessly. tx_en falls one
// cycle after the upper module's en falls. Padding and FCS are the MAC's job.
//
// Timing (as in the paper's Data-Pull waveform): req seen in cycle t gives
// tx_en and the first header byte in t+1; `start` is high in the cycle the
// header byte 12 is on txd; upper byte k is on txd 14+k cycles after the
// first header byte.
module eth_tx (
  input  logic                clk,
  input  logic                rst,
  input  logic [47:0]         my_mac,
  // arbiter side (layer above)
  input  logic                req,
  input  gige_pkg::tx_meta_t  meta,
  input  gige_pkg::tx_data_t  up,
  output logic                start,
  output logic                lock,
  // MAC side
  input  logic                mac_busy,
  output logic                tx_en,
  output logic [7:0]          txd
);
  import gige_pkg::*;

  typedef enum logic [1:0] {E_IDLE, E_HDR, E_PULL, E_DATA} state_t;
  state_t       state;
  logic [111:0] hdr;     // remaining header bytes, MSB first
  logic [3:0]   cnt;

  assign lock = (state != E_IDLE) || (req && !mac_busy);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= E_IDLE;
      tx_en <= 1'b0;
      txd   <= 8'hAA;
      start <= 1'b0;
      hdr   <= '0;
      cnt   <= '0;
    end else begin
      start <= 1'b0;
      unique case (state)
        E_IDLE: begin
          tx_en <= 1'b0;
          if (req && !mac_busy) begin
            tx_en <= 1'b1;
            txd   <= meta.dst_mac[47:40];
            hdr   <= {meta.dst_mac[39:0], my_mac, meta.ethertype, 8'h00};
            cnt   <= 4'd1;
            state <= E_HDR;
          end
        end
        E_HDR: begin
          txd <= hdr[111:104];
          hdr <= hdr << 8;
          cnt <= cnt + 4'd1;
          if (cnt == 4'd12) start <= 1'b1;  // visible with header byte 12 on txd
          if (cnt == 4'd13) state <= E_PULL;
        end
        E_PULL: begin   // first upper byte arrives now
          tx_en <= up.en;
          txd   <= up.d;
          state <= up.en ? E_DATA : E_IDLE;
        end
        E_DATA: begin
          tx_en <= up.en;
          if (up.en) txd <= up.d;
          else begin
            txd   <= 8'hAA;
            state <= E_IDLE;
          end
        end
        default: state <= E_IDLE;
      endcase
    end
  end
endmodule
