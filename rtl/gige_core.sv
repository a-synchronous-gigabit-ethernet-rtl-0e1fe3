// gige_core: the Gigabit Ethernet core, MAC plus embedded UDP/IP protocol
// stack, for a GMII PHY at 125 MHz.
//
// Transmit ("Data-Pull"): the Ethernet layer (eth_tx) serves two upper
// modules through a layer_arbiter, ARP (priority) and IP; the IP layer
// (ip_tx) serves three through a second layer_arbiter, ICMP (priority), the
// microcontroller's UDP channel and the application's UDP channel. Each
// layer sends its own header and pulls the granted upper module just in
// time, so every byte passes one register per layer and nothing is buffered
// twice; the only payload buffers are the channel FIFOs and the one-packet
// stores of ARP and ICMP. mac_tx adds preamble, SFD, padding, FCS and the
// interframe gap.
// Receive: mac_rx -> eth_rx -> ARP and ip_rx -> ICMP and udp_rx; each layer
// strips its header and the storing layers keep one packet.
// Slow control (addresses, ports, Ping, UDP receive, PTP time, MDIO) goes
// through bus_regs to an external microcontroller; the high-rate
// application writes 32-bit words into its FIFO in its own clock domain.
// The whole core runs in the GMII transmit clock domain (clk, 125 MHz);
// the paper lets the receive path share it (no clock domain crossing FIFO).
// Parameters: PAYLOAD_BYTES is the fixed UDP payload of both channels
// (1472, or 8972 for jumbo frames), FIFO_WORDS the depth of each channel
// FIFO in 32-bit words.
module gige_core #(
  parameter int PAYLOAD_BYTES = 1472,
  parameter int FIFO_WORDS    = 1024,
  parameter int PPS_BIT       = 28
) (
  input  logic        clk,          // 125 MHz
  input  logic        rst,
  // application FIFO interface
  input  logic        app_clk,
  input  logic        app_rst,
  input  logic        app_wr_en,
  input  logic [31:0] app_wdata,
  output logic        app_full,
  // microcontroller bus
  input  logic [15:0] bus_addr,
  input  logic        bus_we,
  input  logic        bus_re,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  output logic        irq,
  // GMII
  output logic        gmii_gtx_clk,
  output logic        gmii_tx_en,
  output logic        gmii_tx_er,
  output logic [7:0]  gmii_txd,
  input  logic        gmii_rx_dv,
  input  logic        gmii_rx_er,
  input  logic [7:0]  gmii_rxd,
  // MDIO
  output logic        mdc,
  output logic        mdio_o,
  output logic        mdio_oe,
  input  logic        mdio_i,
  // PTP
  output logic [63:0] time_ns,
  output logic        pps
);
  import gige_pkg::*;

  localparam int ICMP_BYTES  = 1024;
  localparam int UDPRX_BYTES = 2048;

  // ---------------- configuration ----------------
  logic [47:0] my_mac, gw_mac;
  logic [31:0] my_ip, dst_ip;
  logic [15:0] app_src_port, app_dst_port, uc_src_port, uc_dst_port, rx_port;
  logic [7:0]  ifg_cycles;

  // ---------------- MAC ----------------
  logic       eth_tx_en, mac_busy, tx_sfd, rx_sfd;
  logic [7:0] eth_txd;
  rx_stream_t mac_rx_s, eth_rx_s, ip_rx_s;

  assign gmii_gtx_clk = clk;

  mac_tx u_mac_tx (
    .clk, .rst, .ifg_cycles,
    .tx_en(eth_tx_en), .txd(eth_txd), .tx_busy(mac_busy),
    .phy_txen(gmii_tx_en), .phy_txer(gmii_tx_er), .phy_txd(gmii_txd), .tx_sfd
  );

  mac_rx u_mac_rx (
    .clk, .rst, .phy_rxdv(gmii_rx_dv), .phy_rxer(gmii_rx_er), .phy_rxd(gmii_rxd),
    .rx(mac_rx_s), .rx_sfd
  );

  // ---------------- Ethernet layer ----------------
  logic               l1_req, l1_lock, l1_start;
  tx_meta_t           l1_meta;
  tx_data_t           l1_data;
  logic [1:0]         l2_avail, l2_start;
  tx_meta_t [1:0]     l2_meta;
  tx_data_t [1:0]     l2_data;
  logic [0:0]         l1_grant;
  logic [15:0]        rx_ethertype;
  logic [47:0]        rx_src_mac;

  eth_tx u_eth_tx (
    .clk, .rst, .my_mac,
    .req(l1_req), .meta(l1_meta), .up(l1_data), .start(l1_start), .lock(l1_lock),
    .mac_busy, .tx_en(eth_tx_en), .txd(eth_txd)
  );

  layer_arbiter #(.N(2)) u_arb_eth (
    .clk, .rst, .avail(l2_avail), .meta(l2_meta), .data(l2_data), .start_up(l2_start),
    .lock(l1_lock), .start(l1_start), .req(l1_req), .meta_sel(l1_meta),
    .data_sel(l1_data), .grant(l1_grant)
  );

  eth_rx u_eth_rx (
    .clk, .rst, .my_mac, .rx_in(mac_rx_s), .rx_out(eth_rx_s),
    .ethertype(rx_ethertype), .src_mac(rx_src_mac)
  );

  // ---------------- ARP (upper module 0 of the Ethernet layer) ----------------
  logic arp_pending;

  arp u_arp (
    .clk, .rst, .my_mac, .my_ip, .rx(eth_rx_s), .ethertype(rx_ethertype),
    .avail(l2_avail[0]), .meta(l2_meta[0]), .start(l2_start[0]), .dout(l2_data[0]),
    .pending(arp_pending)
  );

  // ---------------- IP layer (upper module 1 of the Ethernet layer) ----------------
  logic               l2_req, l2_lock, l2_ip_start;
  tx_meta_t           l2_sel_meta;
  tx_data_t           l2_sel_data;
  logic [2:0]         l3_avail, l3_start;
  tx_meta_t [2:0]     l3_meta;
  tx_data_t [2:0]     l3_data;
  logic [1:0]         l2_grant;
  logic [7:0]         rx_proto;
  logic [31:0]        rx_src_ip;
  logic [15:0]        rx_ip_len;

  ip_tx u_ip_tx (
    .clk, .rst, .my_ip, .gw_mac,
    .avail(l2_avail[1]), .meta_out(l2_meta[1]), .start(l2_start[1]), .dout(l2_data[1]),
    .req(l2_req), .meta(l2_sel_meta), .up(l2_sel_data), .start_up(l2_ip_start), .lock(l2_lock)
  );

  layer_arbiter #(.N(3)) u_arb_ip (
    .clk, .rst, .avail(l3_avail), .meta(l3_meta), .data(l3_data), .start_up(l3_start),
    .lock(l2_lock), .start(l2_ip_start), .req(l2_req), .meta_sel(l2_sel_meta),
    .data_sel(l2_sel_data), .grant(l2_grant)
  );

  ip_rx u_ip_rx (
    .clk, .rst, .my_ip, .rx_in(eth_rx_s), .ethertype(rx_ethertype), .rx_out(ip_rx_s),
    .proto(rx_proto), .src_ip(rx_src_ip), .pay_len(rx_ip_len)
  );

  // ---------------- ICMP (upper module 0 of the IP layer) ----------------
  logic                          icmp_rx_valid, icmp_rx_release, icmp_tx_we, icmp_tx_send, icmp_tx_busy;
  logic [15:0]                   icmp_rx_len, icmp_tx_len;
  logic [31:0]                   icmp_rx_src_ip, icmp_tx_dst_ip;
  logic [$clog2(ICMP_BYTES)-1:0] icmp_rx_raddr, icmp_tx_waddr;
  logic [7:0]                    icmp_rx_rdata, icmp_tx_wdata;

  icmp #(.BUF_BYTES(ICMP_BYTES)) u_icmp (
    .clk, .rst, .rx(ip_rx_s), .rx_proto, .rx_ip(rx_src_ip),
    .rx_valid(icmp_rx_valid), .rx_len(icmp_rx_len), .rx_src_ip(icmp_rx_src_ip),
    .rx_raddr(icmp_rx_raddr), .rx_rdata(icmp_rx_rdata), .rx_release(icmp_rx_release),
    .tx_we(icmp_tx_we), .tx_waddr(icmp_tx_waddr), .tx_wdata(icmp_tx_wdata),
    .tx_len(icmp_tx_len), .tx_dst_ip(icmp_tx_dst_ip), .tx_send(icmp_tx_send),
    .tx_busy(icmp_tx_busy),
    .avail(l3_avail[0]), .meta(l3_meta[0]), .start(l3_start[0]), .dout(l3_data[0])
  );

  // ---------------- UDP channels (upper modules 1 and 2 of the IP layer) ----------------
  logic        uc_wr_en, uc_full;
  logic [31:0] uc_wdata;
  logic        uc_pkt_empty, uc_pkt_pop, uc_rd_en, app_pkt_empty, app_pkt_pop, app_rd_en;
  logic [15:0] uc_pkt_sum, app_pkt_sum;
  logic [31:0] uc_rdata, app_rdata;

  udp_payload_fifo #(.PAYLOAD_BYTES(PAYLOAD_BYTES), .DEPTH(FIFO_WORDS)) u_uc_fifo (
    .wclk(clk), .wrst(rst), .wr_en(uc_wr_en), .wdata(uc_wdata), .full(uc_full),
    .rclk(clk), .rrst(rst), .pkt_empty(uc_pkt_empty), .pkt_sum(uc_pkt_sum),
    .pkt_pop(uc_pkt_pop), .rd_en(uc_rd_en), .rdata(uc_rdata)
  );

  udp_tx #(.PAYLOAD_BYTES(PAYLOAD_BYTES)) u_udp_uc (
    .clk, .rst, .my_ip, .dst_ip, .src_port(uc_src_port), .dst_port(uc_dst_port),
    .pkt_empty(uc_pkt_empty), .pkt_sum(uc_pkt_sum), .pkt_pop(uc_pkt_pop),
    .rd_en(uc_rd_en), .rdata(uc_rdata),
    .avail(l3_avail[1]), .meta(l3_meta[1]), .start(l3_start[1]), .dout(l3_data[1])
  );

  udp_payload_fifo #(.PAYLOAD_BYTES(PAYLOAD_BYTES), .DEPTH(FIFO_WORDS)) u_app_fifo (
    .wclk(app_clk), .wrst(app_rst), .wr_en(app_wr_en), .wdata(app_wdata), .full(app_full),
    .rclk(clk), .rrst(rst), .pkt_empty(app_pkt_empty), .pkt_sum(app_pkt_sum),
    .pkt_pop(app_pkt_pop), .rd_en(app_rd_en), .rdata(app_rdata)
  );

  udp_tx #(.PAYLOAD_BYTES(PAYLOAD_BYTES)) u_udp_app (
    .clk, .rst, .my_ip, .dst_ip, .src_port(app_src_port), .dst_port(app_dst_port),
    .pkt_empty(app_pkt_empty), .pkt_sum(app_pkt_sum), .pkt_pop(app_pkt_pop),
    .rd_en(app_rd_en), .rdata(app_rdata),
    .avail(l3_avail[2]), .meta(l3_meta[2]), .start(l3_start[2]), .dout(l3_data[2])
  );

  logic                           udp_rx_valid, udp_rx_release;
  logic [15:0]                    udp_rx_len, udp_rx_src_port;
  logic [31:0]                    udp_rx_src_ip;
  logic [$clog2(UDPRX_BYTES)-1:0] udp_rx_raddr;
  logic [7:0]                     udp_rx_rdata;

  udp_rx #(.BUF_BYTES(UDPRX_BYTES)) u_udp_rx (
    .clk, .rst, .my_port(rx_port), .rx(ip_rx_s), .rx_proto, .rx_ip(rx_src_ip),
    .rx_ip_len, .rx_valid(udp_rx_valid), .rx_len(udp_rx_len), .rx_src_ip(udp_rx_src_ip),
    .rx_src_port(udp_rx_src_port), .rx_raddr(udp_rx_raddr), .rx_rdata(udp_rx_rdata),
    .rx_release(udp_rx_release)
  );

  // ---------------- PTP clock ----------------
  logic        ptp_load, ptp_adjust;
  logic [63:0] ptp_load_val, ptp_tx_ts, ptp_rx_ts;
  logic [31:0] ptp_adjust_ns;

  ptp_clock #(.PPS_BIT(PPS_BIT)) u_ptp (
    .clk, .rst, .load(ptp_load), .load_val(ptp_load_val), .adjust(ptp_adjust),
    .adjust_ns(ptp_adjust_ns), .tx_sfd, .rx_sfd, .time_ns, .tx_ts(ptp_tx_ts),
    .rx_ts(ptp_rx_ts), .pps
  );

  // ---------------- MDIO ----------------
  logic        mdio_cmd_valid, mdio_cmd_read, mdio_busy;
  logic [4:0]  mdio_cmd_phy, mdio_cmd_reg;
  logic [15:0] mdio_cmd_wdata, mdio_rdata;

  mdio_master u_mdio (
    .clk, .rst, .cmd_valid(mdio_cmd_valid), .cmd_read(mdio_cmd_read),
    .cmd_phy(mdio_cmd_phy), .cmd_reg(mdio_cmd_reg), .cmd_wdata(mdio_cmd_wdata),
    .busy(mdio_busy), .rdata(mdio_rdata), .mdc, .mdio_o, .mdio_oe, .mdio_i
  );

  // ---------------- microcontroller bus ----------------
  bus_regs #(.ICMP_AW($clog2(ICMP_BYTES)), .UDPRX_AW($clog2(UDPRX_BYTES))) u_bus (
    .clk, .rst, .bus_addr, .bus_we, .bus_re, .bus_wdata, .bus_rdata, .irq,
    .my_mac, .my_ip, .gw_mac, .dst_ip, .app_src_port, .app_dst_port,
    .uc_src_port, .uc_dst_port, .rx_port, .ifg_cycles,
    .icmp_rx_valid, .icmp_rx_len, .icmp_rx_src_ip, .icmp_rx_raddr, .icmp_rx_rdata,
    .icmp_rx_release, .icmp_tx_we, .icmp_tx_waddr, .icmp_tx_wdata, .icmp_tx_len,
    .icmp_tx_dst_ip, .icmp_tx_send, .icmp_tx_busy,
    .uc_wr_en, .uc_wdata, .uc_full,
    .udp_rx_valid, .udp_rx_len, .udp_rx_src_ip, .udp_rx_src_port, .udp_rx_raddr,
    .udp_rx_rdata, .udp_rx_release,
    .ptp_load, .ptp_load_val, .ptp_adjust, .ptp_adjust_ns, .ptp_time(time_ns),
    .ptp_tx_ts, .ptp_rx_ts,
    .mdio_cmd_valid, .mdio_cmd_read, .mdio_cmd_phy, .mdio_cmd_reg, .mdio_cmd_wdata,
    .mdio_busy, .mdio_rdata
  );
endmodule
