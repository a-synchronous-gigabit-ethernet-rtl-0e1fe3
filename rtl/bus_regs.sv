// bus_regs: the microcontroller's bus interface to the core.
//
// A simple synchronous bus (byte address, 32-bit data, single-cycle write
// strobe, read data registered one cycle after the read strobe) gives the
// slow-control processor access to:
//   0x000 own MAC [47:32]        0x004 own MAC [31:0]      0x008 own IP
//   0x00C next-hop MAC [47:32]   0x010 next-hop MAC [31:0] 0x014 destination IP
//   0x018 app channel ports {src, dst}  0x01C uC channel ports {src, dst}
//   0x020 UDP receive port       0x024 interframe gap in cycles
//   0x040 status (r): bit0 ICMP message received, bit1 UDP datagram received,
//         bit2 ICMP transmit busy, bit3 MDIO busy, bit4 uC FIFO full
//   0x044 ICMP rx length (r)  0x048 ICMP rx source IP (r)  0x04C ICMP rx release (w)
//   0x050 ICMP tx length      0x054 ICMP tx destination IP  0x058 ICMP send (w)
//   0x060 write a payload word into the uC UDP channel FIFO (w)
//   0x064 UDP rx length (r)   0x068 UDP rx source IP (r)    0x06C UDP rx source port (r)
//   0x070 UDP rx release (w)
//   0x080/0x084 time [63:32]/[31:0] (r); writing 0x080 then 0x084 loads the time
//   0x088 time adjust, signed ns (w)
//   0x08C/0x090 tx timestamp hi/lo (r)  0x094/0x098 rx timestamp hi/lo (r)
//   0x0B0 MDIO: write {read[31], phy[25:21], reg[20:16], data[15:0]} starts a
//         frame; read returns {busy[31], data[15:0]}
//   0x1000 + 4*i  ICMP buffer byte i (read: receive buffer, write: transmit buffer)
//   0x2000 + 4*i  UDP receive buffer byte i (r)
// irq is high while a received ICMP message or UDP datagram waits.
// The reset values of the addresses and ports are the ones printed in the
// paper's waveforms (own 40:D8:55:05:50:05 / 192.168.0.15, host
// 00:40:9E:03:68:C5 / 192.168.0.1, ports 1025 -> 1024); the map itself is
// this design's own.
module bus_regs #(
  parameter logic [47:0] MY_MAC     = 48'h40D8_5505_5005,
  parameter logic [31:0] MY_IP      = 32'hC0A8_000F,
  parameter logic [47:0] HOST_MAC   = 48'h0040_9E03_68C5,
  parameter logic [31:0] HOST_IP    = 32'hC0A8_0001,
  parameter logic [15:0] SRC_PORT   = 16'd1025,
  parameter logic [15:0] DST_PORT   = 16'd1024,
  parameter logic [7:0]  IFG_CYCLES = 8'd12,
  parameter int          ICMP_AW    = 10,
  parameter int          UDPRX_AW   = 11
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] bus_addr,
  input  logic        bus_we,
  input  logic        bus_re,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  output logic        irq,
  // configuration
  output logic [47:0] my_mac,
  output logic [31:0] my_ip,
  output logic [47:0] gw_mac,
  output logic [31:0] dst_ip,
  output logic [15:0] app_src_port,
  output logic [15:0] app_dst_port,
  output logic [15:0] uc_src_port,
  output logic [15:0] uc_dst_port,
  output logic [15:0] rx_port,
  output logic [7:0]  ifg_cycles,
  // ICMP
  input  logic        icmp_rx_valid,
  input  logic [15:0] icmp_rx_len,
  input  logic [31:0] icmp_rx_src_ip,
  output logic [ICMP_AW-1:0] icmp_rx_raddr,
  input  logic [7:0]  icmp_rx_rdata,
  output logic        icmp_rx_release,
  output logic        icmp_tx_we,
  output logic [ICMP_AW-1:0] icmp_tx_waddr,
  output logic [7:0]  icmp_tx_wdata,
  output logic [15:0] icmp_tx_len,
  output logic [31:0] icmp_tx_dst_ip,
  output logic        icmp_tx_send,
  input  logic        icmp_tx_busy,
  // microcontroller UDP channel
  output logic        uc_wr_en,
  output logic [31:0] uc_wdata,
  input  logic        uc_full,
  // UDP receive
  input  logic        udp_rx_valid,
  input  logic [15:0] udp_rx_len,
  input  logic [31:0] udp_rx_src_ip,
  input  logic [15:0] udp_rx_src_port,
  output logic [UDPRX_AW-1:0] udp_rx_raddr,
  input  logic [7:0]  udp_rx_rdata,
  output logic        udp_rx_release,
  // PTP clock
  output logic        ptp_load,
  output logic [63:0] ptp_load_val,
  output logic        ptp_adjust,
  output logic [31:0] ptp_adjust_ns,
  input  logic [63:0] ptp_time,
  input  logic [63:0] ptp_tx_ts,
  input  logic [63:0] ptp_rx_ts,
  // MDIO
  output logic        mdio_cmd_valid,
  output logic        mdio_cmd_read,
  output logic [4:0]  mdio_cmd_phy,
  output logic [4:0]  mdio_cmd_reg,
  output logic [15:0] mdio_cmd_wdata,
  input  logic        mdio_busy,
  input  logic [15:0] mdio_rdata
);
  logic in_icmp, in_udprx;
  logic [31:0] load_hi;

  assign in_icmp  = (bus_addr[15:12] == 4'h1);
  assign in_udprx = (bus_addr[15:13] == 3'b001);
  assign icmp_rx_raddr  = bus_addr[ICMP_AW+1:2];
  assign udp_rx_raddr   = bus_addr[UDPRX_AW+1:2];
  assign icmp_tx_we     = bus_we && in_icmp;
  assign icmp_tx_waddr  = bus_addr[ICMP_AW+1:2];
  assign icmp_tx_wdata  = bus_wdata[7:0];
  assign uc_wr_en       = bus_we && bus_addr == 16'h0060;
  assign uc_wdata       = bus_wdata;
  assign irq            = icmp_rx_valid || udp_rx_valid;

  // write strobes
  always_comb begin
    icmp_rx_release = bus_we && bus_addr == 16'h004C;
    icmp_tx_send    = bus_we && bus_addr == 16'h0058;
    udp_rx_release  = bus_we && bus_addr == 16'h0070;
    ptp_load        = bus_we && bus_addr == 16'h0084;
    ptp_load_val    = {load_hi, bus_wdata};
    ptp_adjust      = bus_we && bus_addr == 16'h0088;
    ptp_adjust_ns   = bus_wdata;
    mdio_cmd_valid  = bus_we && bus_addr == 16'h00B0 && !mdio_busy;
    mdio_cmd_read   = bus_wdata[31];
    mdio_cmd_phy    = bus_wdata[25:21];
    mdio_cmd_reg    = bus_wdata[20:16];
    mdio_cmd_wdata  = bus_wdata[15:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      my_mac <= MY_MAC; my_ip <= MY_IP; gw_mac <= HOST_MAC; dst_ip <= HOST_IP;
      app_src_port <= SRC_PORT; app_dst_port <= DST_PORT;
      uc_src_port  <= SRC_PORT; uc_dst_port  <= DST_PORT;
      rx_port <= SRC_PORT; ifg_cycles <= IFG_CYCLES;
      icmp_tx_len <= '0; icmp_tx_dst_ip <= HOST_IP; load_hi <= '0;
    end else if (bus_we) begin
      unique case (bus_addr)
        16'h0000: my_mac[47:32] <= bus_wdata[15:0];
        16'h0004: my_mac[31:0]  <= bus_wdata;
        16'h0008: my_ip         <= bus_wdata;
        16'h000C: gw_mac[47:32] <= bus_wdata[15:0];
        16'h0010: gw_mac[31:0]  <= bus_wdata;
        16'h0014: dst_ip        <= bus_wdata;
        16'h0018: {app_src_port, app_dst_port} <= bus_wdata;
        16'h001C: {uc_src_port, uc_dst_port}   <= bus_wdata;
        16'h0020: rx_port       <= bus_wdata[15:0];
        16'h0024: ifg_cycles    <= (bus_wdata[7:0] < 8'd3) ? 8'd3 : bus_wdata[7:0];
        16'h0050: icmp_tx_len   <= bus_wdata[15:0];
        16'h0054: icmp_tx_dst_ip <= bus_wdata;
        16'h0080: load_hi       <= bus_wdata;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) bus_rdata <= '0;
    else if (bus_re) begin
      if (in_icmp)       bus_rdata <= {24'd0, icmp_rx_rdata};
      else if (in_udprx) bus_rdata <= {24'd0, udp_rx_rdata};
      else unique case (bus_addr)
        16'h0000: bus_rdata <= {16'd0, my_mac[47:32]};
        16'h0004: bus_rdata <= my_mac[31:0];
        16'h0008: bus_rdata <= my_ip;
        16'h000C: bus_rdata <= {16'd0, gw_mac[47:32]};
        16'h0010: bus_rdata <= gw_mac[31:0];
        16'h0014: bus_rdata <= dst_ip;
        16'h0018: bus_rdata <= {app_src_port, app_dst_port};
        16'h001C: bus_rdata <= {uc_src_port, uc_dst_port};
        16'h0020: bus_rdata <= {16'd0, rx_port};
        16'h0024: bus_rdata <= {24'd0, ifg_cycles};
        16'h0040: bus_rdata <= {27'd0, uc_full, mdio_busy, icmp_tx_busy, udp_rx_valid, icmp_rx_valid};
        16'h0044: bus_rdata <= {16'd0, icmp_rx_len};
        16'h0048: bus_rdata <= icmp_rx_src_ip;
        16'h0050: bus_rdata <= {16'd0, icmp_tx_len};
        16'h0054: bus_rdata <= icmp_tx_dst_ip;
        16'h0064: bus_rdata <= {16'd0, udp_rx_len};
        16'h0068: bus_rdata <= udp_rx_src_ip;
        16'h006C: bus_rdata <= {16'd0, udp_rx_src_port};
        16'h0080: bus_rdata <= ptp_time[63:32];
        16'h0084: bus_rdata <= ptp_time[31:0];
        16'h008C: bus_rdata <= ptp_tx_ts[63:32];
        16'h0090: bus_rdata <= ptp_tx_ts[31:0];
        16'h0094: bus_rdata <= ptp_rx_ts[63:32];
        16'h0098: bus_rdata <= ptp_rx_ts[31:0];
        16'h00B0: bus_rdata <= {mdio_busy, 15'd0, mdio_rdata};
        default:  bus_rdata <= '0;
      endcase
    end
  end
endmodule
