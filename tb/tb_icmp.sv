// tb_icmp: an echo request stream must be stored and flagged (rx_valid,
// length, source) and be readable; a second message is dropped until
// release. A reply written through the transmit port must be sent with the
// checksum computed by the layer.
module tb_icmp;
  import tb_util_pkg::*;
  import gige_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  rx_stream_t rx = RX_IDLE;
  logic [7:0] rx_proto = 8'd1, rx_rdata, tx_wdata = 0;
  logic rx_valid, rx_release = 0, tx_we = 0, tx_send = 0, tx_busy, avail, start = 0;
  logic [15:0] rx_len, tx_len = 0;
  logic [31:0] rx_src_ip, tx_dst_ip = 0;
  logic [7:0] rx_raddr = 0, tx_waddr = 0;
  tx_meta_t meta;
  tx_data_t dout;
  icmp #(.BUF_BYTES(256)) dut (.clk, .rst, .rx, .rx_proto, .rx_ip(32'h0A00_0001), .rx_valid, .rx_len,
    .rx_src_ip, .rx_raddr, .rx_rdata, .rx_release, .tx_we, .tx_waddr, .tx_wdata, .tx_len,
    .tx_dst_ip, .tx_send, .tx_busy, .avail, .meta, .start, .dout);

  bytes_t got;
  always @(posedge clk) if (!rst && dout.en) got.push_back(dout.d);
  task automatic send(bytes_t q, bit ok);
    foreach (q[i]) begin @(negedge clk); rx = '{sof: i == 0, valid: 1'b1, data: q[i], eof: 1'b0, ok: 1'b0}; end
    @(negedge clk); rx = '{sof: 1'b0, valid: 1'b0, data: 8'h0, eof: 1'b1, ok: ok};
    @(negedge clk); rx = RX_IDLE;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    bytes_t req, rd, rep;
    repeat (3) @(negedge clk); rst = 0;
    req = icmp_echo(8'd8, 16'h0042, 16'd1, 40);
    rx_proto = 8'd17; send(req, 1);
    check(!rx_valid, "UDP datagram ignored");
    rx_proto = 8'd1; send(req, 0);
    check(!rx_valid, "bad frame ignored");
    send(req, 1);
    check(rx_valid && rx_len == 16'(req.size()) && rx_src_ip == 32'h0A00_0001, "request stored");
    send(icmp_echo(8'd8, 16'h0043, 16'd2, 8), 1);
    rd = {};
    for (int i = 0; i < req.size(); i++) begin rx_raddr = 8'(i); #1 rd.push_back(rx_rdata); end
    check(same(rd, req), "request bytes (second message dropped)");
    @(negedge clk); rx_release = 1; @(negedge clk); rx_release = 0;
    check(!rx_valid, "released");
    // reply
    rep = icmp_echo(8'd0, 16'h0042, 16'd1, 40);
    foreach (rep[i]) begin
      @(negedge clk); tx_we = 1; tx_waddr = 8'(i); tx_wdata = (i == 2 || i == 3) ? 8'h55 : rep[i];
    end
    @(negedge clk); tx_we = 0; tx_len = 16'(rep.size()); tx_dst_ip = 32'h0A00_0001; tx_send = 1;
    @(negedge clk); tx_send = 0;
    check(tx_busy, "busy after send");
    repeat (60) @(negedge clk);
    check(avail && meta.len == 16'(rep.size()) && meta.proto == 8'd1 && meta.dst_ip == 32'h0A00_0001, "avail/meta");
    got = {};
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (60) @(negedge clk);
    check(same(got, rep), "reply with computed checksum");
    check(!tx_busy && !avail, "done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
