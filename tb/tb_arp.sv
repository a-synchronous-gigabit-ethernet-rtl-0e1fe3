// tb_arp: an ARP request for the own address must produce exactly one reply
// frame description (avail, meta) and the 28-byte reply when pulled;
// requests for other addresses, replies, and frames with a bad FCS must be
// ignored; a second request while a reply is pending is dropped.
module tb_arp;
  import tb_util_pkg::*;
  import gige_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  localparam bit [47:0] MY = 48'h40D8_5505_5005, H = 48'h0040_9E03_68C5;
  localparam bit [31:0] MYIP = 32'hC0A8_000F, HIP = 32'hC0A8_0001;
  rx_stream_t rx = RX_IDLE;
  logic [15:0] ethertype = 16'h0806;
  logic avail, start = 0, pending;
  tx_meta_t meta;
  tx_data_t dout;
  arp dut (.clk, .rst, .my_mac(MY), .my_ip(MYIP), .rx, .ethertype, .avail, .meta, .start, .dout, .pending);

  bytes_t got;
  always @(posedge clk) if (!rst && dout.en) got.push_back(dout.d);
  task automatic send(bytes_t q, bit ok);
    foreach (q[i]) begin @(negedge clk); rx = '{sof: i == 0, valid: 1'b1, data: q[i], eof: 1'b0, ok: 1'b0}; end
    @(negedge clk); rx = '{sof: 1'b0, valid: 1'b0, data: 8'h0, eof: 1'b1, ok: ok};
    @(negedge clk); rx = RX_IDLE;
    repeat (3) @(negedge clk);
  endtask
  task automatic pull(output bytes_t r);
    got = {};
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (40) @(negedge clk);
    r = got;
  endtask

  initial begin
    bytes_t q, r, exp;
    repeat (3) @(negedge clk); rst = 0;
    check(!avail, "idle");
    q = arp_msg(16'd1, H, HIP, 48'h0, MYIP); repeat (18) q.push_back(8'h00);
    send(arp_msg(16'd1, H, HIP, 48'h0, MYIP + 1), 1);
    check(!avail, "other target ignored");
    send(arp_msg(16'd2, H, HIP, 48'h0, MYIP), 1);
    check(!avail, "reply ignored");
    send(q, 0);
    check(!avail, "bad FCS ignored");
    send(q, 1);
    check(avail && meta.len == 16'd28 && meta.ethertype == 16'h0806 && meta.dst_mac == H, "request accepted");
    send(arp_msg(16'd1, 48'h0011_2233_4455, 32'h0A000001, 48'h0, MYIP), 1);
    pull(r);
    exp = arp_msg(16'd2, MY, MYIP, H, HIP);
    check(same(r, exp), "reply bytes (first requester)");
    check(!avail && !pending, "reply sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
