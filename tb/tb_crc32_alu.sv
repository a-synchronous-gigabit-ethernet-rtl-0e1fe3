// tb_crc32_alu: checks the byte-wise CRC-32 step against a bit-serial
// reference for random bytes, and the FCS of the example frame printed in
// the paper (12 BE 6D E5 on the wire).
module tb_crc32_alu;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] crc_in, crc_out;
  logic [7:0]  data;
  crc32_alu dut (.crc_in, .data, .crc_out);

  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    bytes_t f;
    bit [31:0] c, ref_c;
    // random single steps against the bit-serial model
    for (int n = 0; n < 500; n++) begin
      crc_in = $urandom; data = 8'($urandom);
      #1;
      ref_c = crc_in;
      for (int b = 0; b < 8; b++) begin
        bit fb;
        fb = ref_c[0] ^ data[b];
        ref_c = ref_c >> 1;
        if (fb) ref_c ^= 32'hEDB88320;
      end
      check(crc_out == ref_c, $sformatf("step crc_in=%h data=%h", crc_in, data));
    end
    // the paper's frame padded with 0xAA
    f = paper_frame();
    while (f.size() < 60) f.push_back(8'hAA);
    c = 32'hFFFF_FFFF;
    foreach (f[i]) begin crc_in = c; data = f[i]; #1; c = crc_out; end
    check(~c == 32'hE56DBE12, $sformatf("paper FCS %h", ~c));
    // residue after the FCS
    ref_c = ~c;
    for (int i = 0; i < 4; i++) begin crc_in = c; data = ref_c[8*i +: 8]; #1; c = crc_out; end
    check(c == 32'hDEBB20E3, "residue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
