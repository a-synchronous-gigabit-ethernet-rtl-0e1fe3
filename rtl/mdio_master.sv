// mdio_master: the MDIO management interface to the PHY (IEEE 802.3
// clause 22), operated by the microcontroller.
//
// A command (cmd_valid with read/write, 5-bit PHY and register address and
// 16-bit write data) produces one management frame: 32 preamble ones, start
// 01, opcode (01 write, 10 read), PHY address, register address, turnaround
// (10 when writing; released when reading) and 16 data bits, MSB first.
// mdc runs at clk / (2*DIV); mdio_o changes after the falling edge of mdc
// and mdio_i is sampled at its rising edge. busy is high during the frame;
// rdata holds the last read value.
// The paper only names the interface; the frame is the standard one.
module mdio_master #(
  parameter int DIV = 25   // 125 MHz / 50 = 2.5 MHz
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        cmd_valid,
  input  logic        cmd_read,
  input  logic [4:0]  cmd_phy,
  input  logic [4:0]  cmd_reg,
  input  logic [15:0] cmd_wdata,
  output logic        busy,
  output logic [15:0] rdata,
  output logic        mdc,
  output logic        mdio_o,
  output logic        mdio_oe,
  input  logic        mdio_i
);
  logic [63:0] sh;          // frame bits, MSB first
  logic [6:0]  bitn;        // bits left
  logic        rd;
  logic [$clog2(DIV)-1:0] div;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; rdata <= '0; mdc <= 1'b0; mdio_o <= 1'b1; mdio_oe <= 1'b0;
      sh <= '0; bitn <= '0; rd <= 1'b0; div <= '0;
    end else if (!busy) begin
      mdc     <= 1'b0;
      mdio_oe <= 1'b0;
      if (cmd_valid) begin
        busy <= 1'b1;
        rd   <= cmd_read;
        // the first preamble bit goes out at once
        mdio_o  <= 1'b1;
        mdio_oe <= 1'b1;
        sh   <= {31'h7FFF_FFFF, 2'b01, cmd_read ? 2'b10 : 2'b01, cmd_phy, cmd_reg,
                 cmd_read ? 2'b11 : 2'b10, cmd_read ? 16'hFFFF : cmd_wdata, 1'b0};
        bitn <= 7'd63;
        div  <= '0;
      end
    end else begin
      div <= div + 1'b1;
      if (div == ($bits(div))'(DIV - 1)) begin
        div <= '0;
        mdc <= !mdc;
        if (mdc) begin
          // falling edge: drive the next bit, or finish
          if (bitn == 7'd0) begin
            busy    <= 1'b0;
            mdio_oe <= 1'b0;
          end else begin
            mdio_o  <= sh[63];
            mdio_oe <= !(rd && bitn <= 7'd18);
            sh      <= sh << 1;
            bitn    <= bitn - 7'd1;
          end
        end else if (rd && bitn < 7'd16) begin
          // rising edge: sample read data
          rdata <= {rdata[14:0], mdio_i};
        end
      end
    end
  end
endmodule
