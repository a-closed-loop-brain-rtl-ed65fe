// spi_slave: host interface (SPI mode 0, MSB first) in the system clock domain.
//
// SCLK, CS_N and MOSI are synchronised with two flip-flops and their edges
// detected in the system clock, so SCLK must be slower than clk/8.  A frame is
// 64 bits while CS_N is low: cmd[7:0], addr[15:0], data[39:0].  After the 24th
// bit, a read command (CMD_RD_REG) raises rd_req for one cycle; rd_data must
// be valid in that same cycle and is shifted out on MISO from the next SCLK
// falling edge on (the master samples it on bits 25-64).  After the 64th bit,
// any other command is handed out as a one-cycle wr_valid pulse with cmd, addr
// and data.  A frame cut short by CS_N going high is discarded.
//
// The paper only names an SPI port; the frame and commands are this design's.
module spi_slave (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sclk,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  output logic        wr_valid,
  output logic [7:0]  cmd,
  output logic [15:0] addr,
  output logic [39:0] data,
  output logic        rd_req,
  input  logic [39:0] rd_data
);

  localparam logic [7:0] CMD_RD_REG = 8'h04;

  logic [2:0] sclk_s, cs_s, mosi_s;
  logic       rise, fall, active;
  logic [6:0] nbits;
  logic [63:0] sh_in;
  logic [39:0] sh_out;

  assign rise   = (sclk_s[2:1] == 2'b01);
  assign fall   = (sclk_s[2:1] == 2'b10);
  assign active = !cs_s[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0; cs_s <= '1; mosi_s <= '0;
      nbits <= '0; sh_in <= '0; sh_out <= '0; miso <= 1'b0;
      wr_valid <= 1'b0; rd_req <= 1'b0; cmd <= '0; addr <= '0; data <= '0;
    end else begin
      sclk_s   <= {sclk_s[1:0], sclk};
      cs_s     <= {cs_s[1:0], cs_n};
      mosi_s   <= {mosi_s[1:0], mosi};
      wr_valid <= 1'b0;
      rd_req   <= 1'b0;
      if (!active) begin
        nbits <= '0;
        miso  <= 1'b0;
      end else begin
        if (rise) begin
          sh_in <= {sh_in[62:0], mosi_s[1]};
          nbits <= nbits + 1'b1;
          if (nbits == 7'd23) begin
            cmd  <= sh_in[22:15];
            addr <= {sh_in[14:0], mosi_s[1]};
            rd_req <= (sh_in[22:15] == CMD_RD_REG);
          end
          if (nbits == 7'd63) begin
            data     <= {sh_in[38:0], mosi_s[1]};
            wr_valid <= (cmd != CMD_RD_REG);
          end
        end
        if (rd_req) sh_out <= rd_data;
        if (fall && nbits >= 7'd24 && nbits < 7'd64) begin
          miso   <= sh_out[39];
          sh_out <= {sh_out[38:0], 1'b0};
        end
      end
    end
  end

endmodule
