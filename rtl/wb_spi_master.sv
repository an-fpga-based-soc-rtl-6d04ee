// wb_spi_master: byte-wide SPI master (mode 0) on the Wishbone bus, used by
// the controller to read pixels and weights from the external SPI Flash.
//
// Registers (word offsets): 0 DATA  - write starts an 8-bit transfer of
// dat[7:0], MSB first; read returns the last byte received. 1 STATUS - b0
// busy. 2 CS - b0 drives spi_cs_n (software frames Flash commands). 3 DIV -
// half-period of SCLK in clock cycles (reset DIV_RESET, minimum 1).
// SCLK idles low, MOSI changes on the falling edge and MISO is sampled on
// the rising edge, so a byte takes 16*DIV cycles. A DATA write while busy
// is ignored. The paper only names the block; register map, mode and timing
// are this design's choices. Single-cycle Wishbone ack.
module wb_spi_master
  import snn_pkg::*;
#(
  parameter int unsigned DIV_RESET = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_m2s_t wb_i,
  output wb_s2m_t wb_o,
  output logic    spi_sclk,
  output logic    spi_mosi,
  input  logic    spi_miso,
  output logic    spi_cs_n
);
  logic        ack_q, sel, busy;
  logic [15:0] div, cnt;
  logic [7:0]  sh_out, sh_in, rx;
  logic [3:0]  edges;
  logic [31:0] rdata;

  assign sel = wb_i.cyc && wb_i.stb && !ack_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_q <= 1'b0; rdata <= '0; busy <= 1'b0; div <= 16'(DIV_RESET); cnt <= '0;
      sh_out <= '0; sh_in <= '0; rx <= '0; edges <= '0;
      spi_sclk <= 1'b0; spi_cs_n <= 1'b1;
    end else begin
      ack_q <= sel;
      if (sel && wb_i.we) begin
        unique case (wb_i.adr[3:2])
          2'd0: if (!busy) begin
            busy   <= 1'b1;
            sh_out <= wb_i.dat[7:0];
            edges  <= '0;
            cnt    <= '0;
          end
          2'd2: spi_cs_n <= wb_i.dat[0];
          2'd3: div <= (wb_i.dat[15:0] == 0) ? 16'd1 : wb_i.dat[15:0];
          default: ;
        endcase
      end
      if (sel && !wb_i.we) begin
        unique case (wb_i.adr[3:2])
          2'd0:    rdata <= {24'd0, rx};
          2'd1:    rdata <= {31'd0, busy};
          2'd2:    rdata <= {31'd0, spi_cs_n};
          default: rdata <= {16'd0, div};
        endcase
      end
      if (busy) begin
        if (cnt + 1'b1 >= div) begin
          cnt <= '0;
          edges <= edges + 1'b1;
          if (!spi_sclk) begin               // rising edge: sample
            spi_sclk <= 1'b1;
            sh_in    <= {sh_in[6:0], spi_miso};
          end else begin                     // falling edge: shift out
            spi_sclk <= 1'b0;
            sh_out   <= {sh_out[6:0], 1'b0};
            if (edges == 4'd15) begin
              busy <= 1'b0;
              rx   <= sh_in;
            end
          end
        end else cnt <= cnt + 1'b1;
      end
    end
  end

  assign spi_mosi = sh_out[7];
  assign wb_o.ack = ack_q;
  assign wb_o.dat = rdata;
endmodule
