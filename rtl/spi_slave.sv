// SPI slave for configuration and read-back.
//
// SPI mode 0 (data sampled on the rising SCK edge, changed on the falling
// edge), MSB first, no chip select: the slave counts 32-bit frames from reset,
//   {we, target[1:0], addr[20:0], data[7:0]}
// target 0 = control/status registers, 1 = neuron memory ({neuron, byte}),
// 2 = synapse memory ({pre, post/2}, two 4-bit synapses per byte).
// For a write the request is issued after the 32nd bit; for a read, after the
// 24th bit, and the returned byte is shifted out on MISO during bits 25-32
// (MISO is 0 otherwise).  SCK and MOSI are sampled with the system clock
// through two-flop synchronisers, so each SCK phase must last at least 3 clock
// cycles, and for reads the phase after the 24th rising edge must also cover
// the controller's response (a few cycles when the core is idle).
// The three pins are the paper's; the frame format is this design's choice.
module spi_slave
  import thor_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  sck,
  input  logic                  mosi,
  output logic                  miso,
  output logic                  req_valid,
  output logic                  req_we,
  output spi_target_e           req_target,
  output logic [SPI_ADDR_W-1:0] req_addr,
  output logic [7:0]            req_wdata,
  input  logic                  req_ready,
  input  logic [7:0]            req_rdata
);

  logic [2:0]  sck_sync;
  logic [1:0]  mosi_sync;
  logic        rise, fall;
  logic [4:0]  cnt;
  logic [30:0] sr;
  logic [7:0]  tx;
  logic [31:0] frame;

  assign rise  = sck_sync[1] && !sck_sync[2];
  assign fall  = !sck_sync[1] && sck_sync[2];
  assign frame = {sr, mosi_sync[1]};   // complete when the last bit rises

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_sync   <= '0;
      mosi_sync  <= '0;
      cnt        <= '0;
      sr         <= '0;
      tx         <= '0;
      miso       <= 1'b0;
      req_valid  <= 1'b0;
      req_we     <= 1'b0;
      req_target <= TGT_REG;
      req_addr   <= '0;
      req_wdata  <= '0;
    end else begin
      sck_sync  <= {sck_sync[1:0], sck};
      mosi_sync <= {mosi_sync[0], mosi};
      if (req_valid && req_ready) begin
        req_valid <= 1'b0;
        if (!req_we) tx <= req_rdata;
      end
      if (rise) begin
        sr  <= frame[30:0];
        cnt <= cnt + 5'd1;
        if (cnt == 5'd23 && !frame[23]) begin       // read command complete
          req_valid  <= 1'b1;
          req_we     <= 1'b0;
          req_target <= spi_target_e'(frame[22:21]);
          req_addr   <= frame[20:0];
        end
        if (cnt == 5'd31 && frame[31]) begin        // write frame complete
          req_valid  <= 1'b1;
          req_we     <= 1'b1;
          req_target <= spi_target_e'(frame[30:29]);
          req_addr   <= frame[28:8];
          req_wdata  <= frame[7:0];
        end
      end
      if (fall) begin
        if (cnt >= 5'd24) begin
          miso <= tx[7];
          tx   <= {tx[6:0], 1'b0};
        end else begin
          miso <= 1'b0;
        end
      end
    end
  end

endmodule
