// SPI mode-0 master tasks shared by the testbenches. The including module
// must declare sck, cs_n, mosi (driven) and miso (sampled) and a time
// constant SPI_HALF (half SCK period; 100 ns gives the 5 MHz used by the
// processor). One transaction: command byte {write, addr}, then nwords
// 16-bit words, MSB first; MOSI changes on falling edges, MISO is sampled on
// rising edges.
task automatic spi_xfer(input logic wr, input logic [6:0] addr,
                        input logic [15:0] wdata, input int nwords,
                        ref logic [15:0] rwords[$]);
  logic [7:0] cmd;
  logic [15:0] w;
  cmd = {wr, addr};
  rwords.delete();
  cs_n = 1'b0;
  #(SPI_HALF);
  for (int b = 7; b >= 0; b--) begin
    mosi = cmd[b];
    #(SPI_HALF) sck = 1'b1;
    #(SPI_HALF) sck = 1'b0;
  end
  for (int k = 0; k < nwords; k++) begin
    for (int b = 15; b >= 0; b--) begin
      mosi = wdata[b];
      #(SPI_HALF) sck = 1'b1; w[b] = miso;
      #(SPI_HALF) sck = 1'b0;
    end
    rwords.push_back(w);
  end
  #(SPI_HALF) cs_n = 1'b1;
  #(2 * SPI_HALF);
endtask

task automatic spi_write(input logic [6:0] addr, input logic [15:0] d);
  logic [15:0] dummy[$];
  spi_xfer(1'b1, addr, d, 1, dummy);
endtask

task automatic spi_read(input logic [6:0] addr, output logic [15:0] d);
  logic [15:0] r[$];
  spi_xfer(1'b0, addr, 16'h0000, 1, r);
  d = r[0];
endtask
