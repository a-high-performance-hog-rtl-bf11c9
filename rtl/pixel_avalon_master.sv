// pixel_avalon_master: Avalon-MM write master storing the frame in SDRAM.
//
// Pops {y, x, pixel} entries from the pixel FIFO and writes each pixel as one
// byte to BASE_ADDR + y*IMG_W + x, so the frame lands row-major in memory no
// matter where the stream restarts. Address, write and writedata are
// registered and held while waitrequest is high, as Avalon-MM requires; a
// new entry is loaded in the cycle the previous write is accepted, so the
// master sustains one byte per clock when the slave does not stall.
// Interface: FIFO side fifo_empty/fifo_data/fifo_rd; Avalon side
// avm_address (byte address), avm_write, avm_writedata, avm_waitrequest.
// stall_cycles counts cycles with a write held by waitrequest.
//
// Paper: a custom Avalon master reading the pixel FIFO and writing the
// pixels to SDRAM owned by the HPS. The 8-bit data path and the address
// formula are this design's choices.
module pixel_avalon_master #(
  parameter int unsigned IMG_W     = 640,
  parameter logic [31:0] BASE_ADDR = 32'h3000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fifo_empty,
  input  logic [39:0] fifo_data,     // {y[15:0], x[15:0], pixel[7:0]}
  output logic        fifo_rd,
  output logic [31:0] avm_address,
  output logic        avm_write,
  output logic [7:0]  avm_writedata,
  input  logic        avm_waitrequest,
  output logic [31:0] stall_cycles
);

  logic        load;
  logic [31:0] addr_n;

  assign load    = (!avm_write || !avm_waitrequest) && !fifo_empty;
  assign fifo_rd = load;
  assign addr_n  = BASE_ADDR + 32'(fifo_data[39:24]) * 32'(IMG_W) + 32'(fifo_data[23:8]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      avm_address   <= '0;
      avm_write     <= 1'b0;
      avm_writedata <= '0;
      stall_cycles  <= '0;
    end else begin
      if (avm_write && avm_waitrequest) stall_cycles <= stall_cycles + 32'd1;
      if (load) begin
        avm_write     <= 1'b1;
        avm_address   <= addr_n;
        avm_writedata <= fifo_data[7:0];
      end else if (!avm_waitrequest) begin
        avm_write <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   avm_write && avm_waitrequest |=> avm_write && $stable(avm_address) && $stable(avm_writedata))
    else $error("pixel_avalon_master: write changed under waitrequest");

endmodule
