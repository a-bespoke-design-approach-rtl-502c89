// Program memory of the bespoke core.
//
// DEPTH words of 32 bits, read combinationally by the core's fetch stage at
// a byte address (bits [1:0] ignored). In the printed chip this is a ROM whose
// contents are fixed when it is printed; here it is an array with a write port
// (load_*) that fills it before the core is released from reset, standing in
// for that one-time programming. Contents are zero after reset is not applied:
// the load port is the only way to set them.
//
// Follows the paper: the program memory is a ROM sized by the code, addressed
// by the 10-bit PC (1 KiB, 256 words). This design's own choice: the load
// port and the combinational read.
module prog_rom #(
  parameter int unsigned ADDR_W = 10            // byte address width = PC width
) (
  input  logic              clk,
  // fetch port
  input  logic [ADDR_W-1:0] addr,
  output logic [31:0]       rdata,
  // load port (programming)
  input  logic              load_we,
  input  logic [ADDR_W-3:0] load_addr,          // word address
  input  logic [31:0]       load_data
);
  localparam int unsigned DEPTH = 2 ** (ADDR_W - 2);

  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (load_we) mem[load_addr] <= load_data;
  end

  assign rdata = mem[addr[ADDR_W-1:2]];

endmodule
