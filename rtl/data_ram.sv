// Data memory of the bespoke core.
//
// 2**ADDR_W bytes organised as 32-bit words. Port A belongs to the core:
// combinational word read at a[ADDR_W-1:2], and a byte-enabled write at the
// rising edge. Port B is a host port with the same behaviour, used to place
// model inputs and read results; when both ports write the same word in one
// cycle, port A's bytes win.
//
// Follows the paper: data addresses (the base address registers) are 8 bits
// wide, so the memory holds 256 bytes. This design's own choice: the word
// organisation, the host port, combinational reads, no reset of the contents.
module data_ram #(
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic [ADDR_W-1:0] a_addr,
  input  logic              a_we,
  input  logic [3:0]        a_be,
  input  logic [31:0]       a_wdata,
  output logic [31:0]       a_rdata,
  input  logic [ADDR_W-1:0] b_addr,
  input  logic              b_we,
  input  logic [3:0]        b_be,
  input  logic [31:0]       b_wdata,
  output logic [31:0]       b_rdata
);
  localparam int unsigned WORDS = 2 ** (ADDR_W - 2);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    for (int k = 0; k < 4; k++) begin
      if (b_we && b_be[k])
        mem[b_addr[ADDR_W-1:2]][8*k +: 8] <= b_wdata[8*k +: 8];
      // port A is written last, so its bytes win on a clash
      if (a_we && a_be[k])
        mem[a_addr[ADDR_W-1:2]][8*k +: 8] <= a_wdata[8*k +: 8];
    end
  end

  assign a_rdata = mem[a_addr[ADDR_W-1:2]];
  assign b_rdata = mem[b_addr[ADDR_W-1:2]];

endmodule
