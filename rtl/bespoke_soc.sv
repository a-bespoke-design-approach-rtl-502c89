// Bespoke printed microprocessor: core, program ROM and data RAM.
//
// The bespoke RISC-V core (2-stage, 10-bit PC, 8-bit data address, 12
// registers, SIMD MAC unit of precision MAC_PREC) fetches from the program
// ROM and loads/stores to the data RAM. The host side can fill the ROM
// through prog_* and read or write the data RAM through host_* while the core
// is held in reset, then release rst_n and wait for halted (or illegal).
// retire/stall/flush/mac_step report the core's pipeline activity each cycle.
//
// Follows the paper: the bespoke core with the SIMD MAC unit and a program
// ROM addressed by the trimmed PC. This design's own choice: the host ports
// and the status outputs.
module bespoke_soc #(
  parameter int unsigned PC_W     = 10,
  parameter int unsigned DADDR_W  = 8,
  parameter int unsigned NREGS    = 12,
  parameter int unsigned MAC_PREC = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // program ROM load port
  input  logic               prog_we,
  input  logic [PC_W-3:0]    prog_addr,
  input  logic [31:0]        prog_wdata,
  // data RAM host port
  input  logic [DADDR_W-1:0] host_addr,
  input  logic               host_we,
  input  logic [3:0]         host_be,
  input  logic [31:0]        host_wdata,
  output logic [31:0]        host_rdata,
  // status
  output logic               halted,
  output logic               illegal,
  output logic               retire,
  output logic               stall,
  output logic               flush,
  output logic               mac_step
);
  logic [PC_W-1:0]    imem_addr;
  logic [31:0]        imem_rdata;
  logic [DADDR_W-1:0] dmem_addr;
  logic               dmem_we;
  logic [3:0]         dmem_be;
  logic [31:0]        dmem_wdata, dmem_rdata;

  bespoke_core #(
    .PC_W(PC_W), .DADDR_W(DADDR_W), .NREGS(NREGS), .MAC_PREC(MAC_PREC)
  ) u_core (
    .clk, .rst_n,
    .imem_addr, .imem_rdata,
    .dmem_addr, .dmem_we, .dmem_be, .dmem_wdata, .dmem_rdata,
    .halted, .illegal, .retire, .stall, .flush, .mac_step
  );

  prog_rom #(.ADDR_W(PC_W)) u_rom (
    .clk,
    .addr(imem_addr), .rdata(imem_rdata),
    .load_we(prog_we), .load_addr(prog_addr), .load_data(prog_wdata)
  );

  data_ram #(.ADDR_W(DADDR_W)) u_ram (
    .clk,
    .a_addr(dmem_addr), .a_we(dmem_we), .a_be(dmem_be), .a_wdata(dmem_wdata), .a_rdata(dmem_rdata),
    .b_addr(host_addr), .b_we(host_we), .b_be(host_be), .b_wdata(host_wdata), .b_rdata(host_rdata)
  );

endmodule
