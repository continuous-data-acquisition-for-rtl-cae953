// sram_model: behavioural model of the FEM's external synchronous SRAM
// (1M x 36 bit at 128 MHz with the default ADDR_W). Not synthesizable logic of
// this design: it stands in for the memory chip in simulations.
//
// A command (ce, we, addr, wdata) is sampled at each rising edge. A write
// stores wdata at once; a read returns mem[addr] on rdata RL edges after the
// edge that sampled it (a pipelined SRAM). Unwritten words read as zero.
module sram_model #(
  parameter int unsigned ADDR_W = 20,
  parameter int unsigned DATA_W = 36,
  parameter int unsigned RL     = 2
) (
  input  logic              clk,
  input  logic              ce,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [2**ADDR_W];
  logic [DATA_W-1:0] pipe [RL];

  initial begin
    for (int i = 0; i < 2**ADDR_W; i++) mem[i] = '0;
    for (int k = 0; k < RL; k++) pipe[k] = '0;
  end

  always @(posedge clk) begin
    if (ce && we) mem[addr] <= wdata;
    pipe[0] <= (ce && !we) ? mem[addr] : pipe[0];
    for (int k = 1; k < RL; k++) pipe[k] <= pipe[k-1];
  end

  assign rdata = pipe[RL-1];

endmodule
