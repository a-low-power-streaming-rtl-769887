// instr_reg -- the 32 x 32-bit instruction register that holds the program
// the controller executes. Its size follows the system architecture. The
// memory controller writes two instructions per 80-bit input word (bits
// 31:0 to address waddr, 63:32 to waddr+1); the controller reads one
// instruction per cycle, combinationally, at the program counter.
module instr_reg #(
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [63:0]   wdata,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr]          <= wdata[31:0];
      mem[AW'(waddr + 1)] <= wdata[63:32];
    end
  end

  assign rdata = mem[raddr];
endmodule
