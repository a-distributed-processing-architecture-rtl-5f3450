// sp_ram: single-port memory used for the channel-estimate memory and for the
// local precoding/decoding vector memory of a node (K words of W_comp bits
// each). As the paper specifies, one port can either be written or read in a
// cycle. Timing: synchronous; a read presented in cycle t returns its data in
// cycle t+1 on rdata; a write (we = 1) stores wdata at the clock edge and
// rdata keeps its previous value. The contents are cleared at reset (a choice
// of this design, so that the node starts from defined values).
module sp_ram #(
  parameter int unsigned DEPTH = 20,   // K
  parameter int unsigned WIDTH = 24    // W_comp (12+12)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
      rdata <= '0;
    end else if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
