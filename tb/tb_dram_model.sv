// tb_dram_model: behavioural DRAM on the system bus for testbenches.
// Accepts a request when gnt is high (at random three cycles in four), and
// returns read data in order after LAT cycles. WORDS words of 264 bits.
module tb_dram_model
  import trigen_pkg::*;
#(
  parameter int WORDS = 16384,
  parameter int LAT   = 6
) (
  input  logic        clk,
  input  logic        b_req,
  input  logic        b_we,
  input  logic [31:0] b_addr,
  input  word_t       b_wdata,
  output logic        b_gnt,
  output logic        b_rvalid,
  output word_t       b_rdata
);
  word_t mem [WORDS];
  logic  g = 1'b0;
  logic  vpipe [LAT];
  word_t dpipe [LAT];

  assign b_gnt = b_req && g;

  always_ff @(posedge clk) begin
    g <= ($urandom_range(0, 3) != 0);
    if (b_gnt && b_we) mem[int'(b_addr) % WORDS] <= b_wdata;
    vpipe[0] <= b_gnt && !b_we;
    dpipe[0] <= mem[int'(b_addr) % WORDS];
    for (int i = 1; i < LAT; i++) begin vpipe[i] <= vpipe[i-1]; dpipe[i] <= dpipe[i-1]; end
  end
  assign b_rvalid = vpipe[LAT-1];
  assign b_rdata  = dpipe[LAT-1];

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    for (int i = 0; i < LAT; i++) begin vpipe[i] = 1'b0; dpipe[i] = '0; end
  end
endmodule
