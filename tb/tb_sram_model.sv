// tb_sram_model: behavioural single-port word memory for unit testbenches.
// Same port protocol as one port of the global buffer: gnt in the request
// cycle (withheld at random while stall_en is high, to exercise retries), write at
// the granted edge, read data with rvalid one cycle after the grant.
module tb_sram_model
  import trigen_pkg::*;
#(
  parameter int WORDS = 4096
) (
  input  logic  clk,
  input  logic  stall_en,
  input  logic  m_req,
  input  logic  m_we,
  input  addr_t m_addr,
  input  word_t m_wdata,
  output logic  m_gnt,
  output logic  m_rvalid,
  output word_t m_rdata
);
  word_t mem [WORDS];
  logic  stall_q = 1'b0;
  int    stalls = 0;

  assign m_gnt = m_req && !stall_q;

  always_ff @(posedge clk) begin
    stall_q  <= stall_en && ($urandom_range(0, 3) == 0);
    m_rvalid <= m_gnt && !m_we;
    if (m_req && !m_gnt) stalls <= stalls + 1;
    if (m_gnt && m_we) mem[int'(m_addr) % WORDS] <= m_wdata;
    if (m_gnt && !m_we) m_rdata <= mem[int'(m_addr) % WORDS];
  end

  initial begin
    m_rvalid = 1'b0;
    m_rdata = '0;
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
  end
endmodule
