// trigen_global_buffer: the NPU's on-chip memory (global buffer, SRAM).
//
// WORDS words of 264 bits (256 data bits and an 8-bit shared exponent), split
// into NBANK single-port banks interleaved on the low address bits, shared by
// NPORT requesters (the DLA cores, the TMU and the DMAC). Each bank serves one
// request per cycle; when several ports address the same bank a round-robin
// arbiter picks one and the others see gnt low and retry. A granted write
// takes effect at that clock edge; a granted read returns its word with
// rvalid one cycle later. The paper gives the capacity (1 MiB, i.e. 32768
// words of 32 data bytes) and that the memory is shared; the banking, the
// arbitration and the one-cycle read latency are this design's choices.
module trigen_global_buffer
  import trigen_pkg::*;
#(
  parameter int NPORT = 6,
  parameter int WORDS = 32768,
  parameter int NBANK = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req    [NPORT],
  input  logic  we     [NPORT],
  input  addr_t addr   [NPORT],
  input  word_t wdata  [NPORT],
  output logic  gnt    [NPORT],
  output logic  rvalid [NPORT],
  output word_t rdata  [NPORT]
);
  localparam int BB = $clog2(NBANK);
  localparam int BW = WORDS / NBANK;
  localparam int PB = (NPORT > 1) ? $clog2(NPORT) : 1;

  logic [PB-1:0] ptr  [NBANK];
  logic [PB-1:0] win  [NBANK];
  logic          bact [NBANK];
  word_t         bdata [NBANK];
  logic [BB-1:0] rbank [NPORT];

  function automatic logic [BB-1:0] bank_of(input addr_t a);
    return a[BB-1:0];
  endfunction

  // round-robin arbitration per bank
  always_comb begin
    for (int b = 0; b < NBANK; b++) begin
      int pp;
      bact[b] = 1'b0;
      win[b]  = '0;
      for (int o = NPORT - 1; o >= 0; o--) begin
        pp = (int'(ptr[b]) + o) % NPORT;
        if (req[pp] && int'(bank_of(addr[pp])) == b) begin
          bact[b] = 1'b1;
          win[b]  = PB'(pp);
        end
      end
    end
    for (int p = 0; p < NPORT; p++)
      gnt[p] = req[p] && bact[bank_of(addr[p])] && (int'(win[bank_of(addr[p])]) == p);
  end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    word_t mem [BW];
    word_t wd;
    logic [$clog2(BW)-1:0] ba;
    logic  bwe;
    always_comb begin
      wd  = wdata[win[b]];
      ba  = addr[win[b]][ADDR_W-1:BB];
      bwe = bact[b] && we[win[b]];
    end
    always_ff @(posedge clk) begin
      if (bwe) mem[ba] <= wd;
      if (bact[b] && !bwe) bdata[b] <= mem[ba];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NBANK; b++) ptr[b] <= '0;
      for (int p = 0; p < NPORT; p++) begin rvalid[p] <= 1'b0; rbank[p] <= '0; end
    end else begin
      for (int b = 0; b < NBANK; b++)
        if (bact[b]) ptr[b] <= PB'((int'(win[b]) + 1) % NPORT);
      for (int p = 0; p < NPORT; p++) begin
        rvalid[p] <= gnt[p] && !we[p];
        if (gnt[p]) rbank[p] <= bank_of(addr[p]);
      end
    end
  end

  always_comb for (int p = 0; p < NPORT; p++) rdata[p] = bdata[rbank[p]];
endmodule
