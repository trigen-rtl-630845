// tb_global_buffer: self-checking test of the banked on-chip memory.
// Six ports issue random reads and writes; each port holds a request until it
// is granted. A shadow array updated at grant time gives the expected read
// data, which must arrive exactly one cycle after the grant. Round-robin
// fairness is checked by bounding the wait of every request to NPORT-1 cycles,
// and a phase with each port on its own bank checks that conflict-free
// requests are all granted in the same cycle (one word per bank per cycle).
module tb_global_buffer;
  import trigen_pkg::*;
  localparam int NP = 6, WORDS = 1024, NBANK = 8;
  logic clk = 0, rst_n = 0;
  logic  req [NP], we [NP], gnt [NP], rvalid [NP];
  addr_t addr [NP];
  word_t wdata [NP], rdata [NP];
  word_t shadow [WORDS];
  word_t expq [NP];
  int    wait_c [NP];
  int checks = 0, failures = 0, conflicts = 0;
  bit free_phase = 0;

  trigen_global_buffer #(.NPORT(NP), .WORDS(WORDS), .NBANK(NBANK)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  function automatic word_t rnd_word();
    word_t w;
    for (int i = 0; i < 9; i++) w[32*i +: 32] = $urandom;
    return w;
  endfunction

  task automatic new_req(input int p, input int cnt);
    req[p]  = 1'b1;
    we[p]   = ($urandom_range(0, 2) == 0);
    addr[p] = free_phase ? addr_t'((($urandom_range(0, WORDS / NBANK - 1)) * NBANK) + p)
                         : addr_t'($urandom_range(0, WORDS - 1));
    wdata[p] = rnd_word();
  endtask

  initial begin
    for (int p = 0; p < NP; p++) begin
      req[p] = 0; we[p] = 0; addr[p] = '0; wdata[p] = '0; wait_c[p] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initialise memory and shadow through port 0
    for (int a = 0; a < WORDS; a++) begin
      shadow[a] = rnd_word();
      req[0] = 1; we[0] = 1; addr[0] = addr_t'(a); wdata[0] = shadow[a];
      #1;
      chk(gnt[0], "single requester granted at once");
      @(negedge clk);
    end
    req[0] = 0;
    for (int ph = 0; ph < 2; ph++) begin
      free_phase = (ph == 1);
      for (int p = 0; p < NP; p++) new_req(p, 0);
      for (int cyc = 0; cyc < 3000; cyc++) begin
        int ng;
        bit g [NP];
        #1;
        ng = 0;
        for (int p = 0; p < NP; p++) begin
          g[p] = req[p] && gnt[p];
          if (g[p]) begin
            ng++;
            if (we[p]) shadow[addr[p]] = wdata[p];
            else expq[p] = shadow[addr[p]];
          end
        end
        if (free_phase) chk(ng == NP, "conflict-free requests all granted");
        @(posedge clk);
        @(negedge clk);
        for (int p = 0; p < NP; p++) begin
          if (g[p] && !we[p]) chk(rvalid[p] && rdata[p] == expq[p], $sformatf("read data port %0d", p));
          else chk(!rvalid[p], "no spurious rvalid");
          if (g[p]) begin
            wait_c[p] = 0;
            new_req(p, cyc);
          end else begin
            conflicts++;
            wait_c[p]++;
            chk(wait_c[p] < NP, $sformatf("port %0d starved", p));
          end
        end
      end
      for (int p = 0; p < NP; p++) req[p] = 0;
      @(negedge clk);
    end
    chk(conflicts > 0, "bank conflicts occurred");
    $display("conflict stalls %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
