// Testbench for mlw_addr_gen: for random group counts, chunk counts,
// precisions and bases, with random back-pressure on req_ready, every
// accepted address must equal base + (g*C + c)*32 + w in the order
// g, c, w (w fastest), and exactly groups*C*s addresses must be issued.
// With req_ready held high the sequence must take groups*C*s cycles.
module tb_mlw_addr_gen;
  import mlw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              start, req_valid, req_ready, busy;
  logic [ADDR_W-1:0] base, req_addr;
  logic [31:0]       groups;
  logic [CHUNK_W:0]  chunks;
  prec_t             prec;

  mlw_addr_gen dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int G, C, S, n, cycles;
    logic [ADDR_W-1:0] expa;
    bit throttle;
    start = 0; req_ready = 0; base = '0; groups = 0; chunks = '0; prec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 30; run++) begin
      G = 1 + ($urandom % 5);
      C = 1 + ($urandom % 4);
      S = (run == 0) ? 32 : 1 + ($urandom % 32);
      throttle = run[0];
      @(negedge clk);
      base = {16'h0, $urandom} & ~48'h1f;
      groups = G; chunks = (CHUNK_W+1)'(C); prec = prec_t'(S); start = 1;
      n = 0; cycles = 0;
      for (int g = 0; g < G; g++)
        for (int c = 0; c < C; c++)
          for (int w = 0; w < S; w++) begin
            expa = base + ADDR_W'((g * C + c) * 32 + w);
            // present req_ready at the falling edge; the address counts as
            // taken at the next rising edge if req_valid and req_ready
            do begin
              @(negedge clk);
              start = 0;
              req_ready = throttle ? 1'($urandom % 2) : 1'b1;
              cycles++;
            end while (!(req_valid && req_ready));
            checks++;
            if (req_addr !== expa) begin
              failures++; $display("run %0d g%0d c%0d w%0d addr %h exp %h", run, g, c, w, req_addr, expa);
            end
            n++;
          end
      @(negedge clk) req_ready = 0;
      checks += 2;
      if (busy) begin failures++; $display("run %0d still busy after %0d addresses", run, n); end
      if (!throttle && cycles != G * C * S) begin
        failures++; $display("run %0d took %0d cycles, expected %0d", run, cycles, G * C * S);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
