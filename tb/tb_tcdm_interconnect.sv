// Self-checking testbench of the L1 interconnect and its banks (default parameters: 13
// masters, 16 banks of 1024 x 64 bit).
//
// Every master keeps a random stream of reads and byte-masked writes to a small address window
// (so banks are contended), holding each request until it is granted. A reference memory is
// updated in grant order; each read is compared with the reference value at its grant. Checks:
// read data, at most one grant per bank per cycle, no request waits longer than NM cycles
// (round robin), and the conflict counter equals the number of refused request-cycles.
module tb_tcdm_interconnect;
  import maestro_pkg::*;
  localparam int NM = 13;
  localparam int NB = L1_BANKS;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req [NM], gnt [NM], rv [NM];
  tcdm_req_t   m   [NM];
  logic [63:0] rd  [NM];
  logic [31:0] conflicts;

  tcdm_interconnect dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .m_i(m), .gnt_o(gnt),
                         .rvalid_o(rv), .rdata_o(rd), .conflicts_o(conflicts));

  logic [63:0] ref_mem [256];     // byte addresses 0 .. 2047
  logic [63:0] exp_q [NM];
  logic        pend_q [NM];
  int          wait_c [NM];
  int          refused = 0;

  function automatic tcdm_req_t rnd_req();
    tcdm_req_t r;
    r.addr  = 32'(($urandom % 256) * 8);
    r.we    = $urandom % 2;
    r.be    = 8'($urandom);
    r.wdata = {$urandom, $urandom};
    return r;
  endfunction

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NM; i++) begin req[i] = 0; m[i] = '0; pend_q[i] = 0; wait_c[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // initialise the window through master 0
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      req[0] = 1; m[0] = '{addr: 32'(8 * a), we: 1'b1, be: 8'hff, wdata: {$urandom, $urandom}};
      ref_mem[a] = m[0].wdata;
      #1; checks++; if (!gnt[0]) failures++;
    end
    @(negedge clk); req[0] = 0;
    for (int i = 0; i < NM; i++) m[i] = rnd_req();
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // read data of last cycle's grants
      for (int i = 0; i < NM; i++) begin
        if (pend_q[i]) begin
          checks++;
          if (!rv[i] || rd[i] !== exp_q[i]) begin
            failures++;
            if (failures < 10) $display("FAIL read m%0d got %h exp %h", i, rd[i], exp_q[i]);
          end
        end else begin
          checks++; if (rv[i]) failures++;
        end
        pend_q[i] = 0;
      end
      for (int i = 0; i < NM; i++) if (!req[i] && ($urandom % 4 != 0)) begin
        req[i] = 1; m[i] = rnd_req();
      end
      #1;
      begin
        int per_bank [NB];
        for (int b = 0; b < NB; b++) per_bank[b] = 0;
        for (int i = 0; i < NM; i++) begin
          if (req[i] && gnt[i]) begin
            int a;
            a = int'(m[i].addr[10:3]);
            per_bank[a % NB]++;
            if (m[i].we) begin
              for (int b = 0; b < 8; b++) if (m[i].be[b]) ref_mem[a][8*b +: 8] = m[i].wdata[8*b +: 8];
            end else begin
              pend_q[i] = 1;
              exp_q[i]  = ref_mem[a];
            end
            wait_c[i] = 0;
          end else if (req[i]) begin
            refused++;
            wait_c[i]++;
            checks++;
            if (wait_c[i] > NM) begin failures++; $display("FAIL starvation m%0d", i); end
          end
        end
        for (int b = 0; b < NB; b++) begin checks++; if (per_bank[b] > 1) failures++; end
      end
      @(posedge clk);
      #1;
      for (int i = 0; i < NM; i++) if (req[i] && wait_c[i] == 0) req[i] = 0;
    end
    @(negedge clk);
    for (int i = 0; i < NM; i++) req[i] = 0;
    @(negedge clk);
    checks++;
    if (conflicts != 32'(refused)) begin
      failures++; $display("FAIL conflict count %0d exp %0d", conflicts, refused);
    end
    $display("bank conflicts %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
