// Self-checking testbench of the tensor CSR: reset value, writes of every field, forcing of the
// VTU enable in tensor mode and freezing of the VAU while the tensor unit is busy.
module tb_tcsr;
  import maestro_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0, vtu_busy = 0;
  logic [4:0] wd = 0;
  tcsr_t csr;
  logic vau_en, vlsu_en, vsldu_en, vtu_en, tmode;
  always #5 clk = ~clk;

  tcsr dut (.clk_i(clk), .rst_ni(rst_n), .we_i(we), .wdata_i(wd), .vtu_busy_i(vtu_busy),
            .csr_o(csr), .vau_en_o(vau_en), .vlsu_en_o(vlsu_en), .vsldu_en_o(vsldu_en),
            .vtu_en_o(vtu_en), .tensor_mode_o(tmode));

  task automatic chk(input logic [4:0] got, input logic [4:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL got %b exp %b", got, exp); end
  endtask

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk({tmode, vtu_en, vsldu_en, vlsu_en, vau_en}, 5'b01111);
    for (int v = 0; v < 32; v++) begin
      for (int b = 0; b < 2; b++) begin
        logic [4:0] e;
        @(negedge clk); we = 1; wd = 5'(v); vtu_busy = b[0];
        @(negedge clk); we = 0;
        e[4] = wd[4];
        e[3] = wd[3] | wd[4];
        e[2] = wd[2];
        e[1] = wd[1];
        e[0] = wd[0] & !(wd[4] & vtu_busy);
        chk({tmode, vtu_en, vsldu_en, vlsu_en, vau_en}, e);
        chk(5'(csr), wd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
