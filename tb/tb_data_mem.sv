// tb_data_mem -- self-checking testbench of the dual-port data memory at its
// full 2 Mb size. A model array of port-B words is kept in the testbench.
// Checks: port-A writes seen through port B (lane placement of each 32-bit
// word), port-B writes seen through port A, one-cycle read latency on both
// ports, read data holding between reads, and the same-cycle write rule
// (port A's slice wins, the rest takes port B's data).
module tb_data_mem;
  localparam int BW = 128, BWORDS = 16384;
  logic clk = 0;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [15:0] a_addr = 0;
  logic [13:0] b_addr = 0;
  logic [31:0] a_wdata = 0, a_rdata;
  logic [BW-1:0] b_wdata = 0, b_rdata;
  logic [BW-1:0] model [BWORDS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  data_mem dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [BW-1:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic a_write(logic [15:0] ad, logic [31:0] d);
    a_en = 1; a_we = 1; a_addr = ad; a_wdata = d;
    @(negedge clk);
    a_en = 0; a_we = 0;
    model[ad[15:2]][32*ad[1:0] +: 32] = d;
  endtask

  task automatic b_write(logic [13:0] ad, logic [BW-1:0] d);
    b_en = 1; b_we = 1; b_addr = ad; b_wdata = d;
    @(negedge clk);
    b_en = 0; b_we = 0;
    model[ad] = d;
  endtask

  task automatic a_read_check(logic [15:0] ad);
    a_en = 1; a_we = 0; a_addr = ad;
    @(negedge clk);
    a_en = 0;
    check($sformatf("A read %h", ad), a_rdata == model[ad[15:2]][32*ad[1:0] +: 32]);
    @(negedge clk);
    check("A read data holds", a_rdata == model[ad[15:2]][32*ad[1:0] +: 32]);
  endtask

  task automatic b_read_check(logic [13:0] ad);
    b_en = 1; b_we = 0; b_addr = ad;
    @(negedge clk);
    b_en = 0;
    check($sformatf("B read %h", ad), b_rdata == model[ad]);
  endtask

  initial begin
    logic [13:0] used [64];
    @(negedge clk);
    // initialise the words this test uses through port B
    for (int i = 0; i < 64; i++) begin
      used[i] = 14'($urandom);
      b_write(used[i], rnd128());
    end
    for (int n = 0; n < 400; n++) begin
      logic [13:0] w;
      int kind;
      w = used[$urandom_range(0, 63)];
      kind = $urandom_range(0, 3);
      case (kind)
        0: a_write({w, 2'($urandom)}, $urandom);
        1: b_write(w, rnd128());
        2: a_read_check({w, 2'($urandom)});
        default: b_read_check(w);
      endcase
    end
    // every lane through port A after a port-B write
    b_write(14'd5, 128'h00112233_44556677_8899AABB_CCDDEEFF);
    for (int k = 0; k < 4; k++) a_read_check({14'd5, 2'(k)});
    check("lane 0 at port-A word 0", model[5][31:0] == 32'hCCDDEEFF);
    // simultaneous write to the same word: port A's slice wins
    begin
      logic [BW-1:0] bd;
      bd = rnd128();
      a_en = 1; a_we = 1; a_addr = {14'd9, 2'd2}; a_wdata = 32'hDEADBEEF;
      b_en = 1; b_we = 1; b_addr = 14'd9; b_wdata = bd;
      @(negedge clk);
      a_en = 0; a_we = 0; b_en = 0; b_we = 0;
      model[9] = bd;
      model[9][64 +: 32] = 32'hDEADBEEF;
      b_read_check(14'd9);
    end
    // simultaneous reads on both ports
    a_en = 1; a_addr = {14'd5, 2'd3}; b_en = 1; b_addr = 14'd9;
    @(negedge clk);
    a_en = 0; b_en = 0;
    check("dual read A", a_rdata == 32'h00112233);
    check("dual read B", b_rdata == model[9]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
