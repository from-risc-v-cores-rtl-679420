// tb_inst_mem -- self-checking testbench of the 256 Kb instruction memory:
// loads random words at random addresses through the load port, fetches
// them back and checks the data and the one-cycle fetch latency, including a
// fetch issued in the same cycle as a load of another address.
module tb_inst_mem;
  logic clk = 0;
  logic fetch_req = 0, load_we = 0;
  logic [12:0] fetch_addr = 0, load_addr = 0;
  logic [31:0] fetch_rdata, load_wdata = 0;
  logic [31:0] model [logic [12:0]];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  inst_mem dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [12:0] keys [$];
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      logic [12:0] a;
      a = 13'($urandom);
      load_we = 1; load_addr = a; load_wdata = $urandom;
      model[a] = load_wdata;
      keys.push_back(a);
      @(negedge clk);
    end
    load_we = 0;
    for (int i = 0; i < 300; i++) begin
      logic [12:0] a;
      a = keys[$urandom_range(0, keys.size() - 1)];
      fetch_req = 1; fetch_addr = a;
      // a load to another address in the same cycle must not disturb the fetch
      load_we = 1; load_addr = a ^ 13'h1; load_wdata = $urandom;
      @(negedge clk);
      fetch_req = 0; load_we = 0;
      if (model.exists(a ^ 13'h1)) model[a ^ 13'h1] = load_wdata;
      else begin model[a ^ 13'h1] = load_wdata; keys.push_back(a ^ 13'h1); end
      check($sformatf("fetch %h", a), fetch_rdata == model[a]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
