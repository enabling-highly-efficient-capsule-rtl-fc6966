// tb_addr_map: checks the address split against addresses assembled field
// by field. For random vault, bank, sub-page, block and indicator values the
// testbench concatenates {0, vault, sub-page, bank, block, indicator, 0} as
// drawn in the mapping figure and expects the mapper to recover vault, bank,
// indicator and the bank-local block {sub-page, block}.
module tb_addr_map;
  import pim_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [33:0] addr;
  logic [4:0]  vault;
  logic [3:0]  bank;
  logic [19:0] baddr;
  logic [2:0]  ind;

  addr_map dut (.addr, .vault, .bank, .baddr, .ind);

  initial begin
    logic [4:0]  ev;
    logic [3:0]  eb;
    logic [19:0] sp, bl;
    logic [2:0]  n;
    logic [19:0] eba;
    repeat (20000) begin
      @(posedge clk);
      ev = 5'($urandom); eb = 4'($urandom); n = 3'($urandom % 5);
      sp = 20'($urandom); bl = 20'($urandom);
      unique case (n)
        3'd0: begin addr = {1'b0, ev, sp[19:0], eb, n, 1'b0};            eba = sp[19:0]; end
        3'd1: begin addr = {1'b0, ev, sp[18:0], eb, bl[0], n, 1'b0};     eba = {sp[18:0], bl[0]}; end
        3'd2: begin addr = {1'b0, ev, sp[17:0], eb, bl[1:0], n, 1'b0};   eba = {sp[17:0], bl[1:0]}; end
        3'd3: begin addr = {1'b0, ev, sp[16:0], eb, bl[2:0], n, 1'b0};   eba = {sp[16:0], bl[2:0]}; end
        default: begin addr = {1'b0, ev, sp[15:0], eb, bl[3:0], n, 1'b0}; eba = {sp[15:0], bl[3:0]}; end
      endcase
      #1;
      checks++;
      if (vault !== ev || bank !== eb || baddr !== eba || ind !== n) begin
        failures++;
        $display("FAIL addr %h: got v%0d b%0d a%h i%0d, want v%0d b%0d a%h i%0d",
                 addr, vault, bank, baddr, ind, ev, eb, eba, n);
      end
    end
    // consecutive 16-byte blocks with 16 B sub-pages walk across banks,
    // with 64 B sub-pages four blocks share a bank
    for (int k = 0; k < 8; k++) begin
      addr = {1'b0, 5'd3, 24'(k), 3'd0, 1'b0}; #1; checks++;
      if (bank !== 4'(k) || vault !== 5'd3) begin failures++; $display("FAIL walk16 %0d", k); end
      addr = {1'b0, 5'd3, 24'(k), 3'd2, 1'b0}; #1; checks++;
      if (bank !== 4'(k / 4)) begin failures++; $display("FAIL walk64 %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
