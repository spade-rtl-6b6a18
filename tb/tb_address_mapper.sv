// tb_address_mapper: checks host address decoding (region, register index,
// row, column) and the engine address sums for random inputs.
module tb_address_mapper;
  import spade_pkg::*;

  logic [15:0] host_addr, k, i;
  logic [1:0]  region, col;
  logic [3:0]  reg_idx;
  logic [5:0]  row, if_base, wt_base, of_base, if_addr, wt_addr, of_addr;
  int checks = 0, failures = 0;

  address_mapper #(.N(4), .DEPTH(64)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      host_addr = 16'($urandom);
      k = 16'($urandom % 64); i = 16'($urandom % 4);
      if_base = 6'($urandom); wt_base = 6'($urandom); of_base = 6'($urandom);
      #1;
      checks++;
      if (region != host_addr[15:14] || reg_idx != host_addr[3:0] ||
          int'(row) != (int'(host_addr[13:0]) / 4) % 64 || int'(col) != int'(host_addr) % 4 ||
          int'(if_addr) != (int'(if_base) + int'(k)) % 64 ||
          int'(wt_addr) != (int'(wt_base) + int'(k)) % 64 ||
          int'(of_addr) != (int'(of_base) + int'(i)) % 64) begin
        failures++;
        $display("addr %h: region %0d row %0d col %0d", host_addr, region, row, col);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
