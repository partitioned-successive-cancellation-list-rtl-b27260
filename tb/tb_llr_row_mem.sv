// tb_llr_row_mem: random writes and simultaneous reads on both ports,
// compared with a shadow array; a write becomes visible from the next cycle.
module tb_llr_row_mem;
  localparam int ROWS = 12, WIDTH = 48;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we;
  logic [3:0] waddr, raddr_a, raddr_b;
  logic [WIDTH-1:0] wdata, rdata_a, rdata_b;
  logic [WIDTH-1:0] shadow [ROWS];
  logic [ROWS-1:0] written = '0;

  llr_row_mem #(.ROWS(ROWS), .WIDTH(WIDTH)) dut (.clk(clk), .we(we), .waddr(waddr),
    .wdata(wdata), .raddr_a(raddr_a), .rdata_a(rdata_a), .raddr_b(raddr_b), .rdata_b(rdata_b));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_test();
    we = 0; waddr = 0; wdata = 0; raddr_a = 0; raddr_b = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      we = ($urandom % 3) != 0;
      waddr = 4'($urandom % ROWS);
      wdata = {$urandom, $urandom};
      raddr_a = 4'($urandom % ROWS);
      raddr_b = 4'($urandom % ROWS);
      #1;
      if (written[raddr_a]) begin
        checks++;
        if (rdata_a !== shadow[raddr_a]) failures++;
      end
      if (written[raddr_b]) begin
        checks++;
        if (rdata_b !== shadow[raddr_b]) failures++;
      end
      @(posedge clk);
      if (we) begin
        shadow[waddr] = wdata;
        written[waddr] = 1'b1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule
