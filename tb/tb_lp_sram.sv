// tb_lp_sram: random writes and reads against a shadow copy, checking the one-clock read
// latency and that a read without re keeps the last data.
module tb_lp_sram;
  localparam int W = 64, D = 256;
  logic clk = 0, we, re;
  logic [7:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] shadow [D];
  bit           known [D];
  int checks = 0, failures = 0;

  lp_sram #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] last;
    int ra;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = 8'($urandom); wdata = {$urandom, $urandom};
      re = 1'($urandom); raddr = 8'($urandom); ra = raddr;
      if (re) last = shadow[ra];
      @(posedge clk);
      if (we) begin shadow[waddr] = wdata; known[waddr] = 1; end
      #1;
      if (re && known[ra] && !(we && waddr == raddr)) begin
        checks++;
        if (rdata !== last) begin failures++; $display("FAIL read %0d", ra); end
      end else if (re) begin
        last = rdata;
      end
      if (!re) begin
        checks++;
        if (rdata !== last) begin failures++; $display("FAIL hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
