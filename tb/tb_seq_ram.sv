// tb_seq_ram: self-checking testbench of the buffer memory.
//
// Fills a 37-word, 3-read-port memory with random words, then reads random
// addresses on all ports each cycle and checks each word one clock later
// against a shadow copy; also checks that a read of the address being
// written returns the old word.
`timescale 1ns/1ps
module tb_seq_ram;
  localparam int W = 20, D = 37, NR = 3, AW = $clog2(D);

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  logic          we;
  logic [AW-1:0] waddr;
  logic [W-1:0]  wdata;
  logic [AW-1:0] raddr [NR];
  logic [W-1:0]  rdata [NR];
  logic [W-1:0]  shadow [D];

  seq_ram #(.WIDTH(W), .DEPTH(D), .NR(NR)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [AW-1:0] ra [NR];
    logic [W-1:0]  expd [NR];
    we = 0; waddr = 0; wdata = 0;
    for (int p = 0; p < NR; p++) raddr[p] = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = W'($urandom); shadow[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int p = 0; p < NR; p++) begin
        ra[p] = AW'($urandom_range(D - 1));
        raddr[p] = ra[p];
        expd[p] = shadow[ra[p]];
      end
      // write to the address port 0 reads: the read must see the old word
      we = (n % 3 == 0);
      waddr = ra[0];
      wdata = W'($urandom);
      @(negedge clk);
      if (we) shadow[ra[0]] = wdata;
      we = 0;
      for (int p = 0; p < NR; p++)
        check(rdata[p] == expd[p], $sformatf("port %0d addr %0d got %h exp %h", p, ra[p], rdata[p], expd[p]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
