// tb_local_mem_pool: self-checking test of the banked local memory.
// Fills the whole 12 KB through both write ports at once (the two ports
// always aimed at different banks), then runs random traffic: each cycle two
// reads and two writes to random, bank-disjoint addresses, checking every read
// against a reference array one cycle later, including the read-old-data rule
// when a word is read and written in the same cycle.
module tb_local_mem_pool;
  localparam int NB = 6, D = 1024, AW = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0] re, we;
  logic [AW-1:0] raddr [2];
  logic [15:0] rdata [2];
  logic [AW-1:0] waddr [2];
  logic [15:0] wdata [2];

  local_mem_pool #(.NBANK(NB), .DEPTH(D), .DW(16), .NR(2), .NW(2), .AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] model [NB*D];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [AW-1:0] rand_addr_not_in(int bank);
    int b;
    do b = $urandom_range(0, NB - 1); while (b == bank);
    return AW'(b * D + $urandom_range(0, D - 1));
  endfunction

  initial begin
    re = 0; we = 0;
    raddr[0] = 0; raddr[1] = 0; waddr[0] = 0; waddr[1] = 0; wdata[0] = 0; wdata[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill: port 0 writes banks 0..2, port 1 banks 3..5
    for (int i = 0; i < NB * D / 2; i++) begin
      @(negedge clk);
      we = 2'b11;
      waddr[0] = AW'(i);
      waddr[1] = AW'(i + NB * D / 2);
      wdata[0] = 16'($urandom); wdata[1] = 16'($urandom);
      model[i] = wdata[0]; model[i + NB * D / 2] = wdata[1];
    end
    @(negedge clk);
    we = 0;
    for (int t = 0; t < 20000; t++) begin
      logic [15:0] exp0, exp1;
      @(negedge clk);
      re = 2'($urandom) | 2'b01;
      raddr[0] = AW'($urandom_range(0, NB * D - 1));
      raddr[1] = rand_addr_not_in(int'(raddr[0]) / D);
      we = 2'($urandom);
      waddr[0] = ($urandom_range(0, 3) == 0) ? raddr[0] : AW'($urandom_range(0, NB * D - 1));
      waddr[1] = rand_addr_not_in(int'(waddr[0]) / D);
      wdata[0] = 16'($urandom); wdata[1] = 16'($urandom);
      exp0 = model[raddr[0]]; exp1 = model[raddr[1]];
      if (we[0]) model[waddr[0]] = wdata[0];
      if (we[1]) model[waddr[1]] = wdata[1];
      @(posedge clk); #1;
      checks++;
      if (rdata[0] !== exp0) begin
        failures++;
        if (failures < 10) $display("port0 addr %0d: got %h exp %h", raddr[0], rdata[0], exp0);
      end
      if (re[1]) begin
        checks++;
        if (rdata[1] !== exp1) begin
          failures++;
          if (failures < 10) $display("port1 addr %0d: got %h exp %h", raddr[1], rdata[1], exp1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
