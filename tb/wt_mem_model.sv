// wt_mem_model: behavioural model of system memory behind the weight port.
// Holds DEPTH beats of BUS_W bits (beat i at byte address BASE + i*BUS_W/8),
// written directly by the testbench through the 'mem' array. Accepts a
// request when req_ready is high (randomly withheld when STALL is set) and
// returns the beat after 2 to 5 cycles, in order. Counts requests outside
// the array in 'bad_addr'.
module wt_mem_model #(
  parameter int unsigned BUS_W = 256,
  parameter int unsigned DEPTH = 4096,
  parameter bit          STALL = 1'b1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [31:0]      req_addr,
  output logic             rsp_valid,
  output logic [BUS_W-1:0] rsp_data
);
  logic [BUS_W-1:0] mem [DEPTH];
  int unsigned      bad_addr = 0;
  int unsigned      reads = 0;
  logic [BUS_W-1:0] q_data [$];
  int               q_due  [$];
  int               now = 0;
  int               last_due = 0;

  always @(posedge clk) now <= now + 1;

  always @(negedge clk) req_ready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (!rst_n) begin
      q_data.delete(); q_due.delete();
    end else begin
      if (q_due.size() != 0 && q_due[0] <= now) begin
        rsp_valid <= 1'b1;
        rsp_data  <= q_data.pop_front();
        void'(q_due.pop_front());
      end
      if (req_valid && req_ready) begin
        int unsigned i, due;
        i = req_addr / (BUS_W / 8);
        reads++;
        if (i >= DEPTH) bad_addr++;
        due = now + (STALL ? $urandom_range(2, 5) : 2);
        if (due <= last_due) due = last_due + 1;
        last_due = due;
        q_data.push_back(i < DEPTH ? mem[i] : '0);
        q_due.push_back(due);
      end
    end
  end
endmodule
