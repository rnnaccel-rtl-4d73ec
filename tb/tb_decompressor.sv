// tb_decompressor: self-checking test of the weight decompressor.
// Loads a random codebook, then for each index width (6, 4, 2 bits) and
// weight width (8, 16 bits) packs random indices for a random number of
// vectors into beats, feeds them with random gaps, takes the vectors with
// random back-pressure and compares each weight with the codebook entry its
// index names. Each pass ends with a flush, so leftover bits must not leak
// into the next pass. Also checks that a full-rate pass is not slowed down:
// with beats always available one vector leaves per cycle.
module tb_decompressor;
  import rnn_pkg::*;
  localparam int N = 32, BW = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cmp_e mode;
  logic w16, flush, cb_we;
  logic [5:0] cb_addr;
  logic [15:0] cb_wdata;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [BW-1:0] in_data;
  logic [N*8-1:0] out_w;

  decompressor #(.N(N), .BUS_W(BW)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] cb [64];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [5:0] idx [$];
  logic [BW-1:0] beats [$];

  task automatic run_pass(cmp_e m, bit wide, int nvec, bit gaps);
    int k, lanes, nbits, nbeats, got, t0, t1;
    logic [BW-1:0] beat;
    k = cmp_bits(m); lanes = wide ? N/2 : N;
    idx.delete(); beats.delete();
    nbits = 0; beat = '0;
    for (int v = 0; v < nvec * lanes; v++) begin
      logic [5:0] i6;
      i6 = 6'($urandom) & 6'((1 << k) - 1);
      idx.push_back(i6);
      for (int b = 0; b < k; b++) begin
        beat[nbits % BW] = i6[b];
        nbits++;
        if (nbits % BW == 0) begin beats.push_back(beat); beat = '0; end
      end
    end
    if (nbits % BW != 0) beats.push_back(beat);
    nbeats = beats.size();
    @(negedge clk);
    mode = m; w16 = wide;
    got = 0;
    t0 = $time;
    fork
      begin
        int bi = 0;
        while (bi < nbeats) begin
          in_valid = gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
          in_data  = beats[bi];
          @(posedge clk);
          if (in_valid && in_ready) bi++;
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        while (got < nvec) begin
          out_ready = gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
          @(posedge clk);
          if (out_valid && out_ready) begin
            for (int l = 0; l < lanes; l++) begin
              logic [15:0] e, g;
              e = cb[idx[got * lanes + l]];
              g = wide ? out_w[16*l +: 16] : {8'h00, out_w[8*l +: 8]};
              if (!wide) e = {8'h00, e[7:0]};
              checks++;
              if (g !== e) begin
                failures++;
                if (failures < 10) $display("k=%0d w16=%0d vec %0d lane %0d: got %h exp %h", k, wide, got, l, g, e);
              end
            end
            got++;
          end
          @(negedge clk);
        end
        out_ready = 0;
      end
    join
    t1 = $time;
    if (!gaps) begin
      checks++;
      if ((t1 - t0) / 10 > nvec + 3) begin
        failures++;
        $display("k=%0d: %0d vectors took %0d cycles", k, nvec, (t1 - t0) / 10);
      end
    end
    @(negedge clk);
    flush = 1;
    @(negedge clk);
    flush = 0;
  endtask

  initial begin
    mode = CMP_8X; w16 = 0; flush = 0; cb_we = 0; cb_addr = 0; cb_wdata = 0;
    in_valid = 0; in_data = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      cb[i] = 16'($urandom);
      cb_we = 1; cb_addr = 6'(i); cb_wdata = cb[i];
    end
    @(negedge clk);
    cb_we = 0;
    for (int t = 0; t < 18; t++) begin
      cmp_e m;
      m = cmp_e'(1 + t % 3);
      run_pass(m, (t / 3) % 2 == 1, $urandom_range(1, 40), t >= 6);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
