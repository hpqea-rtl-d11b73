// tb_cx_swapper: the CX Swapper against a memory model with the access bus's
// timing (request registered, then a synchronous RAM: read data two cycles
// after the request, writes land one cycle after it). Every (control, target)
// pair for n = 3..6 is run on a random state; the result must equal the
// reference CX and the swapper must be busy exactly 2*(2^(n-2)+1)+1 cycles,
// the count the schedule promises.
module tb_cx_swapper;
  import hpqea_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [QW-1:0] n_qubits = 3, control = 0, target = 1;
  logic start = 0, busy, done;
  gacc_t [1:0] lane, lane_q;
  cplx_t [1:0] lane_rdata;
  int checks = 0, failures = 0, busy_cycles = 0, n_done = 0;
  amp_t mem [64];
  amp_t model[];

  always #5 clk = ~clk;

  cx_swapper dut (.*);

  // access bus register + RAM
  always_ff @(posedge clk) begin
    lane_q <= lane;
    for (int l = 0; l < 2; l++) begin
      if (lane_q[l].en) begin
        if (lane_q[l].we) mem[lane_q[l].addr[5:0]] <= lane_q[l].wdata;
        else              lane_rdata[l]             <= mem[lane_q[l].addr[5:0]];
      end
    end
  end

  always @(posedge clk) begin
    if (busy) busy_cycles++;
    if (done) n_done++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 3; n <= 6; n++) begin
      for (int c = 0; c < n; c++) begin
        for (int t = 0; t < n; t++) begin
          if (c == t) continue;
          model = new[1 << n];
          foreach (model[i]) begin model[i] = rand_amp(); mem[i] = model[i]; end
          @(negedge clk);
          n_qubits = QW'(n); control = QW'(c); target = QW'(t);
          start = 1; busy_cycles = 0; n_done = 0;
          @(negedge clk); start = 0;
          while (busy) @(negedge clk);
          @(negedge clk);                    // last write lands
          apply_cx(model, c, t);
          checks++;
          if (busy_cycles != 2 * ((1 << (n - 2)) + 1) + 1 || n_done != 1) begin
            failures++;
            $display("FAIL n=%0d c=%0d t=%0d: %0d cycles", n, c, t, busy_cycles);
          end
          foreach (model[i]) begin
            checks++;
            if (mem[i] !== model[i]) begin
              failures++; $display("FAIL n=%0d c=%0d t=%0d amp %0d", n, c, t, i);
            end
          end
        end
      end
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
