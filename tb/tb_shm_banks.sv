// tb_shm_banks: random per-bank reads and masked writes on the 32 shared-memory
// banks, checked against a reference copy one cycle later.
module tb_shm_banks;
  localparam int NB = 32, ROWS = 192;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [NB-1:0] en, we; logic [1:0] wmask [NB]; logic [7:0] row [NB]; logic [63:0] wdata [NB], rdata [NB];
  shm_banks #(.NBANKS(NB), .ROWS(ROWS)) dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] m [NB][ROWS]; logic [63:0] exp_d [NB]; logic exp_v [NB];
  initial begin
    en = '0; we = '0;
    for (int b = 0; b < NB; b++) begin wmask[b] = 0; row[b] = 0; wdata[b] = 0; end
    // initialise every row
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      en = '1; we = '1;
      for (int b = 0; b < NB; b++) begin
        wmask[b] = 2'b11; row[b] = 8'(r); wdata[b] = {32'($urandom), 32'($urandom)}; m[b][r] = wdata[b];
      end
    end
    @(negedge clk); en = '0; we = '0;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        en[b] = $urandom_range(1); we[b] = $urandom_range(1); wmask[b] = 2'($urandom_range(3));
        row[b] = 8'($urandom_range(ROWS - 1)); wdata[b] = {32'($urandom), 32'($urandom)};
        exp_v[b] = en[b] && !we[b]; exp_d[b] = m[b][row[b]];
        if (en[b] && we[b]) begin
          if (wmask[b][0]) m[b][row[b]][31:0] = wdata[b][31:0];
          if (wmask[b][1]) m[b][row[b]][63:32] = wdata[b][63:32];
        end
      end
      @(posedge clk); #1;
      for (int b = 0; b < NB; b++) if (exp_v[b]) begin
        checks++;
        if (rdata[b] !== exp_d[b]) begin failures++; $display("FAIL bank %0d", b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
