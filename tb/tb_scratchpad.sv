// tb_scratchpad: random masked vector writes to all banks, mirrored in a
// testbench model, and vector reads at random (unaligned, wrapping)
// addresses compared with the model one cycle after the request.
module tb_scratchpad;
  import sta_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  sp_req_t [NBANK-1:0] req;
  sp_vec_t [NBANK-1:0] rdata;
  int checks = 0, failures = 0;
  logic [DW-1:0] model [NBANK][DEPTH];

  scratchpad #(.DEPTH(DEPTH)) dut (.clk, .req, .rdata);

  initial begin
    req = '0;
    // initialise everything through the write port
    for (int b = 0; b < NBANK; b++)
      for (int a = 0; a < DEPTH; a += SPL) begin
        @(negedge clk);
        req = '0;
        req[b].we = 1; req[b].waddr = SP_AW'(a); req[b].wmask = '1;
        for (int i = 0; i < SPL; i++) begin
          req[b].wdata[i] = $urandom();
          model[b][a+i] = req[b].wdata[i];
        end
      end
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      req = '0;
      for (int b = 0; b < NBANK; b++) begin
        req[b].re    = 1;
        req[b].raddr = SP_AW'($urandom_range(DEPTH-1));
        req[b].we    = $urandom_range(1);
        req[b].waddr = SP_AW'($urandom_range(DEPTH-1));
        req[b].wmask = $urandom();
        for (int i = 0; i < SPL; i++) req[b].wdata[i] = $urandom();
      end
      @(posedge clk);
      #1;
      for (int b = 0; b < NBANK; b++) begin
        for (int i = 0; i < SPL; i++) begin
          checks++;
          if (rdata[b][i] !== model[b][(req[b].raddr + i) % DEPTH]) begin
            failures++;
            $display("bank %0d addr %0d", b, (req[b].raddr + i) % DEPTH);
          end
        end
        if (req[b].we)
          for (int i = 0; i < SPL; i++)
            if (req[b].wmask[i]) model[b][(req[b].waddr + i) % DEPTH] = req[b].wdata[i];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
