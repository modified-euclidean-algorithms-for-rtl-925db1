// tb_rs_buffer: writes random data to every address of the received-word
// memory, reads it back in a different order and checks the data and its
// one-cycle read latency.
module tb_rs_buffer;
  localparam int DEPTH = 255;

  logic       clk = 0;
  logic       we, re;
  logic [7:0] waddr, raddr, wdata, rdata;
  int         model [DEPTH];
  int         checks = 0, failures = 0;

  rs_buffer #(.DEPTH(DEPTH), .WIDTH(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (8000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        we = 1; waddr = 8'(i); wdata = 8'($urandom_range(255));
        model[i] = int'(wdata);
      end
      @(negedge clk);
      we = 0;
      for (int i = 0; i < DEPTH; i++) begin
        int a;
        a = (i * 37 + pass) % DEPTH;   // permuted read order
        @(negedge clk);
        re = 1; raddr = 8'(a);
        @(negedge clk);
        re = 0;
        raddr = 8'((a + 1) % DEPTH);    // must not disturb the registered data
        checks++;
        if (int'(rdata) != model[a]) begin
          failures++;
          $display("FAIL addr %0d read %0h expected %0h", a, rdata, model[a]);
        end
        @(negedge clk);   // re low: the read register must hold
        checks++;
        if (int'(rdata) != model[a]) begin
          failures++;
          $display("FAIL addr %0d not held: %0h expected %0h", a, rdata, model[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
