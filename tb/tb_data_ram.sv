// tb_data_ram: writes every word of the 1 KB RAM with a pattern, reads it
// back with the one-clock read latency, and mixes random reads and writes
// against a reference array.
module tb_data_ram;
  localparam int WORDS = 256;

  logic        clk = 0, we;
  logic [7:0]  addr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [WORDS];
  int checks = 0, failures = 0;

  data_ram dut (.clk, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] pat(int i);
    return 32'(i) * 32'h9E37_79B9 ^ 32'h5A5A_0000;
  endfunction

  initial begin
    we = 0; addr = 0; wdata = 0;
    @(negedge clk);
    for (int i = 0; i < WORDS; i++) begin
      we = 1; addr = 8'(i); wdata = pat(i); model[i] = pat(i);
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < WORDS; i++) begin
      addr = 8'(i);
      @(negedge clk);                 // data appears one clock later
      checks++;
      if (rdata !== model[i]) begin
        failures++; $display("FAIL word %0d: %h exp %h", i, rdata, model[i]);
      end
    end
    repeat (3000) begin
      int i;
      i = $urandom_range(0, WORDS - 1);
      addr = 8'(i);
      if ($urandom_range(0, 1) == 1) begin
        we = 1; wdata = $urandom; model[i] = wdata;
        @(negedge clk);
      end else begin
        we = 0;
        @(negedge clk);
        checks++;
        if (rdata !== model[i]) begin
          failures++; $display("FAIL rnd word %0d: %h exp %h", i, rdata, model[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
