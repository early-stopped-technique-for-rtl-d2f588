// tb_bch_buffer -- self-checking test of the two-bank codeword buffer.
//
// Fills both banks with random beats, then reads every address of both
// banks in random order while writing new data, and checks that each read
// returns, one clock later, the last value written to that bank/address.
module tb_bch_buffer;
  localparam int N  = 64;
  localparam int P  = 8;
  localparam int NB = (N + P - 1) / P;
  localparam int AW = $clog2(NB);

  logic clk = 1'b0;
  logic wr_en, wr_bank, rd_en, rd_bank;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [P-1:0]  wr_data, rd_data;
  logic [P-1:0]  model [2][NB];
  int checks = 0, failures = 0;

  bch_buffer #(.N(N), .P(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_bank = 0; rd_bank = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < NB; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 1'(b); wr_addr = AW'(a); wr_data = P'($urandom);
        model[b][a] = wr_data;
      end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      logic [P-1:0] expv;
      @(negedge clk);
      rd_en = 1; rd_bank = 1'($urandom); rd_addr = AW'($urandom_range(NB - 1, 0));
      expv = model[rd_bank][rd_addr];
      wr_en = 1; wr_bank = 1'($urandom); wr_addr = AW'($urandom_range(NB - 1, 0));
      wr_data = P'($urandom);
      @(posedge clk);
      model[wr_bank][wr_addr] = wr_data;
      #1;
      checks++;
      if (rd_data !== expv) begin
        failures++;
        if (failures < 10) $display("read %0d/%0d gave %h, expected %h", rd_bank, rd_addr, rd_data, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
