// tb_ntt_buffer: fills the buffer through the scalar (stream) port, reads
// rows back on both row ports, writes rows on both row ports and reads
// single elements back; checks data and the one-cycle read latency.
module tb_ntt_buffer;
  import zk_pkg::*;
  import tb_field_pkg::*;
  localparam int LOGN_MAX = 5, LANES = 4, RAW = 3, N = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [1:0][RAW-1:0] rd_row, wr_row;
  fe_t [1:0][LANES-1:0] rd_data, wr_data;
  logic [1:0] wr_en = '0;
  logic s_wr_en = 0;
  logic [LOGN_MAX-1:0] s_wr_addr, s_rd_addr;
  fe_t s_wr_data, s_rd_data;
  fe_t model [N];
  ntt_buffer #(.LOGN_MAX(LOGN_MAX), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_row = '0; wr_row = '0; wr_data = '0; s_wr_addr = '0; s_rd_addr = '0; s_wr_data = '0;
    for (int i = 0; i < N; i++) begin
      model[i] = frand();
      @(negedge clk); s_wr_en = 1; s_wr_addr = 5'(i); s_wr_data = model[i];
    end
    @(negedge clk); s_wr_en = 0;
    for (int r = 0; r < 8; r++) begin
      rd_row[0] = 3'(r); rd_row[1] = 3'(7 - r);
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        checks += 2;
        if (rd_data[0][l] !== model[r*LANES+l]) begin failures++; $display("FAIL p0 r%0d l%0d", r, l); end
        if (rd_data[1][l] !== model[(7-r)*LANES+l]) begin failures++; $display("FAIL p1 r%0d l%0d", r, l); end
      end
    end
    // row writes on both ports
    for (int r = 0; r < 4; r++) begin
      @(negedge clk);
      wr_en = 2'b11; wr_row[0] = 3'(2*r); wr_row[1] = 3'(2*r+1);
      for (int l = 0; l < LANES; l++) begin
        wr_data[0][l] = frand(); wr_data[1][l] = frand();
        model[2*r*LANES+l] = wr_data[0][l]; model[(2*r+1)*LANES+l] = wr_data[1][l];
      end
    end
    @(negedge clk); wr_en = '0;
    for (int i = 0; i < N; i++) begin
      s_rd_addr = 5'(i);
      @(negedge clk);
      checks++;
      if (s_rd_data !== model[i]) begin failures++; $display("FAIL scalar %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
