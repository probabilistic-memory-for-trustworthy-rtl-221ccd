// tb_pmem_mat: one mat of four default-size subarrays. Random back-to-back
// writes and reads over all four subarrays; every response is compared with a
// shadow memory and one reference RNG per subarray (SEED_BASE + s*0x0101),
// which also shows that each subarray draws from its own generator.
module tb_pmem_mat;
  import pmem_pkg::*;
  import pmem_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, we = 0, seed_we = 0, rvalid;
  mode_e wmode = MODE_DET, rmode;
  logic [11:0] addr = 0;
  logic [15:0] wdata = 0, seed_in = 0, rdata;
  logic [15:0] mem [4096];
  mode_e       md  [4096];
  ref_grng rg [4];
  int checks = 0, failures = 0, hits [4];
  logic        exp_valid = 0;
  logic [15:0] exp_data;
  mode_e       exp_mode;

  pmem_mat #(.N_SUB(4), .SEED_BASE(16'h1D2B)) dut (
    .clk, .rst_n, .en, .we, .wmode, .addr, .wdata, .seed_we, .seed_in, .rvalid, .rmode, .rdata);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++) begin rg[s] = new(16'h1D2B + 16'(s) * 16'h0101, 12); hits[s] = 0; end
    for (int a = 0; a < 4096; a++) begin mem[a] = 0; md[a] = MODE_DET; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 12'(a); wdata = 16'($urandom); wmode = MODE_DET;
      mem[a] = wdata;
    end
    for (int i = 0; i < 8000; i++) begin
      automatic int a = $urandom % 4096;
      automatic int s = a / 1024;
      @(negedge clk);
      chk(rvalid == exp_valid, "rvalid");
      if (exp_valid) begin
        chk(rdata == exp_data, $sformatf("data got %h exp %h", rdata, exp_data));
        chk(rmode == exp_mode, "mode");
      end
      en = 1; addr = 12'(a);
      case ($urandom % 4)
        0: begin we = 1; wdata = 16'($urandom); wmode = MODE_DET; end
        1: begin we = 1; wdata = pack_prob(8'($urandom), 4'($urandom)); wmode = MODE_PROB; end
        default: we = 0;
      endcase
      exp_valid = !we;
      if (we) begin mem[a] = wdata; md[a] = wmode; end
      else begin
        exp_mode = md[a];
        hits[s]++;
        if (md[a] == MODE_PROB) begin
          exp_data = 16'($signed(mem[a][11:4])) + 16'(noise_of(int'(mem[a][3:0]), rg[s].eps()));
          rg[s].step();
        end else exp_data = mem[a];
      end
    end
    @(negedge clk); en = 0;
    chk(rvalid == exp_valid, "last rvalid");
    if (exp_valid) chk(rdata == exp_data, "last data");
    for (int s = 0; s < 4; s++) chk(hits[s] > 0, "every subarray read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
