// tb_type_regfile: self-checking test of the process-line register file.
//
// Keeps a model array beside the register file. Random writes of 1..16
// lanes with random indices and enables (including a whole load cluster of
// 16 registers in one cycle and lanes that collide on one register) are
// followed by reads on all three ports, each returning 16 consecutive
// registers with wrap-around. Also checks that reset clears the file.
module tb_type_regfile;

  localparam int W = 64, NREGS = 32, NL = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [4:0]              ra, rb, rc;
  logic [NL-1:0][W-1:0]    da, db, dc, wd;
  logic                    we;
  logic [NL-1:0]           wl;
  logic [NL-1:0][4:0]      wi;
  logic [W-1:0]            model [NREGS];

  type_regfile #(.W(W), .NREGS(NREGS), .LANES(NL)) dut (
    .clk, .rst_n, .ra_idx(ra), .rb_idx(rb), .rc_idx(rc),
    .ra_data(da), .rb_data(db), .rc_data(dc),
    .we, .wlane_en(wl), .widx(wi), .wdata(wd));

  int checks = 0, failures = 0;

  task automatic check_reads();
    for (int p = 0; p < 3; p++) begin
      ra = 5'($urandom); rb = 5'($urandom); rc = 5'($urandom);
      #1;
      for (int i = 0; i < NL; i++) begin
        checks += 3;
        if (da[i] !== model[5'(ra + 5'(i))]) begin failures++; $display("FAIL port A idx %0d lane %0d", ra, i); end
        if (db[i] !== model[5'(rb + 5'(i))]) begin failures++; $display("FAIL port B idx %0d lane %0d", rb, i); end
        if (dc[i] !== model[5'(rc + 5'(i))]) begin failures++; $display("FAIL port C idx %0d lane %0d", rc, i); end
      end
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wl = '0; wi = '0; wd = '0; ra = 0; rb = 0; rc = 0;
    for (int r = 0; r < NREGS; r++) model[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check_reads();                         // all zero after reset

    // one cycle writes a cluster of 16 consecutive registers
    we = 1; wl = '1;
    for (int i = 0; i < NL; i++) begin
      wi[i] = 5'(i + 8); wd[i] = {$urandom, $urandom};
      model[5'(i + 8)] = wd[i];
    end
    @(negedge clk);
    we = 0;
    check_reads();

    for (int t = 0; t < 200; t++) begin
      we = ($urandom_range(0, 3) != 0);
      wl = NL'($urandom);
      for (int i = 0; i < NL; i++) begin
        wi[i] = (t % 5 == 0) ? 5'(3) : 5'($urandom);   // some cycles: all lanes collide
        wd[i] = {$urandom, $urandom};
      end
      if (we)
        for (int i = 0; i < NL; i++) if (wl[i]) model[wi[i]] = wd[i];   // higher lane wins
      @(negedge clk);
      we = 0;
      check_reads();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
