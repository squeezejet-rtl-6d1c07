// tb_pointer_array: checks the pointer rotation of pointer_array against the
// published pointer table (contents after 0..3 shifts) and then against a
// (a + shifts) mod 3 model over random shift sequences, on both lookup ports.
module tb_pointer_array;
  logic clk = 0, rst_n = 0, sh = 0;
  logic [1:0][1:0] ad, do_;
  int checks = 0, failures = 0, cyc = 0;
  int shifts = 0;
  // published table: row = AD0..AD2, column = shifts 0..3
  int table_c [3][4] = '{'{0,1,2,0}, '{1,2,0,1}, '{2,0,1,2}};

  pointer_array #(.N(3), .NPORTS(2)) dut (.clk, .rst_n, .sh, .ad, .do_);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int a = 0; a < 3; a++) begin
      ad[0] = 2'(a); ad[1] = 2'((a + 1) % 3);
      #1;
      checks += 2;
      if (do_[0] != 2'((a + shifts) % 3)) begin
        failures++; $display("FAIL shifts=%0d AD%0d=%0d", shifts, a, do_[0]);
      end
      if (do_[1] != 2'(((a + 1) % 3 + shifts) % 3)) failures++;
      if (shifts < 4) begin
        checks++;
        if (int'(do_[0]) != table_c[a][shifts]) failures++;
      end
    end
  endtask

  initial begin
    ad = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int i = 0; i < 60; i++) begin
      sh = (i < 3) ? 1'b1 : 1'($urandom_range(0, 1));
      @(negedge clk);
      if (sh) shifts++;
      sh = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
