// tb_vertical_link: the behavioural VL model passes flits and credits both ways while
// healthy, delivers nothing while faulty, and counts the flits lost to the fault.
module tb_vertical_link;
  import defft_pkg::*;
  logic clk = 0, fault = 0;
  link_t chip_out, chip_in, ip_in, ip_out;
  logic [NUM_VC-1:0] chip_out_credit, chip_in_credit, ip_in_credit, ip_out_credit;
  int unsigned lost_flits;
  int checks = 0, failures = 0, exp_lost = 0;

  vertical_link dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    #100us; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      fault = (i >= 200) && (i % 3 != 0);
      chip_out = link_t'({$urandom, $urandom});
      ip_out   = link_t'({$urandom, $urandom});
      chip_in_credit = 2'($urandom);
      ip_in_credit   = 2'($urandom);
      #1;
      checks += 4;
      if (ip_in != (fault ? link_t'('0) : chip_out)) begin failures++; $display("down flit %0d", i); end
      if (chip_in != (fault ? link_t'('0) : ip_out)) begin failures++; $display("up flit %0d", i); end
      if (chip_out_credit != (fault ? 2'b00 : ip_in_credit)) begin failures++; $display("down credit %0d", i); end
      if (ip_out_credit != (fault ? 2'b00 : chip_in_credit)) begin failures++; $display("up credit %0d", i); end
      if (fault) exp_lost += int'(chip_out.valid) + int'(ip_out.valid);
    end
    @(posedge clk); #1;
    checks++;
    if (lost_flits != exp_lost) begin failures++; $display("lost %0d expected %0d", lost_flits, exp_lost); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
