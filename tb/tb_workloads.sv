// tb_workloads: the six evaluated benchmark models, each as a complete tree
// of its tuned maximum depth (Atax 5, Bicg 5, GemmNcubed 5, Matrixmult 4,
// Hybrid_1 6, Hybrid_2 6) with 20 monitored nets, run on the design at its
// default parameters for 20 periods each. Complete trees make every walk
// take the worst-case 2n+1 cycles. The trained coefficients are not
// available, so trees are random; checks are described in tb_top_env.
module tb_workloads;
  localparam int NB = 6;
  int checks [NB], failures [NB];
  bit finished [NB];

  tb_top_env #(.NM(1), .NPER(20), .DEPTH('{5, 5, 5, 5, 5, 5, 5, 5}), .FULL(1'b1)) atax       (.checks(checks[0]), .failures(failures[0]), .finished(finished[0]));
  tb_top_env #(.NM(1), .NPER(20), .DEPTH('{5, 5, 5, 5, 5, 5, 5, 5}), .FULL(1'b1)) bicg       (.checks(checks[1]), .failures(failures[1]), .finished(finished[1]));
  tb_top_env #(.NM(1), .NPER(20), .DEPTH('{5, 5, 5, 5, 5, 5, 5, 5}), .FULL(1'b1)) gemmncubed (.checks(checks[2]), .failures(failures[2]), .finished(finished[2]));
  tb_top_env #(.NM(1), .NPER(20), .DEPTH('{4, 4, 4, 4, 4, 4, 4, 4}), .FULL(1'b1)) matrixmult (.checks(checks[3]), .failures(failures[3]), .finished(finished[3]));
  tb_top_env #(.NM(1), .NPER(20), .DEPTH('{6, 6, 6, 6, 6, 6, 6, 6}), .FULL(1'b1)) hybrid_1   (.checks(checks[4]), .failures(failures[4]), .finished(finished[4]));
  tb_top_env #(.NM(1), .NPER(20), .DEPTH('{6, 6, 6, 6, 6, 6, 6, 6}), .FULL(1'b1)) hybrid_2   (.checks(checks[5]), .failures(failures[5]), .finished(finished[5]));

  function automatic bit all_done();
    foreach (finished[i]) if (!finished[i]) return 0;
    return 1;
  endfunction

  initial begin
    int c, f;
    fork
      begin
        wait (all_done());
      end
      begin
        #10_000_000;
        $display("watchdog expired");
      end
    join_any
    c = 0; f = all_done() ? 0 : 1;
    foreach (checks[i]) begin c += checks[i]; f += failures[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
endmodule
