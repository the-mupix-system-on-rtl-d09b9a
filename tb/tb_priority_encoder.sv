// tb_priority_encoder: random and single-bit request vectors; the expected
// index is found as the position of req & -req (the isolated lowest bit).
module tb_priority_encoder;
  localparam int N = 40;
  logic [N-1:0] req;
  logic         found;
  logic [5:0]   idx;
  int checks = 0, failures = 0;

  priority_encoder #(.N(N)) dut (.req(req), .found(found), .idx(idx));

  function automatic int lowest(input logic [N-1:0] v);
    logic [N-1:0] iso;
    iso = v & (~v + 1'b1);
    for (int i = 0; i < N; i++) if (iso == (N'(1) << i)) return i;
    return 0;
  endfunction

  task automatic check(input logic [N-1:0] v);
    req = v;
    #1;
    checks++;
    if (found !== (v != 0) || (v != 0 && idx !== 6'(lowest(v)))) begin
      failures++;
      $display("req %h: found %b idx %0d, expected %0d", v, found, idx, lowest(v));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check('0);
    for (int i = 0; i < N; i++) check(N'(1) << i);
    for (int i = 0; i < N; i++) check({N{1'b1}} << i);
    for (int t = 0; t < 2000; t++) begin
      logic [N-1:0] v;
      v = {$urandom, $urandom};
      // sparse vectors as well as dense ones
      if (t % 2) v = v & {$urandom, $urandom} & {$urandom, $urandom};
      check(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
