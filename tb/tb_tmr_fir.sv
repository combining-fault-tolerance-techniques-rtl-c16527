// tb_tmr_fir -- self-checking test of the TMR FIR accelerator.
//
// Samples are sent as three copies, one of which is often corrupted (as an
// upset on the PS-to-PL path would); the voted output must always equal a
// direct-form FIR of the true samples. Replica faults are emulated by
// forcing a replica's output register: a short (transient) fault must be
// masked without a reconfiguration request; a fault lasting 40 results must
// be masked and must raise dpr_req for that replica only, after exactly
// PERM_THRESH outvoted results; dpr_done must clear the request and the
// reset replica must agree with the others again once its history refills.
module tb_tmr_fir;
  localparam int DW = 16, CW = 16, TAPS = 16, PT = 32, OW = DW + CW + $clog2(TAPS);
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [2:0] in_valid, in_mismatch, out_mismatch, dpr_req, dpr_done;
  logic [2:0][DW-1:0] in_data;
  logic out_valid;
  logic signed [OW-1:0] out_data;
  logic [15:0] masked_count;
  longint hist [$];
  int checks = 0, failures = 0;
  int n_masked_in = 0, n_masked_out = 0;

  always #5 clk = ~clk;

  tmr_fir #(.DW(DW), .CW(CW), .TAPS(TAPS), .PERM_THRESH(PT)) dut (.*);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic longint ref_y();
    longint acc = 0;
    for (int k = 0; k < TAPS; k++)
      if (k < hist.size()) acc += longint'((k + 1) * (TAPS - k)) * hist[hist.size() - 1 - k];
    return acc;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Send one sample; corrupt input copy `bad_in` (3 = none). Returns after
  // the result has been checked.
  task automatic sample(int bad_in);
    logic signed [DW-1:0] x = $urandom;
    longint expv;
    @(negedge clk);
    in_valid = 3'b111;
    in_data  = {x, x, x};
    if (bad_in < 3) begin
      in_data[bad_in] = x ^ DW'($urandom | 1);
      if ($urandom % 2) in_valid[bad_in] = 1'b0;
    end
    hist.push_back(longint'(x));
    expv = ref_y();
    #1;
    check("in_mismatch", in_mismatch, (bad_in < 3) ? (1 << bad_in) : 0);
    @(negedge clk);
    in_valid = 3'b000;
    in_data  = {3{DW'($urandom)}};
    check("out_valid", out_valid, 1);
    check("voted y", out_data, expv);
    if (out_mismatch != 0) n_masked_out++;
    if (bad_in < 3) n_masked_in++;
    @(negedge clk);   // let the result's valid clock end
  endtask

  initial begin
    int req_at;
    in_valid = 0; in_data = 0; dpr_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. upsets on the input copies
    for (int i = 0; i < 200; i++) sample($urandom % 4);
    check("no request after input upsets", dpr_req, 0);
    check("no replica error yet", masked_count, 0);
    // 2. transient fault in replica 0
    force dut.g_rep[0].u_fir.out_data = '1;
    for (int i = 0; i < 5; i++) sample(3);
    release dut.g_rep[0].u_fir.out_data;
    for (int i = 0; i < 20; i++) sample(3);
    check("transient masked", masked_count, 5);
    check("transient: no request", dpr_req, 0);
    // 3. permanent fault in replica 2
    req_at = -1;
    force dut.g_rep[2].u_fir.out_data = 0;
    for (int i = 0; i < 40; i++) begin
      sample(3);
      if (req_at < 0 && dpr_req[2]) req_at = i;
    end
    release dut.g_rep[2].u_fir.out_data;
    check("request raised for replica 2 only", dpr_req, 3'b100);
    check("request after PERM_THRESH results", req_at, PT - 1);
    // 4. reconfiguration done: flag clears, replica refills and agrees again
    @(negedge clk); dpr_done = 3'b100;
    @(negedge clk); dpr_done = 3'b000;
    check("request cleared", dpr_req, 0);
    for (int i = 0; i < TAPS + 30; i++) sample(3);
    check("replica 2 agrees again", out_mismatch, 0);
    check("no new request", dpr_req, 0);
    $display("masked input upsets=%0d masked replica errors=%0d", n_masked_in, n_masked_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
