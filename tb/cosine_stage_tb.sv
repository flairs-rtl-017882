// cosine_stage_tb: one cascade stage. Four random vectors d_0..d_3 are sent
// through it with random gaps. The test checks that d_0 is kept (not
// forwarded), that d_1..d_3 are forwarded unchanged one cycle later, and that
// dist_0j = 1 - d_0.d_j/(|d_0||d_j|) comes out bit-exact for j = 1..3. The
// norm of d_2 is made valid late so the finish step has to wait, and the short
// vectors make the next vector end while a division is still running, so the
// stage must request a stall (counted; the test fails if none happens). A
// clear and second round checks that the stage takes a new first vector, and
// the read-back port must then return d_4 word by word.
module cosine_stage_tb;
  import flairs_pkg::*;
  import flairs_ref_pkg::*;
  localparam int NC = 8, NP = 16, P = 6;
  logic clk = 0, rst_n = 0, clear = 0, adv;
  logic in_valid = 0, out_valid, stall_req, idle;
  dvec_word_t in_word, out_word;
  ufix_t l2_norm [NC];
  logic [NC-1:0] l2_valid;
  logic dv_valid, dv_ready;
  cidx_t dv_i, dv_j;
  ufix_t dv_dist;
  logic held;
  cidx_t held_client;
  pidx_t lk_idx = '0;
  fix_t lk_data;
  int checks = 0, failures = 0, stalls = 0, fwd = 0;
  longint d [NC][P];
  longint nrm [NC];
  int results;

  always #5 clk = ~clk;
  assign adv = !stall_req;

  cosine_stage #(.MAX_CLIENTS(NC), .MAX_PARAMS(NP)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic longint dot(int a, int b);
    longint s = 0;
    for (int k = 0; k < P; k++) s += d[a][k] * d[b][k];
    return s;
  endfunction

  always @(posedge clk) begin
    dv_ready <= ($urandom_range(0, 1) != 0);
    if (stall_req) stalls++;
    if (out_valid && adv) fwd++;
    if (rst_n && dv_valid && dv_ready) begin
      check(longint'(dv_dist) == cos_dist(dot(dv_i, dv_j), nrm[dv_i], nrm[dv_j]),
            $sformatf("dist %0d,%0d got %0d exp %0d", dv_i, dv_j, dv_dist,
                      cos_dist(dot(dv_i, dv_j), nrm[dv_i], nrm[dv_j])));
      results++;
    end
  end

  // forwarded words must equal the input one cycle earlier
  dvec_word_t prev_in;
  logic prev_take, prev_fwd;
  always @(posedge clk) begin
    if (rst_n && prev_fwd) check(out_valid && out_word == prev_in, "forwarded word");
    prev_fwd  <= in_valid && adv && !clear && dut.has_first;
    prev_in   <= in_word;
    prev_take <= in_valid && adv;
  end

  task automatic send(input int c);
    for (int k = 0; k < P; k++) begin
      in_word  = '{client: cidx_t'(c), idx: pidx_t'(k), data: fix_t'(d[c][k]), last: (k == P - 1)};
      in_valid = 1;
      @(posedge clk);
      while (!adv) @(posedge clk);
      #1;
      in_valid = 0;
      if ($urandom_range(0, 3) == 0) @(posedge clk);
      #1;
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      automatic longint s = 0;
      for (int k = 0; k < P; k++) begin
        d[c][k] = longint'($urandom_range(0, 131072)) - 65536;
        s += d[c][k] * d[c][k];
      end
      nrm[c] = longint'(isqrt(longint'(s)));
      l2_norm[c] = ufix_t'(nrm[c]);
    end
    l2_valid = '1;
    l2_valid[2] = 0;
    in_word = '0;
    results = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    send(0); send(1); send(2);
    fork begin repeat (300) @(posedge clk); l2_valid[2] = 1; end join_none
    send(3);
    wait (results == 3 && idle);
    check(fwd == 3 * P, $sformatf("forwarded %0d words", fwd));
    // second round: d_4 becomes the stored vector
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    send(4); send(5); send(6);
    wait (results == 5 && idle);
    repeat (5) @(posedge clk);
    check(results == 5, "result count");
    check(stalls > 0, "stall happened");
    check(held && held_client == cidx_t'(4), $sformatf("held %0d client %0d", held, held_client));
    for (int k = 0; k < P; k++) begin
      lk_idx = pidx_t'(k);
      #1 check(longint'(lk_data) == d[4][k], $sformatf("read-back word %0d", k));
    end
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
