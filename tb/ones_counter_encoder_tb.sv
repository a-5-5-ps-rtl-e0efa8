`timescale 1ps/1fs
// ones_counter_encoder_tb: feeds one word per clock at the full size
// (4 chains x 280 taps): thermometer words with bubbles, all-zero and
// all-one words and random words. Checks every code against a ones count
// made here, the 7-clock latency, the tag carried with the code, and that
// valid is raised only for samples where the first tap of some chain
// rises from 0.
module ones_counter_encoder_tb;
  localparam int unsigned NC = 4, NT = 280, NB = NC * NT, CW = 11, LAT = 7;
  localparam int unsigned NWORDS = 400;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NB-1:0] tdl;
  logic [31:0] tag_in, tag_out;
  logic valid;
  logic [CW-1:0] code;
  int checks = 0, failures = 0;

  logic [NB-1:0] words [NWORDS];
  int            exp_code [NWORDS];
  bit            exp_valid [NWORDS];

  ones_counter_encoder #(.NCHAINS(NC), .TAPS(NT), .GROUP(20), .TAG_W(32)) dut (
    .clk(clk), .rst_n(rst_n), .tdl(tdl), .tag_in(tag_in),
    .valid(valid), .code(code), .tag_out(tag_out));

  always #1000 clk = ~clk;

  // Word for chain c: the first n taps set, with a few swapped neighbours.
  function automatic logic [NT-1:0] therm(int n);
    logic [NT-1:0] w = '0;
    for (int i = 0; i < n && i < NT; i++) w[i] = 1'b1;
    for (int k = 0; k < 3; k++) begin
      automatic int p = $urandom_range(1, NT - 2);
      automatic logic t = w[p];
      w[p] = w[p+1]; w[p+1] = t;
    end
    return w;
  endfunction

  initial begin
    bit prev_first;
    int n_valid;
    for (int n = 0; n < NWORDS; n++) begin
      automatic int kind = n % 4;
      for (int c = 0; c < NC; c++) begin
        case (kind)
          0: words[n][c*NT +: NT] = '0;
          1: words[n][c*NT +: NT] = therm($urandom_range(0, NT));
          2: words[n][c*NT +: NT] = (n % 8 == 2) ? '1 : therm($urandom_range(200, NT));
          default: for (int i = 0; i < NT; i += 32) words[n][c*NT + i +: 32] = $urandom();
        endcase
      end
      exp_code[n] = $countones(words[n]);
    end
    // Expected hit flags: first taps rising.
    prev_first = 1'b1;
    for (int n = 0; n < NWORDS; n++) begin
      automatic bit f = 1'b0;
      for (int c = 0; c < NC; c++) f |= words[n][c*NT];
      exp_valid[n] = f && !prev_first;
      prev_first = f;
    end
    tdl = '0; tag_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    n_valid = 0;
    fork
      begin
        for (int n = 0; n < NWORDS; n++) begin
          tdl = words[n]; tag_in = 32'(1000 + n);
          @(posedge clk); #1;
        end
        tdl = '0;
      end
      begin
        @(posedge clk); #1;
        repeat (LAT - 1) @(posedge clk);
        #1;
        for (int n = 0; n < NWORDS; n++) begin
          checks++;
          if (32'(code) != exp_code[n] || tag_out != 32'(1000 + n) || valid != exp_valid[n]) begin
            failures++;
            if (failures < 10)
              $display("FAIL n=%0d code=%0d exp=%0d tag=%0d valid=%0d exp=%0d",
                       n, code, exp_code[n], tag_out, valid, exp_valid[n]);
          end
          if (valid) n_valid++;
          @(posedge clk); #1;
        end
      end
    join
    checks++;
    if (n_valid == 0) begin failures++; $display("FAIL no hit detected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
