// tb_cluster_router - random words from 16 blocks, random sources and byte
// masks; each output byte is checked against the chosen source.
module tb_cluster_router;
  int checks = 0, failures = 0;
  logic [15:0][7:0][7:0] words;
  logic [3:0] src_a, src_b;
  logic [7:0] mix;
  logic [7:0][7:0] out;

  cluster_router dut (.words, .src_a, .src_b, .mix, .out);

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      for (int k = 0; k < 16; k++) words[k] = {$urandom, $urandom};
      src_a = 4'($urandom); src_b = 4'($urandom); mix = 8'($urandom);
      #1;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (out[i] !== (mix[i] ? words[src_b][i] : words[src_a][i])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
