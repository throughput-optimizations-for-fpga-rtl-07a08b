// sparse_encode.svh: testbench helper that encodes one dense weight row into the
// pruned streaming format: tuples (w, z) with z the count of zero weights before w,
// zero runs over 31 split by filler tuples (0, 31), a terminating tuple whose address
// reaches s_in, three tuples per 64-bit word (tuple i at bits 21*i+20 .. 21*i, weight
// in the upper 16 bits), each row starting in a new word.
function automatic void sparse_encode(input dnn_pkg::q7_8_t row [], input int s_in,
                                      ref logic [63:0] words [$]);
  logic [20:0] t [$];
  int pos = 0;
  for (int k = 0; k < s_in; k++) begin
    if (row[k] != 0) begin
      while (k - pos > 31) begin t.push_back({16'h0, 5'd31}); pos += 32; end
      t.push_back({row[k], 5'(k - pos)});
      pos = k + 1;
    end
  end
  // terminator: a zero weight whose address is at or beyond s_in
  while (pos + 31 < s_in) begin t.push_back({16'h0, 5'd31}); pos += 32; end
  t.push_back({16'h0, 5'd31});
  while (t.size() % 3 != 0) t.push_back({16'h0, 5'd0});
  for (int i = 0; i < t.size(); i += 3)
    words.push_back({1'b0, t[i+2], t[i+1], t[i]});
endfunction
