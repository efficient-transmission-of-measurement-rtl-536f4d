// tb_pkg: shared helpers of the end-to-end testbenches: the data pattern
// that the data source writes and the receiving-computer model checks.
// Word k of the stream (counted from the START that began it) is
// datum(k) = k * 0x9e3779b1 xor 0x5a5a0000, a pattern in which every word
// of a long stream differs, so that a misplaced or stale buffer is caught.
package tb_pkg;
  function automatic logic [31:0] datum(input int unsigned k);
    return (k * 32'h9e3779b1) ^ 32'h5a5a0000;
  endfunction
endpackage
