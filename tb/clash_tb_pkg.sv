// clash_tb_pkg: data patterns shared by the C-lash testbenches and the flash
// model, so that every expected value can be worked out without the design.
//
// init_word: content of a flash page that was never written since the start
// of simulation (the flash starts full of old data, "completely dirty").
// data_word: word w of version v of logical page lpn, as written by a host.
package clash_tb_pkg;

  function automatic logic [31:0] init_word(longint unsigned lpn, int unsigned w);
    return 32'hF1A5_0000 ^ (32'(lpn) * 32'd2654435761) ^ (32'(w) * 32'd40503);
  endfunction

  function automatic logic [31:0] data_word(longint unsigned lpn, int unsigned v, int unsigned w);
    return (32'(lpn) << 12) ^ (32'(v) * 32'd97) ^ (32'(w) * 32'd7919) ^ 32'h5EED_0000;
  endfunction

endpackage
