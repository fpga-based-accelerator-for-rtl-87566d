06
07
06
06
