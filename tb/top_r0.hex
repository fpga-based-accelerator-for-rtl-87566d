05
05
06
05
