05
7f
80
ff
10
f0
3c
c4
