0
